// tb_diagc_timing: self-checking test of the dwell/PRT bookkeeping and the
// range-bin counter.
//
// Sends PRT pulses (3 cycles high) of random length, some shorter and some
// longer than NUM_BINS, PRTs before the first dwell, dwell pulses that fall
// alone or together with a PRT pulse. After every clock edge it checks
// `phase`, `prt_num`, `bin` and `bin_valid` against a reference kept from
// the edges it drove: a PRT edge sampled at clock edge k changes the phase
// at edge k+1 and gives bin 0 at edge k+2.
module tb_diagc_timing;
  import diagc_pkg::*;
  localparam int NUM_BINS = 64, BIN_W = $clog2(NUM_BINS);
  logic clk = 0, rst = 1, dwell = 0, prt = 0;
  prt_phase_e phase;
  logic [7:0] prt_num;
  logic prt_start;
  logic [BIN_W-1:0] bin;
  logic bin_valid;
  int checks = 0, failures = 0;

  diagc_timing #(.NUM_BINS(NUM_BINS)) dut (.*);

  always #5 clk = ~clk;

  // reference state
  int edge_n = 0;          // clock edges since reset release
  int bin0_edge = -1000;   // edge after which bin 0 is shown
  int pend_bin0 = -1;      // bin 0 edge of a PRT already sampled
  int num_ref = 0;         // PRT number shown
  int pend_num = -1;       // PRT number to show from edge pend_edge
  int pend_edge = -1;
  logic seen_dwell = 0;
  logic dwell_prev = 0, prt_prev = 0;
  int phase_count[4];

  function automatic prt_phase_e ref_phase(int n);
    return n == 0 ? PH_IDLE : n == 1 ? PH_STORE : n == 2 ? PH_ACCUM : PH_APPLY;
  endfunction

  always @(posedge clk) begin
    if (!rst) begin
      logic d_rise, p_rise;
      edge_n++;
      d_rise = dwell && !dwell_prev;
      p_rise = prt && !prt_prev;
      dwell_prev = dwell; prt_prev = prt;
      // input sampled at this edge: effect on phase next edge, bin 0 the edge after
      if (d_rise) begin
        seen_dwell = 1;
        pend_num = p_rise ? 1 : 0; pend_edge = edge_n + 1;
      end else if (p_rise && seen_dwell) begin
        pend_num = (pend_edge > edge_n ? pend_num : num_ref) + 1;
        if (pend_num > 255) pend_num = 255;
        pend_edge = edge_n + 1;
      end
      if (p_rise) pend_bin0 = edge_n + 2;
      if (pend_bin0 == edge_n) bin0_edge = pend_bin0;
      if (pend_edge == edge_n) num_ref = pend_num;
      #1;
      begin
        int b;
        logic v;
        b = edge_n - bin0_edge;
        v = b >= 0 && b < NUM_BINS;
        checks++;
        if (bin_valid !== v || (v && bin !== BIN_W'(b))) begin
          failures++;
          $display("FAIL edge %0d bin %0d/%0b exp %0d/%0b", edge_n, bin, bin_valid, b, v);
        end
        checks++;
        if (phase !== ref_phase(num_ref) || prt_num !== 8'(num_ref)) begin
          failures++;
          $display("FAIL edge %0d phase %0d num %0d exp num %0d", edge_n, phase, prt_num, num_ref);
        end
        phase_count[phase]++;
      end
    end
  end

  task automatic send_prt(input int len, input logic with_dwell);
    @(negedge clk);
    prt = 1; dwell = with_dwell;
    @(negedge clk); dwell = 0;
    @(negedge clk);
    @(negedge clk); prt = 0;
    repeat (len - 3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // PRTs before any dwell: phase stays IDLE, bins still counted
    send_prt(80, 0);
    send_prt(40, 0);
    for (int d = 0; d < 12; d++) begin
      if (d % 3 == 0) begin
        send_prt(NUM_BINS + 5, 1);          // dwell with the 1st PRT
      end else begin
        @(negedge clk) dwell = 1;            // dwell alone, PRT later
        @(negedge clk) dwell = 0;
        repeat (4) @(negedge clk);
        send_prt(NUM_BINS + 5, 0);
      end
      for (int p = 0; p < 2 + int'($urandom % 5); p++)
        send_prt(NUM_BINS - 20 + int'($urandom % 40), 0);
    end
    repeat (NUM_BINS + 4) @(negedge clk);
    // every phase must have been visited
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (phase_count[i] == 0) begin failures++; $display("FAIL phase %0d never seen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
