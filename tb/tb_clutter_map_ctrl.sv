// tb_clutter_map_ctrl: self-checking test of the clutter-map read/write
// control and the two-PRT averaging.
//
// The RAM is modelled here (synchronous read, write on port A). Each dwell
// runs one STORE PRT, one ACCUM PRT and three APPLY PRTs with random
// moving-average values and a random read-ahead `cal_offset`. Every cycle it
// checks the port-A write (enable, address, data), and in APPLY the level
// handed to threshold logic: floor((ma1 + ma2) / 2) of bin b + cal_offset,
// or 0 past the last bin. After the ACCUM PRT it compares the whole map.
module tb_clutter_map_ctrl;
  import diagc_pkg::*;
  localparam int NUM_BINS = 64, W = 14, BIN_W = $clog2(NUM_BINS);
  logic clk = 0, rst = 1;
  prt_phase_e phase = PH_IDLE;
  logic [BIN_W-1:0] bin = '0, cal_offset = '0;
  logic bin_valid = 0, ma_valid = 0;
  logic [W-1:0] ma_dout = '0;
  logic ena, wea, enb, level_valid;
  logic [BIN_W-1:0] addra, addrb;
  logic [W-1:0] dia, dob, level;
  int checks = 0, failures = 0;
  int apply_reads = 0, oob_reads = 0;

  clutter_map_ctrl #(.NUM_BINS(NUM_BINS), .W(W)) dut (.*);

  // RAM model
  logic [W-1:0] mem [NUM_BINS];
  always @(posedge clk) begin
    if (enb) dob <= mem[addrb];
    if (ena && wea) mem[addra] <= dia;
  end

  always #5 clk = ~clk;

  int ma1[NUM_BINS], ma2[NUM_BINS], expmap[NUM_BINS];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_prt(input prt_phase_e ph, input int vals[NUM_BINS], input int cal);
    cal_offset = BIN_W'(cal);
    for (int i = 0; i <= NUM_BINS; i++) begin
      @(negedge clk);
      phase     = ph;
      bin       = BIN_W'(i);
      bin_valid = i < NUM_BINS;
      ma_valid  = i >= 1 && (ph == PH_STORE || ph == PH_ACCUM);
      ma_dout   = i >= 1 ? W'(vals[i-1]) : '0;
      #1;
      if (i >= 1) begin
        int b = i - 1;
        case (ph)
          PH_STORE: check(ena && wea && addra == BIN_W'(b) && dia == W'(vals[b]),
                          $sformatf("store bin %0d", b));
          PH_ACCUM: check(ena && wea && addra == BIN_W'(b) && dia == W'((ma1[b] + vals[b]) / 2),
                          $sformatf("accum bin %0d dia %0d", b, dia));
          default: begin
            check(!(ena && wea), "write outside STORE/ACCUM");
            if (ph == PH_APPLY) begin
              int exp_level = (b + cal < NUM_BINS) ? expmap[b + cal] : 0;
              apply_reads++;
              if (b + cal >= NUM_BINS) oob_reads++;
              check(level_valid && level == W'(exp_level),
                    $sformatf("apply bin %0d cal %0d level %0d exp %0d", b, cal, level, exp_level));
            end else begin
              check(!level_valid, "level valid in IDLE");
            end
          end
        endcase
      end
    end
    @(negedge clk);
    bin_valid = 0; ma_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    run_prt(PH_IDLE, ma1, 0);
    for (int d = 0; d < 6; d++) begin
      for (int b = 0; b < NUM_BINS; b++) begin
        ma1[b] = $urandom % (1 << W);
        ma2[b] = $urandom % (1 << W);
        expmap[b] = (ma1[b] + ma2[b]) / 2;
      end
      run_prt(PH_STORE, ma1, 0);
      run_prt(PH_ACCUM, ma2, 0);
      for (int b = 0; b < NUM_BINS; b++)
        check(int'(mem[b]) == expmap[b], $sformatf("map bin %0d", b));
      for (int p = 0; p < 3; p++) run_prt(PH_APPLY, ma1, (p == 0) ? 0 : int'($urandom % 20));
    end
    check(apply_reads > 0 && oob_reads > 0, "read-ahead past the last bin never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
