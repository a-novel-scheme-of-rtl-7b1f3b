// tb_threshold_logic: self-checking test of the level-to-attenuation mapping.
//
// With the default thresholds (32 steps of 512 from 0) the code must equal
// min(32, ceil(level / 512)). Checks every level at a step boundary and
// random levels, the one-cycle latency of `code_valid`, code 0 when the
// level is not valid, and the 2 dB (4-code) per range-bin rise that a
// full-scale step gives after the 8-bin moving average.
module tb_threshold_logic;
  localparam int W = 14, ATT_W = 6;
  logic clk = 0, rst = 1, level_valid = 0;
  logic [W-1:0] level = '0;
  logic code_valid;
  logic [ATT_W-1:0] code;
  int checks = 0, failures = 0;

  threshold_logic dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_code(int l);
    int c = (l + 511) / 512;
    return c > 32 ? 32 : c;
  endfunction

  task automatic apply(input logic v, input int l, input int exp_code);
    level_valid = v; level = W'(l);
    @(posedge clk); #1;
    checks++;
    if (code_valid !== v || code !== ATT_W'(exp_code)) begin
      failures++;
      $display("FAIL level %0d valid %0b: got %0d/%0b exp %0d", l, v, code, code_valid, exp_code);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k <= 32; k++) begin
      if (k * 512 < (1 << W)) apply(1'b1, k * 512, ref_code(k * 512));
      if (k * 512 + 1 < (1 << W)) apply(1'b1, k * 512 + 1, ref_code(k * 512 + 1));
      if (k > 0) apply(1'b1, k * 512 - 1, ref_code(k * 512 - 1));
    end
    apply(1'b1, (1 << W) - 1, 32);
    for (int n = 0; n < 2000; n++) begin
      int l = $urandom % (1 << W);
      logic v = ($urandom % 5) != 0;
      apply(v, l, v ? ref_code(l) : 0);
    end
    // 2 dB per range bin for a full-scale step through an 8-bin average
    for (int k = 1; k <= 8; k++) begin
      apply(1'b1, (((1 << W) - 1) * k) / 8, 4 * k);
    end
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
