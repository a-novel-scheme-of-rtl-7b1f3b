// tb_moving_avg: self-checking test of the 8-bin range moving average.
//
// Drives random 14-bit samples with random gaps in `in_valid` and a clear
// every 100 cycles, keeps its own list of the samples since the last clear,
// and checks every output one cycle after its last sample against
// floor(sum of the last 8 samples / 8) (missing samples count as 0). Also
// checks a full-scale step, which must rise by 2047 or 2048 per sample.
module tb_moving_avg;
  localparam int W = 14, LEN = 8;
  logic clk = 0, rst = 1, clr = 0, in_valid = 0;
  logic [W-1:0] din = '0;
  logic out_valid;
  logic [W-1:0] dout;
  int checks = 0, failures = 0;

  moving_avg #(.W(W), .LEN(LEN)) dut (.*);

  always #5 clk = ~clk;

  int hist[$];
  int expected;
  logic exp_valid;

  function automatic int ref_avg();
    int s = 0;
    for (int i = 0; i < LEN && i < hist.size(); i++) s += hist[hist.size()-1-i];
    return s / LEN;
  endfunction

  task automatic drive(input logic v, input int x, input logic c);
    in_valid = v; din = W'(x); clr = c;
    @(posedge clk); #1;
    if (c) begin
      hist.delete();
      exp_valid = 0;
    end else begin
      exp_valid = v;
      if (v) begin hist.push_back(x); expected = ref_avg(); end
    end
    checks++;
    if (out_valid !== exp_valid) begin
      failures++; $display("FAIL valid: got %0b exp %0b", out_valid, exp_valid);
    end else if (exp_valid && dout !== W'(expected)) begin
      failures++; $display("FAIL dout: got %0d exp %0d", dout, expected);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      drive(($urandom % 4) != 0, $urandom % (1 << W), (n % 100) == 0);
    end
    // full-scale step after a clear: 2 dB per bin at the attenuator
    drive(1'b0, 0, 1'b1);
    for (int n = 1; n <= 10; n++) begin
      drive(1'b1, (1 << W) - 1, 1'b0);
      checks++;
      if (dout !== W'((((1 << W) - 1) * (n < LEN ? n : LEN)) / LEN)) begin
        failures++; $display("FAIL step n=%0d got %0d", n, dout);
      end
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
