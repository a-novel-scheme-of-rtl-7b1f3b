// moving_avg: range moving-average filter over LEN range bins.
//
// Each valid ADC sample enters a LEN-deep history; a running sum adds the new
// sample and drops the one that leaves the window, and the output is the sum
// divided by LEN (a shift, so LEN must be a power of two). The window length
// of 8 range bins follows the paper. Clearing the history with `clr` at the
// start of every PRT, so that the first bins of a PRT average against zeros,
// is this design's choice.
//
// Timing: one sample per clock. `dout` is valid (`out_valid`) one cycle after
// the sample it includes last; dout = floor((x[n] + ... + x[n-LEN+1]) / LEN).
module moving_avg #(
  parameter int unsigned W   = 14,
  parameter int unsigned LEN = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clr,        // empty the window (start of PRT)
  input  logic         in_valid,
  input  logic [W-1:0] din,
  output logic         out_valid,
  output logic [W-1:0] dout
);

  localparam int unsigned SH  = $clog2(LEN);
  localparam int unsigned SUM_W = W + SH;

  initial assert ((1 << SH) == LEN) else $error("moving_avg: LEN must be a power of two");

  logic [W-1:0]     hist [LEN];
  logic [SUM_W-1:0] sum;

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      for (int i = 0; i < LEN; i++) hist[i] <= '0;
      sum       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        hist[0] <= din;
        for (int i = 1; i < LEN; i++) hist[i] <= hist[i-1];
        sum <= sum + SUM_W'(din) - SUM_W'(hist[LEN-1]);
      end
    end
  end

  assign dout = W'(sum >> SH);

endmodule
