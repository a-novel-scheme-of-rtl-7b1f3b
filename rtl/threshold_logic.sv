// threshold_logic: turns a two-PRT averaged clutter level into an attenuation
// code for the Pre-IF amplifier.
//
// The level is compared against NUM_STEPS thresholds
//   T(k) = THRESH_BASE + k * THRESH_STEP,   k = 0 .. NUM_STEPS-1,
// and the code is the number of thresholds the level exceeds (level > T(k)).
// One code step is one LSB of the 6-bit attenuator, 0.5 dB (63 steps make its
// 31.5 dB). The paper gives neither the thresholds nor the mapping, only that
// the gain control spans about 16 dB and that the detector range is matched
// to it. The defaults (32 steps of 512 ADC codes from 0) spread the 16 dB over
// the whole 14-bit ADC range, so code = ceil(level / 512), at most 32; with
// an 8-bin moving average a full-scale step then raises the code by 4 (2 dB)
// per range bin, the rate the paper quotes.
//
// Timing: `code` and `code_valid` are registered, one cycle after `level`.
module threshold_logic #(
  parameter int unsigned W           = 14,
  parameter int unsigned ATT_W       = 6,
  parameter int unsigned NUM_STEPS   = 32,
  parameter int unsigned THRESH_BASE = 0,
  parameter int unsigned THRESH_STEP = 512
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             level_valid,
  input  logic [W-1:0]     level,
  output logic             code_valid,
  output logic [ATT_W-1:0] code
);

  initial assert (NUM_STEPS < (1 << ATT_W)) else $error("threshold_logic: NUM_STEPS too large for ATT_W");

  function automatic longint unsigned thresh(int unsigned k);
    return longint'(THRESH_BASE) + longint'(k) * longint'(THRESH_STEP);
  endfunction

  logic [ATT_W-1:0] count;

  always_comb begin
    count = '0;
    for (int unsigned k = 0; k < NUM_STEPS; k++) begin
      if (longint'(level) > thresh(k)) count = count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      code_valid <= 1'b0;
      code       <= '0;
    end else begin
      code_valid <= level_valid;
      code       <= level_valid ? count : '0;
    end
  end

endmodule
