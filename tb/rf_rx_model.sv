// rf_rx_model: behavioural model (not synthesizable) of the analog chain
// around the DIAGC logic, for closed-loop simulation: the gain-controlled
// Pre-IF amplifier with its 6-bit attenuator, the coupled detector path and
// the 14-bit ADC.
//
// Levels are integers in units of 1/1024 dB relative to the point where the
// receiver after the Pre-IF amplifier starts to saturate: `echo` > 0 means a
// return that would saturate the receiver at full gain. The attenuator takes
// 0.5 dB (512 units) per LSB of `atten` and switches one range clock after the
// code is presented. `saturated` is high while the attenuated level is above
// 0. The detector is taken to be logarithmic with its range matched to the
// 16 dB control range: the ADC code is the attenuated level clamped to
// 0 .. 16383, i.e. 1024 codes per dB above the saturation point. The ADC has
// a pipeline latency of ADC_LAT range clocks. All of these are modelling
// choices; only the 6-bit / 31.5 dB attenuator and the 14-bit ADC come from
// the described hardware.
module rf_rx_model #(
  parameter int ADC_LAT = 3
) (
  input  logic        clk,       // range clock
  input  int          echo,      // return level at the amplifier input, see above
  input  logic [5:0]  atten,     // A0:A5 from the DIAGC logic
  output logic [13:0] adc_data,  // ADC D0:D13
  output logic        saturated  // receiver driven beyond its linear region
);

  logic [5:0]  att_applied = '0;
  logic [13:0] pipe [ADC_LAT];
  int          level;

  initial for (int i = 0; i < ADC_LAT; i++) pipe[i] = '0;

  always_comb begin
    level     = echo - 512 * int'(att_applied);
    saturated = level > 0;
  end

  always_ff @(posedge clk) begin
    att_applied <= atten;
    pipe[0] <= (level < 0) ? 14'd0 : (level > 16383) ? 14'd16383 : 14'(level);
    for (int i = 1; i < ADC_LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign adc_data = pipe[ADC_LAT-1];

endmodule
