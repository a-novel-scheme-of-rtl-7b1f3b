// diagc_top: the DIAGC card's FPGA logic, from the ADC samples and the radar
// timing signals to the 6-bit attenuation control of the Pre-IF amplifier.
//
// Per dwell: in the 1st PRT the detected-IF samples are smoothed by an 8-bin
// range moving average and stored per range bin; in the 2nd PRT the new
// moving average is averaged with the stored one and written back; from the
// 3rd PRT on the two-PRT average of each bin is read, turned into an
// attenuation code by threshold logic and driven on A0:A5, so that strong
// clutter is attenuated before it saturates the receiver while weak returns
// keep full gain. In the 1st and 2nd PRT and while `diagc_en` is low the
// attenuation is 0. This data flow follows the paper; the sizes beyond the
// ADC width, the window and the attenuator width are this design's choices.
//
// Clock and reset: `clk` is the range clock, one range bin per cycle; `rst`
// is the power-on reset, synchronous, active high.
//
// Timing: with the rising edge of `prt` sampled at clock edge k, range bin 0
// is counted in cycle k+2; the ADC word on `adc_data` in the cycle of bin b is
// taken as the sample of bin b. In APPLY the map word of bin b + cal_offset
// is read in the cycle of bin b and reaches `atten` 3 cycles later. An
// external chain (amplifier switching, coupled detector, ADC pipeline) adds
// its own delay; `cal_offset` is set at calibration so that each range bin
// meets the attenuation computed for it.
module diagc_top
  import diagc_pkg::*;
#(
  parameter int unsigned NUM_BINS    = 2048,
  parameter int unsigned NUM_STEPS   = 32,
  parameter int unsigned THRESH_BASE = 0,
  parameter int unsigned THRESH_STEP = 512,
  localparam int unsigned BIN_W      = $clog2(NUM_BINS)
) (
  input  logic             clk,         // range clock
  input  logic             rst,         // power-on reset
  input  logic             dwell,       // dwell start from the timing generator
  input  logic             prt,         // PRT start from the timing generator
  input  logic [ADC_W-1:0] adc_data,    // ADC D0:D13
  input  logic             diagc_en,    // DIAGC on / off
  input  logic [BIN_W-1:0] cal_offset,  // response-time correction, range bins
  output logic [ATT_W-1:0] atten,       // attenuation control A0:A5, 0.5 dB/LSB
  output prt_phase_e       phase,       // phase of the current PRT (status)
  output logic [7:0]       prt_num      // PRT number in the dwell, 1-based (status)
);

  logic             prt_start;
  logic [BIN_W-1:0] bin;
  logic             bin_valid;

  diagc_timing #(.NUM_BINS(NUM_BINS)) u_timing (
    .clk, .rst, .dwell, .prt,
    .phase, .prt_num, .prt_start, .bin, .bin_valid
  );

  // The moving average is only needed in the 1st and 2nd PRT.
  logic             ma_in_valid;
  logic             ma_valid;
  logic [ADC_W-1:0] ma_dout;

  assign ma_in_valid = bin_valid && (phase == PH_STORE || phase == PH_ACCUM);

  moving_avg #(.W(ADC_W), .LEN(MA_LEN)) u_ma (
    .clk, .rst,
    .clr      (prt_start),
    .in_valid (ma_in_valid),
    .din      (adc_data),
    .out_valid(ma_valid),
    .dout     (ma_dout)
  );

  logic             ena, wea, enb;
  logic [BIN_W-1:0] addra, addrb;
  logic [ADC_W-1:0] dia, dob;
  logic             level_valid;
  logic [ADC_W-1:0] level;

  clutter_map_ctrl #(.NUM_BINS(NUM_BINS), .W(ADC_W)) u_ctrl (
    .clk, .rst,
    .phase, .bin, .bin_valid, .cal_offset,
    .ma_valid, .ma_dout,
    .ena, .wea, .addra, .dia, .enb, .addrb, .dob,
    .level_valid, .level
  );

  dp_bram #(.DEPTH(NUM_BINS), .W(ADC_W)) u_map (
    .clk,
    .ena, .wea, .addra, .dia,
    .enb, .rstb(rst), .addrb, .dob
  );

  logic             code_valid;
  logic [ATT_W-1:0] code;

  threshold_logic #(
    .W(ADC_W), .ATT_W(ATT_W), .NUM_STEPS(NUM_STEPS),
    .THRESH_BASE(THRESH_BASE), .THRESH_STEP(THRESH_STEP)
  ) u_thr (
    .clk, .rst,
    .level_valid, .level,
    .code_valid, .code
  );

  // Output register to the attenuator; on/off switch registered with it.
  always_ff @(posedge clk) begin
    if (rst) atten <= '0;
    else     atten <= (diagc_en && code_valid) ? code : '0;
  end

endmodule
