// clutter_map_ctrl: read/write control of the clutter map and the two-PRT
// averaging.
//
// The map holds one word per range bin in a dual-port RAM (port A writes,
// port B reads). What happens in a PRT depends on its phase:
//   STORE (1st PRT)  the moving average of bin b is written to address b;
//   ACCUM (2nd PRT)  address b is read, averaged with the new moving average
//                    of bin b, (stored + new) / 2, and written back;
//   APPLY (3rd PRT on) address b + cal_offset is read and handed on as the
//                    clutter level for threshold logic; nothing is written.
// The phases and the averaging follow the paper. `cal_offset` is the paper's
// calibrated correction for the response time between the map read and the
// change of amplifier gain; reading ahead by a fixed number of bins is how
// this design applies it. Reads past the last bin give level 0.
//
// Timing (stage 0 = the cycle in which `bin` = b is on the input):
//   stage 0: read of address b (ACCUM) or b + cal_offset (APPLY) is issued;
//   stage 1: `ma_valid`/`ma_dout` carry the moving average of bin b (the
//            moving_avg latency is one cycle), the RAM word is on `dob`; the
//            write of bin b happens at the end of this cycle, and in APPLY
//            `level`/`level_valid` are driven combinationally.
// In ACCUM the read of b+1 and the write of b share a cycle on different
// addresses, so the read-before-write order of the RAM does not matter.
module clutter_map_ctrl
  import diagc_pkg::*;
#(
  parameter int unsigned NUM_BINS = 2048,
  parameter int unsigned W        = 14,
  localparam int unsigned BIN_W   = $clog2(NUM_BINS)
) (
  input  logic             clk,
  input  logic             rst,
  // stage 0
  input  prt_phase_e       phase,
  input  logic [BIN_W-1:0] bin,
  input  logic             bin_valid,
  input  logic [BIN_W-1:0] cal_offset,
  // stage 1
  input  logic             ma_valid,
  input  logic [W-1:0]     ma_dout,
  // RAM ports
  output logic             ena,
  output logic             wea,
  output logic [BIN_W-1:0] addra,
  output logic [W-1:0]     dia,
  output logic             enb,
  output logic [BIN_W-1:0] addrb,
  input  logic [W-1:0]     dob,
  // clutter level for threshold logic (APPLY only)
  output logic             level_valid,
  output logic [W-1:0]     level
);

  // Stage 0: read address.
  logic [BIN_W:0] ahead;     // one bit wider to see reads past the end
  logic           in_range;

  assign ahead    = {1'b0, bin} + {1'b0, cal_offset};
  assign in_range = ahead < (BIN_W+1)'(NUM_BINS);

  always_comb begin
    enb   = 1'b0;
    addrb = bin;
    if (bin_valid) begin
      unique case (phase)
        PH_ACCUM: enb = 1'b1;
        PH_APPLY: begin
          enb   = in_range;
          addrb = ahead[BIN_W-1:0];
        end
        default: ;
      endcase
    end
  end

  // Stage 1: pipeline of the stage-0 context.
  prt_phase_e       phase_d;
  logic [BIN_W-1:0] bin_d;
  logic             valid_d;
  logic             in_range_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase_d    <= PH_IDLE;
      bin_d      <= '0;
      valid_d    <= 1'b0;
      in_range_d <= 1'b0;
    end else begin
      phase_d    <= phase;
      bin_d      <= bin;
      valid_d    <= bin_valid;
      in_range_d <= in_range;
    end
  end

  logic [W:0] pair_sum;
  logic [W-1:0] pair_avg;
  assign pair_sum = {1'b0, dob} + {1'b0, ma_dout};
  assign pair_avg = W'(pair_sum >> 1);

  always_comb begin
    ena   = 1'b0;
    wea   = 1'b0;
    addra = bin_d;
    dia   = ma_dout;
    if (valid_d && ma_valid) begin
      unique case (phase_d)
        PH_STORE: begin
          ena = 1'b1;
          wea = 1'b1;
        end
        PH_ACCUM: begin
          ena = 1'b1;
          wea = 1'b1;
          dia = pair_avg;
        end
        default: ;
      endcase
    end
  end

  // The map is written only in STORE and ACCUM; within ACCUM a write never
  // meets a read of the same address.
  a_write_phase: assert property (@(posedge clk) disable iff (rst)
    (ena && wea) |-> (phase_d == PH_STORE || phase_d == PH_ACCUM));
  a_no_collision: assert property (@(posedge clk) disable iff (rst)
    (ena && wea && enb && phase == PH_ACCUM && phase_d == PH_ACCUM) |-> (addra != addrb));

  assign level_valid = valid_d && (phase_d == PH_APPLY);
  assign level       = (level_valid && in_range_d) ? dob : '0;

endmodule
