// diagc_timing: dwell / PRT bookkeeping and range-bin counter.
//
// The card receives three timing signals from the radar's timing generator:
// dwell, PRT and the range clock. The range clock is this module's clock
// (it is also the ADC sampling clock), so one range bin is one clock cycle.
// A rising edge on `dwell` starts a new dwell; each rising edge on `prt`
// starts a PRT, counted within the dwell, and restarts the range-bin count at
// zero. The PRT count selects the phase: 1st PRT STORE, 2nd PRT ACCUM, 3rd PRT
// and later APPLY. Before the first dwell after reset the phase is IDLE.
//
// Timing: `dwell` and `prt` are taken to be synchronous to the range clock
// (they come from the same timing generator) and are registered once before
// edge detection. If the rising edge of `prt` is sampled at clock edge k,
// `prt_start` is high in cycle k+1 and `bin` = 0 with `bin_valid` = 1 in cycle
// k+2. The count runs to NUM_BINS-1 and then `bin_valid` drops until the next
// PRT. A dwell edge and a PRT edge in the same cycle make that PRT the 1st.
// NUM_BINS, the edge polarity and the one-register input stage are this
// design's choices; the paper does not give them.
module diagc_timing
  import diagc_pkg::*;
#(
  parameter int unsigned NUM_BINS = 2048,
  localparam int unsigned BIN_W = $clog2(NUM_BINS)
) (
  input  logic             clk,        // range clock
  input  logic             rst,        // synchronous, active high
  input  logic             dwell,      // dwell start (rising edge)
  input  logic             prt,        // PRT start (rising edge)
  output prt_phase_e       phase,      // phase of the current PRT
  output logic [7:0]       prt_num,    // PRT number in the dwell, 1-based, saturates at 255
  output logic             prt_start,  // one-cycle pulse before bin 0 of each PRT
  output logic [BIN_W-1:0] bin,        // range-bin number
  output logic             bin_valid   // bin is inside 0..NUM_BINS-1 of a PRT
);

  logic dwell_q, prt_q;
  logic dwell_rise, prt_rise;
  logic dwell_seen;   // a dwell edge has been seen since reset

  always_ff @(posedge clk) begin
    if (rst) begin
      dwell_q <= 1'b0;
      prt_q   <= 1'b0;
    end else begin
      dwell_q <= dwell;
      prt_q   <= prt;
    end
  end

  // Edges of the registered inputs.
  logic dwell_d, prt_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      dwell_d <= 1'b0;
      prt_d   <= 1'b0;
    end else begin
      dwell_d <= dwell_q;
      prt_d   <= prt_q;
    end
  end
  assign dwell_rise = dwell_q & ~dwell_d;
  assign prt_rise   = prt_q & ~prt_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      dwell_seen <= 1'b0;
      prt_num    <= '0;
      prt_start  <= 1'b0;
      bin        <= '0;
      bin_valid  <= 1'b0;
    end else begin
      prt_start <= prt_rise;
      if (dwell_rise) begin
        dwell_seen <= 1'b1;
        prt_num    <= prt_rise ? 8'd1 : 8'd0;
      end else if (prt_rise && dwell_seen && prt_num != 8'hFF) begin
        prt_num <= prt_num + 8'd1;
      end
      if (prt_start) begin
        bin       <= '0;
        bin_valid <= 1'b1;
      end else if (bin_valid) begin
        if (bin == BIN_W'(NUM_BINS - 1)) bin_valid <= 1'b0;
        else                            bin <= bin + 1'b1;
      end
    end
  end

  always_comb begin
    unique case (prt_num)
      8'd0:    phase = PH_IDLE;
      8'd1:    phase = PH_STORE;
      8'd2:    phase = PH_ACCUM;
      default: phase = PH_APPLY;
    endcase
  end

endmodule
