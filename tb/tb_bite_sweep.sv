// tb_bite_sweep: the built-in-test-target experiment. A simulated target
// occupies a fixed block of range bins (80 bins, the uncompressed pulse seen
// ahead of pulse compression) and its power is stepped from 4 dB below the
// receiver's saturation point to 20 dB above it. Each power level is run for
// one dwell of 5 PRTs with DIAGC off and one with DIAGC on, through the
// closed loop of diagc_top (default size) and rf_rx_model.
//
// Checked per level:
//   * DIAGC off, or PRT 1-2: every target bin saturates when the power is
//     above the saturation point, none when below;
//   * DIAGC on, PRT 3 on: in the target interior (all bins but the last 7,
//     whose 8-bin average reaches past the target) the attenuation applied is
//     min(16 dB, overdrive rounded up to 0.5 dB), so nothing saturates up to
//     16 dB of overdrive and 16 dB is removed beyond it;
//   * below saturation no attenuation is applied anywhere (linear region).
module tb_bite_sweep;
  import diagc_pkg::*;
  localparam int NUM_BINS = 2048;
  localparam int BIN_W    = $clog2(NUM_BINS);
  localparam int ADC_LAT  = 3;
  localparam int PRT_LEN  = NUM_BINS + 40;
  localparam int CAL      = 7 + ADC_LAT + 1 + 3;
  localparam int T0 = 500, TW = 80;          // target bins T0 .. T0+TW-1

  logic clk = 0, rst = 1, dwell = 0, prt = 0, diagc_en = 0;
  logic [13:0] adc_data;
  logic [BIN_W-1:0] cal_offset = BIN_W'(CAL);
  logic [5:0] atten;
  prt_phase_e phase;
  logic [7:0] prt_num;
  int echo = -20000;
  logic saturated;

  diagc_top dut (
    .clk, .rst, .dwell, .prt, .adc_data, .diagc_en, .cal_offset,
    .atten, .phase, .prt_num
  );

  rf_rx_model #(.ADC_LAT(ADC_LAT)) rx (.clk, .echo, .atten, .adc_data, .saturated);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_linear = 0, n_cleared = 0, n_overdrive = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // one PRT; returns the number of saturated target bins
  task automatic run_prt(input int lvl, input int p, output int nsat);
    nsat = 0;
    @(negedge clk);
    prt = 1; dwell = (p == 1);
    for (int j = 0; j < PRT_LEN; j++) begin
      int r;
      @(negedge clk);
      if (j == 1) dwell = 0;
      if (j == 4) prt = 0;
      r = j - 2;
      echo = (r >= T0 && r < T0 + TW) ? lvl : -20000;
      #1;
      if (saturated) nsat++;
      if (p >= 3 && diagc_en && r >= T0 && r < T0 + TW - 7) begin
        int need;
        need = (lvl <= 0) ? 0 : ((lvl > 16383 ? 16383 : lvl) + 511) / 512;
        if (need > 32) need = 32;
        check(int'(rx.att_applied) == need,
              $sformatf("level %0d bin %0d applied %0d exp %0d", lvl, r, rx.att_applied, need));
      end
      if (lvl <= 0) check(atten == 0, "attenuation in the linear region");
    end
  endtask

  initial begin
    int levels_db[9] = '{-4, 0, 2, 6, 10, 14, 16, 18, 20};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    foreach (levels_db[i]) begin
      int lvl;
      lvl = levels_db[i] * 1024;
      for (int on = 0; on < 2; on++) begin
        diagc_en = on[0];
        for (int p = 1; p <= 5; p++) begin
          int nsat;
          run_prt(lvl, p, nsat);
          if (lvl <= 0) begin
            check(nsat == 0, $sformatf("saturation below the saturation point, level %0d", lvl));
            if (on == 1 && p >= 3) n_linear++;
          end else if (on == 0 || p < 3) begin
            check(nsat == TW, $sformatf("level %0d dB on=%0d prt %0d: %0d of %0d bins saturated",
                                        levels_db[i], on, p, nsat, TW));
          end else if (lvl <= 16 * 1024) begin
            check(nsat <= 7, $sformatf("level %0d dB prt %0d: %0d bins still saturated",
                                       levels_db[i], p, nsat));
            n_cleared++;
          end else begin
            check(nsat == TW, $sformatf("level %0d dB beyond range: %0d saturated", levels_db[i], nsat));
            n_overdrive++;
          end
          if (on == 1 && p == 5)
            $display("target %0d dB above saturation: DIAGC on, %0d of %0d bins saturated in PRT 5",
                     levels_db[i], nsat, TW);
        end
      end
    end
    check(n_linear > 0 && n_cleared > 0 && n_overdrive > 0, "a regime of the sweep was never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9 * 2 * 5 * (PRT_LEN + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
