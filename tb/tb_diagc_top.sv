// tb_diagc_top: end-to-end, closed-loop test of the DIAGC logic at its
// default size (2048 range bins), with the receiver, detector and ADC
// modelled by rf_rx_model.
//
// Four dwells of five PRTs each are run against a scene of clutter patches
// (levels in 1/1024 dB above the receiver's saturation point):
//   * 10 dB patch, 16 dB patch (full scale, shows the 2 dB/bin ramp),
//     20 dB patch (deeper than the 16 dB control range), weak returns
//     below saturation, and a patch at the far end of the range;
//   * dwell 0 DIAGC on; dwell 1 DIAGC off for PRT 1-3, switched on before
//     PRT 4; dwell 2 a moved patch (the map must be rebuilt); dwell 3 on.
// The PRT-2 scene is 0.25 dB stronger than PRT 1, so the two-PRT average
// matters. For every range bin of every PRT the attenuation on A0:A5 is
// compared with a reference computed here from the scene alone: ADC latency
// 3, trailing 8-bin average, floor((avg1 + avg2) / 2), code =
// min(32, ceil(avg / 512)), read ahead by cal_offset, 3 cycles from map read
// to the pins, bin 0 two clocks after the PRT edge is sampled. It also checks
// that no bin in the interior of a patch within 16 dB saturates from the 3rd
// PRT on, and counts each mechanism, failing if one never happened.
module tb_diagc_top;
  import diagc_pkg::*;
  localparam int NUM_BINS = 2048;
  localparam int BIN_W    = $clog2(NUM_BINS);
  localparam int ADC_LAT  = 3;
  localparam int PRT_LEN  = NUM_BINS + 40;   // range clocks per PRT
  localparam int NUM_PRT  = 5;
  // read-ahead: 7 bins of window + ADC latency + switching + read-to-pin
  localparam int CAL      = 7 + ADC_LAT + 1 + 3;

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

  // mechanism counters
  int n_store, n_accum, n_apply;
  int n_sat_before, n_sat_off, n_fixed, n_overrange, n_ramp, n_ahead_end;
  int n_weak, n_switch_on, n_rebuilt, n_max_code;

  int scene[NUM_BINS];
  int map_ref[NUM_BINS];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int clamp_adc(int l);
    return l < 0 ? 0 : l > 16383 ? 16383 : l;
  endfunction

  // scene of dwell d (PRT 2 adds 256 on the patches)
  function automatic int scene_level(int d, int r, int prt_i);
    int extra = (prt_i == 2) ? 256 : 0;
    if (d == 2) begin
      if (r >= 400 && r < 480) return 8 * 1024 + extra;      // moved patch, 8 dB
      if (r >= 1200 && r < 1300) return -3 * 1024;           // weak returns
      return -20000;
    end
    if (r >= 200 && r < 300)   return 10 * 1024 + extra;     // 10 dB
    if (r >= 600 && r < 640)   return 20 * 1024 + extra;     // beyond 16 dB
    if (r >= 1000 && r < 1100) return 16 * 1024 + extra;     // full scale
    if (r >= 1200 && r < 1300) return -3 * 1024 + int'($urandom % 2048); // weak
    if (r >= 2030)             return 6 * 1024 + extra;      // far end
    return -20000;
  endfunction

  // reference two-PRT map from the PRT-1 and PRT-2 scenes (no attenuation yet)
  task automatic build_ref(input int s1[NUM_BINS], input int s2[NUM_BINS]);
    for (int a = 0; a < NUM_BINS; a++) begin
      int sum1 = 0, sum2 = 0;
      for (int t = a - 7; t <= a; t++) begin
        if (t - ADC_LAT >= 0) begin
          sum1 += clamp_adc(s1[t - ADC_LAT]);
          sum2 += clamp_adc(s2[t - ADC_LAT]);
        end
      end
      map_ref[a] = (sum1 / 8 + sum2 / 8) / 2;
    end
  endtask

  function automatic int ref_code(int lvl);
    int c = (lvl + 511) / 512;
    return c > 32 ? 32 : c;
  endfunction

  int s1[NUM_BINS], s2[NUM_BINS];

  // One PRT: raise prt at a negedge; bin 0 is the 3rd negedge after it.
  task automatic run_prt(input int d, input int p, input logic new_dwell);
    int prev_code;
    @(negedge clk);
    prt = 1; dwell = new_dwell;
    for (int j = 0; j < PRT_LEN; j++) begin
      int r;
      int exp_code;
      @(negedge clk);
      if (j == 1) dwell = 0;
      if (j == 4) prt = 0;
      r = j - 2;                       // range bin of this cycle
      echo = (r >= 0 && r < NUM_BINS) ? scene[r] : -20000;
      #1;
      // reference attenuation on the pins
      exp_code = 0;
      if (p >= 3 && diagc_en && r >= 3 && r - 3 < NUM_BINS && r - 3 + CAL < NUM_BINS)
        exp_code = ref_code(map_ref[r - 3 + CAL]);
      check(atten == 6'(exp_code),
            $sformatf("dwell %0d prt %0d bin %0d atten %0d exp %0d", d, p, r, atten, exp_code));
      if (r == 0) begin
        check(prt_num == 8'(p), $sformatf("prt_num %0d exp %0d", prt_num, p));
        if (phase == PH_STORE) n_store++;
        if (phase == PH_ACCUM) n_accum++;
        if (phase == PH_APPLY) n_apply++;
      end
      if (r >= 0 && r < NUM_BINS) begin
        logic interior;
        interior = 1;
        for (int t = r; t < r + 8; t++)
          if (t >= NUM_BINS || scene[t] != scene[r] || scene[t] > 16 * 1024) interior = 0;
        if (r + CAL - 4 >= NUM_BINS) interior = 0;
        if (p < 3 && saturated) n_sat_before++;
        if (p >= 3 && !diagc_en && saturated) n_sat_off++;
        if (p >= 3 && diagc_en && scene[r] > 0 && interior) begin
          check(!saturated, $sformatf("dwell %0d prt %0d bin %0d still saturated", d, p, r));
          n_fixed++;
        end
        if (p >= 3 && diagc_en && scene[r] > 16 * 1024 && saturated) n_overrange++;
        if (p >= 3 && diagc_en && r >= 1200 && r < 1300) begin
          check(atten == 0, "weak returns attenuated");
          n_weak++;
        end
        if (d == 2 && p >= 3 && r >= 200 && r < 300) begin
          check(atten == 0, "old patch still attenuated after new dwell");
          n_rebuilt++;
        end
        if (p >= 3 && diagc_en && r + CAL - 4 >= NUM_BINS && scene[r] > 0 && saturated) n_ahead_end++;
      end
      if (p >= 3 && diagc_en && r > 0 && int'(atten) - prev_code == 4) n_ramp++;
      if (atten == 6'd32) n_max_code++;
      prev_code = int'(atten);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int d = 0; d < 4; d++) begin
      diagc_en = (d != 1);
      for (int p = 1; p <= NUM_PRT; p++) begin
        for (int r = 0; r < NUM_BINS; r++) scene[r] = scene_level(d, r, p);
        if (p == 1) s1 = scene;
        if (p == 2) begin s2 = scene; build_ref(s1, s2); end
        if (d == 1 && p == 4) begin diagc_en = 1; n_switch_on++; end
        run_prt(d, p, p == 1);
      end
    end
    check(n_store == 4 && n_accum == 4 && n_apply == 12, "phase sequence");
    check(n_sat_before > 0,  "no saturation seen in PRT 1-2");
    check(n_sat_off > 0,     "no saturation seen with DIAGC off");
    check(n_fixed > 0,       "no saturating bin brought to the linear region");
    check(n_overrange > 0,   "clutter beyond the control range never seen");
    check(n_ramp > 0,        "2 dB per range-bin ramp never seen");
    check(n_max_code > 0,    "maximum attenuation never reached");
    check(n_weak > 0,        "weak returns never checked");
    check(n_switch_on > 0,   "DIAGC never switched on");
    check(n_rebuilt > 0,     "map rebuild never checked");
    check(n_ahead_end > 0,   "read-ahead past the last bin never happened");
    $display("mechanisms: store=%0d accum=%0d apply=%0d sat_prt12=%0d sat_off=%0d fixed=%0d overrange=%0d ramp=%0d max=%0d weak=%0d switch_on=%0d rebuilt=%0d ahead_end=%0d",
             n_store, n_accum, n_apply, n_sat_before, n_sat_off, n_fixed, n_overrange,
             n_ramp, n_max_code, n_weak, n_switch_on, n_rebuilt, n_ahead_end);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * NUM_PRT * (PRT_LEN + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
