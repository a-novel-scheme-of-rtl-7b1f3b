// diagc_pkg: constants and types shared by the DIAGC (digital instantaneous
// automatic gain control) card logic.
//
// The ADC word (14 bits) and the attenuation control word (6 bits, A0:A5,
// 0.5 dB per step, 31.5 dB full scale) follow the card described for this
// scheme. The PRT phase encoding is this design's own choice: every dwell
// walks through STORE (1st PRT), ACCUM (2nd PRT) and APPLY (3rd PRT and on).
package diagc_pkg;

  // Width of the detected-IF samples from the ADC (D0:D13).
  localparam int unsigned ADC_W = 14;
  // Width of the attenuation control to the Pre-IF amplifier (A0:A5).
  localparam int unsigned ATT_W = 6;
  // Length of the range moving-average window, in range bins.
  localparam int unsigned MA_LEN = 8;

  // Where the current PRT stands in its dwell.
  typedef enum logic [1:0] {
    PH_IDLE  = 2'd0,  // no dwell started since reset
    PH_STORE = 2'd1,  // 1st PRT: write the moving average into the map
    PH_ACCUM = 2'd2,  // 2nd PRT: average with the stored value, write back
    PH_APPLY = 2'd3   // 3rd PRT onwards: read the map, drive attenuation
  } prt_phase_e;

endpackage
