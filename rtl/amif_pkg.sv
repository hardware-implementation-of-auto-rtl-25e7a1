// amif_pkg: constants, types and elaboration-time helpers shared by the
// real-time auto-mutual information function (AMIF) calculator.
//
// The calculator keeps, for every lag l = 1..L_MAX, the running sum
//   AMIF(l) = sum over cells v * log2( v / (vA * vB) )
// where v is a joint-histogram (AB) count and vA, vB the matching counts of
// the two marginal histograms. Logarithms are fixed-point numbers with
// LOG_FRAC fractional bits, taken from a table that log2_fx() fills while the
// design is elaborated (integer arithmetic only, so every tool builds the
// same table). The table contents, the fixed-point format and the phase
// encoding below are this design's choices; the paper gives the formula only.
package amif_pkg;

  // Default configuration: 128 sampling levels and 15 lags are the sizes the
  // paper's synthesis figures are quoted for; the 512-sample window is the
  // window its hardware workbench tests used.
  localparam int unsigned N_LEVELS_DEF = 128;
  localparam int unsigned L_MAX_DEF    = 15;
  localparam int unsigned WINDOW_DEF   = 512;
  localparam int unsigned SAMPLE_W_DEF = 16;
  localparam int unsigned LOG_FRAC_DEF = 12;

  // Scan phase of the per-sample AMIF update.
  //   PH_ROWS: walk the two affected rows of AB (rows a_in and a_out)
  //   PH_COLS: walk the two affected columns of AB (columns b_in and b_out)
  typedef enum logic {
    PH_ROWS = 1'b0,
    PH_COLS = 1'b1
  } scan_phase_e;

  // log2(k) in unsigned fixed point with `frac` fractional bits, rounded to
  // nearest; log2(0) is defined as 0 (a zero count contributes no term).
  // Integer part from the position of the leading one, fractional bits by
  // repeated squaring of the mantissa held in Q1.30.
  function automatic longint unsigned log2_fx(input longint unsigned k,
                                              input int unsigned frac);
    longint unsigned y;
    longint unsigned res;
    int unsigned     e;
    if (k == 0) return 0;
    e = 0;
    while ((k >> (e + 1)) != 0) e++;
    y   = (k << 30) >> e;               // mantissa in [2^30, 2^31)
    res = longint'(e);
    for (int unsigned b = 0; b <= frac; b++) begin
      y   = (y * y) >> 30;
      res = res << 1;
      if (y >= (64'd1 << 31)) begin
        res = res | 64'd1;
        y   = y >> 1;
      end
    end
    return (res + 64'd1) >> 1;          // drop the guard bit with rounding
  endfunction

endpackage
