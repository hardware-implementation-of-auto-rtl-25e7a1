// amif_log2: fixed-point base-2 logarithm of a histogram count.
//
// A count can never exceed the window length, so the logarithm is a read-only
// table with MAX_COUNT+1 entries, filled at elaboration time by
// amif_pkg::log2_fx(). y = round(log2(x) * 2^LOG_FRAC), and y = 0 for x = 0
// (and for x = 1). Purely combinational: the result is valid in the same
// cycle as x. x above MAX_COUNT returns 0; the datapath never produces such
// a count.
// The paper only says that the AMIF update takes logarithms of the counts;
// the table form and the format are this design's choices.
module amif_log2 #(
  parameter int unsigned MAX_COUNT = amif_pkg::WINDOW_DEF,
  parameter int unsigned CW        = $clog2(MAX_COUNT + 1),
  parameter int unsigned LOG_FRAC  = amif_pkg::LOG_FRAC_DEF,
  parameter int unsigned LW        = $clog2($clog2(MAX_COUNT + 1) + 1) + LOG_FRAC
) (
  input  logic [CW-1:0] x,
  output logic [LW-1:0] y
);

  localparam int unsigned ENTRIES = MAX_COUNT + 1;

  function automatic logic [ENTRIES*LW-1:0] build_table();
    logic [ENTRIES*LW-1:0] t;
    for (int unsigned k = 0; k < ENTRIES; k++)
      t[k*LW +: LW] = LW'(amif_pkg::log2_fx(longint'(k), LOG_FRAC));
    return t;
  endfunction

  localparam logic [ENTRIES*LW-1:0] TABLE = build_table();

  always_comb begin
    if (32'(x) < ENTRIES) y = TABLE[32'(x)*LW +: LW];
    else                  y = '0;
  end

endmodule
