// amif_cell_term: change of one AMIF term when one cell of the joint
// histogram and its two marginal counts change.
//
// A cell with joint count v whose row has marginal count va (histogram A) and
// whose column has marginal count vb (histogram B) contributes
//   T(v, va, vb) = v * (log2 v - log2 va - log2 vb)   (0 when v = 0)
// to AMIF(l), the paper's v*log2(v/(vA*vB)). Given the present counts and
// their changes (each -1, 0 or +1) this block returns
//   delta = T(v+dv, va+dva, vb+dvb) - T(v, va, vb)
// using six table logarithms. Combinational; delta is in the same fixed-point
// format as the logarithms (LOG_FRAC fractional bits).
module amif_cell_term #(
  parameter int unsigned MAX_COUNT = amif_pkg::WINDOW_DEF,
  parameter int unsigned CW        = $clog2(MAX_COUNT + 1),
  parameter int unsigned LOG_FRAC  = amif_pkg::LOG_FRAC_DEF,
  parameter int unsigned LW        = $clog2($clog2(MAX_COUNT + 1) + 1) + LOG_FRAC,
  parameter int unsigned DW        = CW + LW + 4
) (
  input  logic [CW-1:0]        v,
  input  logic signed [1:0]    dv,
  input  logic [CW-1:0]        va,
  input  logic signed [1:0]    dva,
  input  logic [CW-1:0]        vb,
  input  logic signed [1:0]    dvb,
  output logic signed [DW-1:0] delta
);

  logic [CW-1:0] v_n, va_n, vb_n;
  logic [LW-1:0] lv_o, lva_o, lvb_o, lv_n, lva_n, lvb_n;
  logic signed [DW-1:0] t_old, t_new;

  assign v_n  = v  + CW'(dv);
  assign va_n = va + CW'(dva);
  assign vb_n = vb + CW'(dvb);

  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lv_o (.x(v), .y(lv_o));
  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lva_o (.x(va), .y(lva_o));
  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lvb_o (.x(vb), .y(lvb_o));
  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lv_n (.x(v_n), .y(lv_n));
  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lva_n (.x(va_n), .y(lva_n));
  amif_log2 #(.MAX_COUNT(MAX_COUNT), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW))
    u_lvb_n (.x(vb_n), .y(lvb_n));

  function automatic logic signed [DW-1:0] term(input logic [CW-1:0] c,
                                                input logic [LW-1:0] l_c,
                                                input logic [LW-1:0] l_a,
                                                input logic [LW-1:0] l_b);
    logic signed [DW-1:0] d;
    d = DW'(l_c) - DW'(l_a) - DW'(l_b);
    return DW'($signed({1'b0, c})) * d;
  endfunction

  always_comb begin
    t_old = term(v,   lv_o, lva_o, lvb_o);
    t_new = term(v_n, lv_n, lva_n, lvb_n);
    delta = t_new - t_old;
  end

endmodule
