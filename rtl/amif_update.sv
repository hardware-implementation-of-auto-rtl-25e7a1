// amif_update: running AMIF(l) of one lag, updated term by term.
//
// Following the paper, a new sample changes histogram A in two bins (rows
// a_in, a_out of AB), histogram B in two bins (columns b_in, b_out) and AB in
// two cells, so only the terms of two rows and two columns of AB change. For
// every sample the controller walks those rows (phase PH_ROWS, column index
// idx = 0..N-1) and then those columns (phase PH_COLS, row index idx), and
// this block receives per cycle (en = 1) the two AB cells of the current
// index, ab0 and ab1, the marginal count h_scan of the scanned index (B[idx]
// while walking rows, A[idx] while walking columns) and the four fixed
// marginal counts ca_in = A[a_in], ca_out = A[a_out], cb_in = B[b_in],
// cb_out = B[b_out]; all counts are those before the sample.
//   PH_ROWS: cell0 = (a_in, idx), cell1 = (a_out, idx), skipped if a_out = a_in
//   PH_COLS: cell0 = (idx, b_in), cell1 = (idx, b_out), skipped if b_out = b_in;
//            both skipped on the rows a_in and a_out, already done.
// Each processed cell adds T(new) - T(old) (amif_cell_term) to the sum, so
// every affected cell is counted exactly once and at most 4N cells are
// evaluated per sample. The sum is AMIF(l) = sum v*log2(v/(vA*vB)) exactly as
// the paper writes it: that is W*I(l) - W*log2(W) for window length W and
// mutual information I in bits, so its first minimum is that of I.
// in_valid / out_valid say whether the sample entering / leaving the window
// exists (histograms still filling). The sum updates at the end of each
// en cycle; `clr` zeroes it. Signed fixed point, LOG_FRAC fractional bits.
module amif_update
  import amif_pkg::*;
#(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned WINDOW   = amif_pkg::WINDOW_DEF,
  parameter int unsigned LOG_FRAC = amif_pkg::LOG_FRAC_DEF,
  parameter int unsigned ACC_W    = 40,
  parameter int unsigned CW       = $clog2(WINDOW + 1),
  parameter int unsigned BW       = $clog2(N_LEVELS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  scan_phase_e             phase,
  input  logic [BW-1:0]           idx,
  input  logic [BW-1:0]           a_in,
  input  logic [BW-1:0]           a_out,
  input  logic [BW-1:0]           b_in,
  input  logic [BW-1:0]           b_out,
  input  logic                    in_valid,
  input  logic                    out_valid,
  input  logic [CW-1:0]           ab0,
  input  logic [CW-1:0]           ab1,
  input  logic [CW-1:0]           h_scan,
  input  logic [CW-1:0]           ca_in,
  input  logic [CW-1:0]           ca_out,
  input  logic [CW-1:0]           cb_in,
  input  logic [CW-1:0]           cb_out,
  output logic signed [ACC_W-1:0] amif
);

  localparam int unsigned LW = $clog2($clog2(WINDOW + 1) + 1) + LOG_FRAC;
  localparam int unsigned DW = CW + LW + 4;

  logic [BW-1:0] r0, c0, r1, c1;
  logic [CW-1:0] va0, vb0, va1, vb1;
  logic          proc0, proc1, skip_row;
  logic signed [1:0] dv0, dva0, dvb0, dv1, dva1, dvb1;
  logic signed [DW-1:0] delta0, delta1;
  logic signed [ACC_W-1:0] add0, add1;

  function automatic logic signed [1:0] chg(input logic hit_in, input logic hit_out);
    return 2'(signed'({1'b0, hit_in})) - 2'(signed'({1'b0, hit_out}));
  endfunction

  always_comb begin
    if (phase == PH_ROWS) begin
      r0 = a_in;  c0 = idx;  va0 = ca_in;  vb0 = h_scan;
      r1 = a_out; c1 = idx;  va1 = ca_out; vb1 = h_scan;
      skip_row = 1'b0;
      proc0 = in_valid;
      proc1 = out_valid && (a_out != a_in);
    end else begin
      r0 = idx; c0 = b_in;  va0 = h_scan; vb0 = cb_in;
      r1 = idx; c1 = b_out; va1 = h_scan; vb1 = cb_out;
      skip_row = (in_valid && idx == a_in) || (out_valid && idx == a_out);
      proc0 = in_valid && !skip_row;
      proc1 = out_valid && (b_out != b_in) && !skip_row;
    end
    dv0  = chg(in_valid && r0 == a_in && c0 == b_in, out_valid && r0 == a_out && c0 == b_out);
    dva0 = chg(in_valid && r0 == a_in,               out_valid && r0 == a_out);
    dvb0 = chg(in_valid && c0 == b_in,               out_valid && c0 == b_out);
    dv1  = chg(in_valid && r1 == a_in && c1 == b_in, out_valid && r1 == a_out && c1 == b_out);
    dva1 = chg(in_valid && r1 == a_in,               out_valid && r1 == a_out);
    dvb1 = chg(in_valid && c1 == b_in,               out_valid && c1 == b_out);
  end

  amif_cell_term #(.MAX_COUNT(WINDOW), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW), .DW(DW))
    u_cell0 (.v(ab0), .dv(dv0), .va(va0), .dva(dva0), .vb(vb0), .dvb(dvb0), .delta(delta0));
  amif_cell_term #(.MAX_COUNT(WINDOW), .CW(CW), .LOG_FRAC(LOG_FRAC), .LW(LW), .DW(DW))
    u_cell1 (.v(ab1), .dv(dv1), .va(va1), .dva(dva1), .vb(vb1), .dvb(dvb1), .delta(delta1));

  always_comb begin
    add0 = '0;
    add1 = '0;
    if (proc0) add0 = ACC_W'(delta0);   // sign-extending
    if (proc1) add1 = ACC_W'(delta1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    amif <= '0;
    else if (clr)  amif <= '0;
    else if (en)   amif <= amif + add0 + add1;
  end

endmodule
