// amif_lag_lane: everything the calculator repeats for one lag l: histogram
// B (samples x[i+l]), the joint histogram AB of (x[i], x[i+l]) and the AMIF
// update. The top instantiates L_MAX lanes that run in lock step, driven by
// one amif_ctrl; histogram A and the sample buffer are shared.
//
// Memory traffic per sample (addresses from the shared controller):
//   prep            B port0 <- b_in, port1 <- b_out (fixed counts)
//   PH_ROWS, idx=j  AB port0 <- (a_in, j), port1 <- (a_out, j), B port0 <- j
//   PH_COLS, idx=i  AB port0 <- (i, b_in), port1 <- (i, b_out); A[i] comes
//                   from the shared histogram A (ha_rd0)
//   commit          AB port0 writes (a_in, b_in) + 1, port1 writes
//                   (a_out, b_out) - 1, B and A count the new / old sample
// The old counts of the two changing AB cells are captured while the rows
// are walked, so the commit needs no extra read. If the entering and leaving
// pair fall into the same cell, AB is not written at all.
// Outputs: amif, this lag's AMIF sum, final in the cycle of commit.
module amif_lag_lane
  import amif_pkg::*;
#(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned WINDOW   = amif_pkg::WINDOW_DEF,
  parameter int unsigned LOG_FRAC = amif_pkg::LOG_FRAC_DEF,
  parameter int unsigned ACC_W    = 40,
  parameter int unsigned CW       = $clog2(WINDOW + 1),
  parameter int unsigned BW       = $clog2(N_LEVELS),
  parameter int unsigned AW       = 2 * $clog2(N_LEVELS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // from amif_ctrl
  input  logic                    clr,
  input  logic                    init_we,
  input  logic [AW-1:0]           init_addr0,
  input  logic [AW-1:0]           init_addr1,
  input  logic                    prep,
  input  logic                    scan_issue,
  input  scan_phase_e             phase,
  input  logic [BW-1:0]           idx,
  input  logic                    cap_const,
  input  logic                    d_en,
  input  scan_phase_e             d_phase,
  input  logic [BW-1:0]           d_idx,
  input  logic                    commit,
  // from the sample buffer
  input  logic [BW-1:0]           a_in,
  input  logic [BW-1:0]           a_out,
  input  logic [BW-1:0]           b_in,
  input  logic [BW-1:0]           b_out,
  input  logic                    in_valid,
  input  logic                    out_valid,
  // shared histogram A read data (port0: scan / A[a_in], port1: A[a_out])
  input  logic [CW-1:0]           ha_rd0,
  input  logic [CW-1:0]           ha_rd1,
  output logic signed [ACC_W-1:0] amif
);

  logic [BW-1:0] hb_addr0;
  logic [CW-1:0] hb_rd0, hb_rd1;
  logic [AW-1:0] ab_addr0, ab_addr1;
  logic          ab_we0, ab_we1;
  logic [CW-1:0] ab_wd0, ab_wd1, ab_rd0, ab_rd1;
  logic [CW-1:0] ca_in, ca_out, cb_in, cb_out;
  logic [CW-1:0] old_in_cell, old_out_cell;
  logic [CW-1:0] h_scan;
  logic          same_cell;

  assign same_cell = out_valid && (a_in == a_out) && (b_in == b_out);

  // ---- histogram B -------------------------------------------------------
  assign hb_addr0 = prep ? b_in : idx;

  amif_hist1d #(.N_LEVELS(N_LEVELS), .CW(CW), .BW(BW)) u_hist_b (
    .clk, .rst_n, .clr,
    .upd(commit), .in_valid, .in_bin(b_in), .out_valid, .out_bin(b_out),
    .rd_addr0(hb_addr0), .rd_addr1(b_out),
    .rd_data0(hb_rd0), .rd_data1(hb_rd1)
  );

  // ---- histogram AB ------------------------------------------------------
  always_comb begin
    ab_we0 = 1'b0;
    ab_we1 = 1'b0;
    ab_wd0 = old_in_cell + 1'b1;
    ab_wd1 = old_out_cell - 1'b1;
    if (init_we) begin
      ab_addr0 = init_addr0;
      ab_addr1 = init_addr1;
      ab_we0   = 1'b1;
      ab_we1   = 1'b1;
      ab_wd0   = '0;
      ab_wd1   = '0;
    end else if (commit) begin
      ab_addr0 = {a_in, b_in};
      ab_addr1 = {a_out, b_out};
      ab_we0   = in_valid && !same_cell;
      ab_we1   = out_valid && !same_cell;
    end else if (scan_issue && phase == PH_COLS) begin
      ab_addr0 = {idx, b_in};
      ab_addr1 = {idx, b_out};
    end else begin
      ab_addr0 = {a_in, idx};
      ab_addr1 = {a_out, idx};
    end
  end

  amif_hist2d #(.N_LEVELS(N_LEVELS), .CW(CW), .AW(AW)) u_hist_ab (
    .clk, .rst_n,
    .addr0(ab_addr0), .we0(ab_we0), .wdata0(ab_wd0), .rdata0(ab_rd0),
    .addr1(ab_addr1), .we1(ab_we1), .wdata1(ab_wd1), .rdata1(ab_rd1)
  );

  // ---- captured counts ---------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ca_in <= '0; ca_out <= '0; cb_in <= '0; cb_out <= '0;
      old_in_cell <= '0; old_out_cell <= '0;
    end else begin
      if (cap_const) begin
        ca_in  <= ha_rd0;
        ca_out <= ha_rd1;
        cb_in  <= hb_rd0;
        cb_out <= hb_rd1;
      end
      if (d_en && d_phase == PH_ROWS && d_idx == b_in)  old_in_cell  <= ab_rd0;
      if (d_en && d_phase == PH_ROWS && d_idx == b_out) old_out_cell <= ab_rd1;
    end
  end

  assign h_scan = (d_phase == PH_ROWS) ? hb_rd0 : ha_rd0;

  // ---- AMIF update -------------------------------------------------------
  amif_update #(.N_LEVELS(N_LEVELS), .WINDOW(WINDOW), .LOG_FRAC(LOG_FRAC),
                .ACC_W(ACC_W), .CW(CW), .BW(BW)) u_update (
    .clk, .rst_n, .clr,
    .en(d_en), .phase(d_phase), .idx(d_idx),
    .a_in, .a_out, .b_in, .b_out, .in_valid, .out_valid,
    .ab0(ab_rd0), .ab1(ab_rd1), .h_scan,
    .ca_in, .ca_out, .cb_in, .cb_out,
    .amif
  );

endmodule
