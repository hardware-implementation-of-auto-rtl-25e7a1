// amif_hist1d: one-dimensional histogram of sample levels (histogram A or a
// histogram B of the AMIF calculator).
//
// N_LEVELS counters of CW bits. One update per sample: on `upd`, the counter
// of bin `in_bin` is incremented (if in_valid) and the counter of bin
// `out_bin` decremented (if out_valid); when both name the same bin the count
// is unchanged. This is the paper's "increment the bin of the new sample,
// decrement the bin of the sample leaving the window".
// Two read ports with registered output: the address presented in cycle k
// gives its count in cycle k+1 (the value before an update made in cycle k).
// Counters start at zero after reset and on `clr`.
module amif_hist1d #(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned CW       = $clog2(amif_pkg::WINDOW_DEF + 1),
  parameter int unsigned BW       = $clog2(N_LEVELS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  // update
  input  logic          upd,
  input  logic          in_valid,
  input  logic [BW-1:0] in_bin,
  input  logic          out_valid,
  input  logic [BW-1:0] out_bin,
  // read ports
  input  logic [BW-1:0] rd_addr0,
  input  logic [BW-1:0] rd_addr1,
  output logic [CW-1:0] rd_data0,
  output logic [CW-1:0] rd_data1
);

  logic [CW-1:0] cnt [N_LEVELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N_LEVELS; k++) cnt[k] <= '0;
    end else if (clr) begin
      for (int unsigned k = 0; k < N_LEVELS; k++) cnt[k] <= '0;
    end else if (upd) begin
      for (int unsigned k = 0; k < N_LEVELS; k++) begin
        if ((in_valid && in_bin == BW'(k)) && !(out_valid && out_bin == BW'(k)))
          cnt[k] <= cnt[k] + 1'b1;
        else if (!(in_valid && in_bin == BW'(k)) && (out_valid && out_bin == BW'(k)))
          cnt[k] <= cnt[k] - 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data0 <= '0;
      rd_data1 <= '0;
    end else begin
      rd_data0 <= cnt[rd_addr0];
      rd_data1 <= cnt[rd_addr1];
    end
  end

`ifndef SYNTHESIS
  // A bin leaving the window must have been counted when it entered.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (upd && out_valid && !(in_valid && in_bin == out_bin)) |-> cnt[out_bin] != '0);
`endif

endmodule
