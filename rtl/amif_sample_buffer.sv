// amif_sample_buffer: the input part of the calculator's memory. It keeps the
// scaled samples still needed and hands out, for every new sample x[t], the
// "new" and "outdated" inputs of histogram A and of each lag's histogram B.
//
// With window length M (= WINDOW) and maximum lag L (= L_MAX):
//   histogram A   covers x[t-L-M+1 .. t-L]:  enters x[t-L],    leaves x[t-L-M]
//   histogram B_l covers x[t-L-M+1+l .. t-L+l]: enters x[t-L+l], leaves x[t-L-M+l]
// so that after the last sample of a record the histograms equal the batch
// histograms of the paper's procedure (A over the first M points, B_l over M
// points starting at lag l, M = record length - L).
// Structure: a head shift register head[k] = x[t-k] (k = 0..L), an M-deep
// circular RAM whose output is x[t-M], and a tail shift register
// tail[k] = x[t-M-k]. The RAM output is prefetched, so `shift` may be
// asserted in consecutive cycles. A saturating sample counter gives
//   in_valid   : x[t-L] exists (at least L+1 samples seen)
//   out_valid  : x[t-L-M] exists (at least L+M+1 samples seen)
//   full       : the window is complete (at least L+M samples seen).
// All outputs change in the cycle after `shift`. `clr` forgets all samples.
module amif_sample_buffer #(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned L_MAX    = amif_pkg::L_MAX_DEF,
  parameter int unsigned WINDOW   = amif_pkg::WINDOW_DEF,
  parameter int unsigned BW       = $clog2(N_LEVELS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          shift,
  input  logic [BW-1:0] din,
  // histogram A
  output logic [BW-1:0] a_in,
  output logic [BW-1:0] a_out,
  // histogram B of lag l is element l-1
  output logic [BW-1:0] b_in  [L_MAX],
  output logic [BW-1:0] b_out [L_MAX],
  output logic          in_valid,
  output logic          out_valid,
  output logic          full
);

  localparam int unsigned PW     = (WINDOW > 1) ? $clog2(WINDOW) : 1;
  localparam int unsigned NSAT   = L_MAX + WINDOW + 1;
  localparam int unsigned NW     = $clog2(NSAT + 1);

  logic [BW-1:0] head [L_MAX+1];
  logic [BW-1:0] tail [L_MAX+1];
  logic [BW-1:0] ram  [WINDOW];
  logic [BW-1:0] ram_q;          // ram[ptr] = x[t-M] for the next sample
  logic [PW-1:0] ptr, ptr_nxt;
  logic [NW-1:0] n_seen;

  always_comb begin
    if (!shift)                   ptr_nxt = ptr;
    else if (32'(ptr) == WINDOW-1) ptr_nxt = '0;
    else                          ptr_nxt = ptr + 1'b1;
  end

  // circular delay line of M samples (block-RAM style, no reset)
  always_ff @(posedge clk) begin
    if (shift) ram[ptr] <= din;
    ram_q <= ram[ptr_nxt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      n_seen <= '0;
      for (int unsigned k = 0; k <= L_MAX; k++) begin
        head[k] <= '0;
        tail[k] <= '0;
      end
    end else if (clr) begin
      ptr    <= '0;
      n_seen <= '0;
    end else if (shift) begin
      ptr     <= ptr_nxt;
      head[0] <= din;
      tail[0] <= ram_q;
      for (int unsigned k = 1; k <= L_MAX; k++) begin
        head[k] <= head[k-1];
        tail[k] <= tail[k-1];
      end
      if (32'(n_seen) < NSAT) n_seen <= n_seen + 1'b1;
    end
  end

  assign a_in      = head[L_MAX];
  assign a_out     = tail[L_MAX];
  assign in_valid  = 32'(n_seen) >= L_MAX + 1;
  assign out_valid = 32'(n_seen) >= L_MAX + WINDOW + 1;
  assign full      = 32'(n_seen) >= L_MAX + WINDOW;

  for (genvar l = 1; l <= L_MAX; l++) begin : g_lag
    assign b_in[l-1]  = head[L_MAX-l];
    assign b_out[l-1] = tail[L_MAX-l];
  end

endmodule
