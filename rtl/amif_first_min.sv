// amif_first_min: delay time tau = index of the first minimum of AMIF(l).
//
// On `start` the L_MAX sums AMIF(1..L_MAX) are examined and, one cycle later,
// tau is the smallest l in 1..L_MAX-1 with AMIF(l) < AMIF(l+1), i.e. the
// first lag after which the function rises again; `found` = 1 and `valid`
// pulses. If AMIF never rises, tau = L_MAX and found = 0. tau and found hold
// until the next start. The paper uses this index as the motor-state feature
// (4 for a healthy motor, 1 for an aged one); the strict "<" rule for equal
// neighbours is this design's choice.
module amif_first_min #(
  parameter int unsigned L_MAX = amif_pkg::L_MAX_DEF,
  parameter int unsigned ACC_W = 40,
  parameter int unsigned TW    = $clog2(L_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] amif [L_MAX],
  output logic [TW-1:0]           tau,
  output logic                    found,
  output logic                    valid
);

  logic [TW-1:0] tau_c;
  logic          found_c;

  always_comb begin
    tau_c   = TW'(L_MAX);
    found_c = 1'b0;
    for (int unsigned l = 1; l < L_MAX; l++) begin
      if (!found_c && (amif[l-1] < amif[l])) begin
        tau_c   = TW'(l);
        found_c = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tau   <= '0;
      found <= 1'b0;
      valid <= 1'b0;
    end else begin
      valid <= start;
      if (start) begin
        tau   <= tau_c;
        found <= found_c;
      end
    end
  end

endmodule
