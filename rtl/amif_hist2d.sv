// amif_hist2d: joint (two-dimensional) histogram AB of one lag.
//
// N_LEVELS x N_LEVELS counters of CW bits held in a memory with two
// independent ports, as an FPGA true dual-port block RAM provides. Cell
// (row r, column c) lives at address r*N_LEVELS + c, the row being the level
// of the earlier sample x[i] and the column the level of the delayed sample
// x[i+l]. Each port reads or writes one cell per cycle; a read returns the
// stored value one cycle later (read-before-write). The AMIF update reads two
// cells per cycle while it walks the affected rows and columns, and the
// controller then writes back the two changed cells through the two ports.
// The two ports must not write the same address in one cycle (assertion).
// The memory has no reset, like a block RAM: the controller zeroes it after
// reset by writing every cell (see amif_ctrl, state ST_INIT).
module amif_hist2d #(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned CW       = $clog2(amif_pkg::WINDOW_DEF + 1),
  parameter int unsigned AW       = 2 * $clog2(N_LEVELS)
) (
  input  logic          clk,
  input  logic          rst_n,   // used by the assertion only
  input  logic [AW-1:0] addr0,
  input  logic          we0,
  input  logic [CW-1:0] wdata0,
  output logic [CW-1:0] rdata0,
  input  logic [AW-1:0] addr1,
  input  logic          we1,
  input  logic [CW-1:0] wdata1,
  output logic [CW-1:0] rdata1
);

  localparam int unsigned CELLS = N_LEVELS * N_LEVELS;

  logic [CW-1:0] mem [CELLS];

  always_ff @(posedge clk) begin
    if (we0) mem[addr0] <= wdata0;
    rdata0 <= mem[addr0];
  end

  always_ff @(posedge clk) begin
    if (we1) mem[addr1] <= wdata1;
    rdata1 <= mem[addr1];
  end

`ifndef SYNTHESIS
  a_no_write_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (we0 && we1) |-> addr0 != addr1);
`endif

endmodule
