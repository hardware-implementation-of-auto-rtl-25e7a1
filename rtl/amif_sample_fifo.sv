// amif_sample_fifo: buffer for the samples the emulator sends over PCIe, so
// that bursts from the host do not have to wait for the calculator, which
// takes one sample per 2*N_LEVELS+4 clock cycles.
//
// Synchronous FIFO of DEPTH words with valid/ready on both sides: a word is
// written when in_valid && in_ready (in_ready = not full) and read when
// out_valid && out_ready (out_valid = not empty, out_data is the oldest
// word, shown without a read latency). Writing and reading in the same cycle
// is allowed when full. `level` is the number of words held. The paper only
// says a buffering module is needed; depth and handshake are this design's.
module amif_sample_fifo #(
  parameter int unsigned W     = amif_pkg::SAMPLE_W_DEF,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned PW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  output logic          in_ready,
  output logic          out_valid,
  output logic [W-1:0]  out_data,
  input  logic          out_ready,
  output logic [PW:0]   level
);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic          wr, rd;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  assign out_valid = (level != '0);
  assign in_ready  = (32'(level) < DEPTH) || out_ready;
  assign out_data  = mem[rp];
  assign rd        = out_valid && out_ready;
  assign wr        = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (wr) wp <= inc(wp);
      if (rd) rp <= inc(rp);
      level <= level + (PW+1)'(wr) - (PW+1)'(rd);
    end
  end

endmodule
