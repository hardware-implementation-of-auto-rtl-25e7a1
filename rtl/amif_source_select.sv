// amif_source_select: chooses where the calculator's samples come from, as
// set by the control input: the on-board sensor (mode_emu = 0) or the
// emulator that replays recorded vibration files (mode_emu = 1).
//
// The selected stream is passed on with a valid/ready handshake. The
// emulator stream is flow-controlled (emu_ready). The sensor cannot be held
// off: a sensor sample offered while the calculator is busy is lost and
// `overrun` pulses. The mode input is registered; in the cycle it changes,
// no sample is passed and `switched` pulses, which the top uses to restart
// the measurement, since histograms of one source mean nothing for the
// other. The paper names the two sources and the switch; the handshake, the
// overrun flag and the restart are this design's choices.
module amif_source_select #(
  parameter int unsigned SAMPLE_W = amif_pkg::SAMPLE_W_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mode_emu,
  input  logic                sens_valid,
  input  logic [SAMPLE_W-1:0] sens_data,
  input  logic                emu_valid,
  input  logic [SAMPLE_W-1:0] emu_data,
  output logic                emu_ready,
  output logic                out_valid,
  output logic [SAMPLE_W-1:0] out_data,
  input  logic                out_ready,
  output logic                overrun,
  output logic                switched
);

  logic mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_q <= 1'b0;
    else        mode_q <= mode_emu;
  end

  always_comb begin
    switched  = (mode_emu != mode_q);
    out_data  = mode_q ? emu_data : sens_data;
    out_valid = !switched && (mode_q ? emu_valid : sens_valid);
    emu_ready = !switched && mode_q && out_ready;
    overrun   = !mode_q && sens_valid && !(out_ready && !switched);
  end

endmodule
