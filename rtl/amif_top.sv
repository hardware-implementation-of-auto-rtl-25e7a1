// amif_top: real-time auto-mutual information function (AMIF) calculator for
// vibration-based motor condition monitoring.
//
// For every incoming sample the design updates, for each lag l = 1..L_MAX,
//   AMIF(l) = sum over joint-histogram cells v * log2( v / (vA * vB) )
// over a sliding window of WINDOW sample pairs (x[i], x[i+l]), and reports
// the index of the first minimum of AMIF(l), the delay time tau that the
// paper uses as motor-age indicator. Nothing is recomputed from scratch: a
// new sample changes two bins of each histogram, so only two rows and two
// columns of each joint histogram are re-evaluated.
//
// Data path (the paper's block diagram):
//   sensor ----------------------+
//   emulator -> amif_sample_fifo -+-> amif_source_select -> amif_input_scaling
//     -> amif_sample_buffer (new / outdated inputs)
//     -> amif_hist1d (histogram A, shared)
//     -> L_MAX x amif_lag_lane (histogram B, histogram AB, AMIF update)
//     -> amif_first_min
// all sequenced by amif_ctrl. The sensor/A-D converter, the PCIe link from
// the emulator host and the display are outside this module; their samples
// and results are plain ports.
//
// Interface: samples are signed SAMPLE_W-bit words. emu_* is a valid/ready
// stream; the sensor stream has no ready, a sample offered while the
// calculator is busy is dropped (sensor_overrun). mode_emu selects the source;
// changing it restarts the measurement (about N_LEVELS^2/2 cycles of clearing,
// also done after reset, busy = 1). scale_lo / scale_shift set the input
// range (amif_input_scaling).
// Timing: one sample takes 2*N_LEVELS+4 cycles (260 at the defaults; about
// 190 k samples/s at a 50 MHz clock). amif_valid pulses, with amif[] final,
// once per sample as soon as the window is full; tau_valid follows one cycle
// later.
module amif_top
  import amif_pkg::*;
#(
  parameter int unsigned N_LEVELS  = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned L_MAX     = amif_pkg::L_MAX_DEF,
  parameter int unsigned WINDOW    = amif_pkg::WINDOW_DEF,
  parameter int unsigned SAMPLE_W  = amif_pkg::SAMPLE_W_DEF,
  parameter int unsigned LOG_FRAC  = amif_pkg::LOG_FRAC_DEF,
  parameter int unsigned ACC_W     = 40,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned BW        = $clog2(N_LEVELS),
  parameter int unsigned CW        = $clog2(WINDOW + 1),
  parameter int unsigned TW        = $clog2(L_MAX + 1),
  parameter int unsigned SHW       = $clog2(SAMPLE_W + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control input (board switch)
  input  logic                       mode_emu,
  input  logic signed [SAMPLE_W-1:0] scale_lo,
  input  logic [SHW-1:0]             scale_shift,
  // sensor (A/D converter) samples
  input  logic                       sensor_valid,
  input  logic signed [SAMPLE_W-1:0] sensor_data,
  output logic                       sensor_overrun,
  // emulator samples (from the host link)
  input  logic                       emu_valid,
  input  logic signed [SAMPLE_W-1:0] emu_data,
  output logic                       emu_ready,
  output logic [$clog2(FIFO_DEPTH):0] emu_fifo_level,
  // results
  output logic signed [ACC_W-1:0]    amif [L_MAX],
  output logic                       amif_valid,
  output logic [TW-1:0]              tau,
  output logic                       tau_found,
  output logic                       tau_valid,
  output logic                       sample_clipped,
  output logic                       busy
);

  localparam int unsigned AW = 2 * BW;

  // ---- input side ----------------------------------------------------------
  logic                fifo_valid, fifo_ready;
  logic [SAMPLE_W-1:0] fifo_data;
  logic                src_valid, src_ready, switched;
  logic [SAMPLE_W-1:0] src_data;
  logic [BW-1:0]       bin;
  logic                clipped;

  amif_sample_fifo #(.W(SAMPLE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(emu_valid), .in_data(emu_data), .in_ready(emu_ready),
    .out_valid(fifo_valid), .out_data(fifo_data), .out_ready(fifo_ready),
    .level(emu_fifo_level)
  );

  amif_source_select #(.SAMPLE_W(SAMPLE_W)) u_src (
    .clk, .rst_n, .mode_emu,
    .sens_valid(sensor_valid), .sens_data(sensor_data),
    .emu_valid(fifo_valid), .emu_data(fifo_data), .emu_ready(fifo_ready),
    .out_valid(src_valid), .out_data(src_data), .out_ready(src_ready),
    .overrun(sensor_overrun), .switched
  );

  amif_input_scaling #(.SAMPLE_W(SAMPLE_W), .N_LEVELS(N_LEVELS)) u_scale (
    .sample(src_data), .lo(scale_lo), .shift(scale_shift),
    .bin, .clipped
  );

  // ---- controller ----------------------------------------------------------
  logic          shift, clr, init_we, prep, scan_issue, cap_const, d_en;
  logic          commit, done;
  logic [AW-1:0] init_addr0, init_addr1;
  scan_phase_e   phase, d_phase;
  logic [BW-1:0] idx, d_idx;
  logic          in_valid, out_valid, full;

  amif_ctrl #(.N_LEVELS(N_LEVELS)) u_ctrl (
    .clk, .rst_n, .restart(switched),
    .sample_valid(src_valid), .sample_ready(src_ready), .shift, .in_valid,
    .clr, .init_we, .init_addr0, .init_addr1,
    .prep, .scan_issue, .phase, .idx,
    .cap_const, .d_en, .d_phase, .d_idx, .commit, .done, .busy
  );

  assign sample_clipped = shift && clipped;

  // ---- sample memory -------------------------------------------------------
  logic [BW-1:0] a_in, a_out;
  logic [BW-1:0] b_in  [L_MAX];
  logic [BW-1:0] b_out [L_MAX];

  amif_sample_buffer #(.N_LEVELS(N_LEVELS), .L_MAX(L_MAX), .WINDOW(WINDOW)) u_buf (
    .clk, .rst_n, .clr, .shift, .din(bin),
    .a_in, .a_out, .b_in, .b_out, .in_valid, .out_valid, .full
  );

  // ---- histogram A ---------------------------------------------------------
  logic [BW-1:0] ha_addr0;
  logic [CW-1:0] ha_rd0, ha_rd1;

  assign ha_addr0 = prep ? a_in : idx;

  amif_hist1d #(.N_LEVELS(N_LEVELS), .CW(CW)) u_hist_a (
    .clk, .rst_n, .clr,
    .upd(commit), .in_valid, .in_bin(a_in), .out_valid, .out_bin(a_out),
    .rd_addr0(ha_addr0), .rd_addr1(a_out), .rd_data0(ha_rd0), .rd_data1(ha_rd1)
  );

  // ---- one lane per lag ----------------------------------------------------
  for (genvar l = 0; l < L_MAX; l++) begin : g_lane
    amif_lag_lane #(.N_LEVELS(N_LEVELS), .WINDOW(WINDOW), .LOG_FRAC(LOG_FRAC),
                    .ACC_W(ACC_W), .CW(CW), .BW(BW), .AW(AW)) u_lane (
      .clk, .rst_n,
      .clr, .init_we, .init_addr0, .init_addr1,
      .prep, .scan_issue, .phase, .idx,
      .cap_const, .d_en, .d_phase, .d_idx, .commit,
      .a_in, .a_out, .b_in(b_in[l]), .b_out(b_out[l]), .in_valid, .out_valid,
      .ha_rd0, .ha_rd1,
      .amif(amif[l])
    );
  end

  // ---- result --------------------------------------------------------------
  assign amif_valid = done && full;

  amif_first_min #(.L_MAX(L_MAX), .ACC_W(ACC_W), .TW(TW)) u_min (
    .clk, .rst_n, .start(amif_valid), .amif,
    .tau, .found(tau_found), .valid(tau_valid)
  );

endmodule
