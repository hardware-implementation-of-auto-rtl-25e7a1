// tb_amif_workload_table1: the calculator in the configuration of the
// paper's hardware workbench test (32 levels, lags 1..15, 512-sample
// windows, 15 windows per series), run on two synthetic series since the
// motor recordings are not part of this package:
//   series 0: a dominant low-frequency vibration (period 17 samples) plus
//             noise, the kind of signal whose AMIF falls for several lags;
//   series 1: the same with most energy moved to high frequency (period
//             3 samples) and stronger noise.
// Each series is streamed through the emulator port after a mode change,
// which restarts the measurement. At the end of each of 15 consecutive,
// non-overlapping 512-sample windows the AMIF of all lags and tau are
// checked against the floating-point reference; the tau values of each
// series are printed as mean and count, as in the paper's table.
module tb_amif_workload_table1;
  import amif_ref_pkg::*;

  localparam int N = 32, L = 15, M = 512, F = 12, NWIN = 15;
  localparam int LO = -32768, SH = 11;
  localparam int NSAMP = NWIN * M + L;
  localparam real TOL = 2.0 * M / (2.0 ** F) + 1.0e-6;

  logic clk = 0, rst_n = 0, mode_emu = 0, emu_valid = 0;
  logic signed [15:0] emu_data = '0;
  logic sensor_overrun, emu_ready, amif_valid, tau_found, tau_valid, sample_clipped, busy;
  logic [4:0] emu_fifo_level;
  logic signed [39:0] amif [L];
  logic [3:0] tau;

  always #5 clk = ~clk;

  amif_top #(.N_LEVELS(N), .L_MAX(L), .WINDOW(M)) dut (
    .clk, .rst_n, .mode_emu, .scale_lo(16'sh8000), .scale_shift(5'(SH)),
    .sensor_valid(1'b0), .sensor_data(16'sd0), .sensor_overrun,
    .emu_valid, .emu_data, .emu_ready, .emu_fifo_level,
    .amif, .amif_valid, .tau, .tau_found, .tau_valid, .sample_clipped, .busy
  );

  int checks = 0, failures = 0;
  int lv[$];
  int pend[$];
  int raw[$];
  int k_sent = 0, n_windows = 0, exp_tau = 0, tau_sum = 0;
  bit sending = 0, window_end = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int gen(input int series, input int t);
    real v;
    if (series == 0)
      v = 9000.0 * $sin(2.0 * 3.14159265 * t / 17.0) + 1500.0 * $sin(2.0 * 3.14159265 * t / 5.3)
        + real'($urandom_range(0, 4000)) - 2000.0;
    else
      v = 6000.0 * $sin(2.0 * 3.14159265 * t / 3.0) + 2500.0 * $sin(2.0 * 3.14159265 * t / 17.0)
        + real'($urandom_range(0, 9000)) - 4500.0;
    return int'(v);
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.shift && pend.size() > 0) lv.push_back(pend.pop_front());
      if (emu_valid && emu_ready) begin
        pend.push_back(scale_bin(int'(emu_data), LO, SH, N));
        k_sent++;
      end
      if (sending && k_sent < NSAMP) begin
        emu_valid <= 1'b1;
        emu_data  <= 16'(raw[k_sent]);
      end else begin
        emu_valid <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && amif_valid && (lv.size() - L) % M == 0) begin
      real s[];
      int t, trtl;
      s = new[L];
      t = lv.size() - 1;
      window_end = 1;
      n_windows++;
      for (int l = 1; l <= L; l++) begin
        real got;
        s[l-1] = amif_ref(lv, t, l, L, M, N);
        got = real'(amif[l-1]) / (2.0 ** F);
        check((got - s[l-1] < TOL) && (s[l-1] - got < TOL),
              $sformatf("window %0d lag %0d amif %f expected %f", n_windows, l, got, s[l-1]));
      end
      trtl = L;
      for (int l = 1; l < L; l++) if (amif[l-1] < amif[l]) begin trtl = l; break; end
      exp_tau = trtl;
      if (first_min_margin(s, L) > 2.0 * TOL) check(first_min_real(s, L) == trtl, "first minimum vs reference");
    end
    if (rst_n && tau_valid && window_end) begin
      window_end = 0;
      check(int'(tau) == exp_tau, $sformatf("tau %0d expected %0d", tau, exp_tau));
      tau_sum += int'(tau);
    end
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int series = 0; series < 2; series++) begin
      raw.delete();
      for (int t = 0; t < NSAMP; t++) raw.push_back(gen(series, t));
      mode_emu <= ~mode_emu;          // restart the measurement (emulator mode after 2 toggles)
      if (series == 0) begin
        @(posedge clk); @(posedge clk);
        mode_emu <= 1'b1;
      end
      @(posedge clk); @(posedge clk);
      lv.delete(); pend.delete();
      k_sent = 0; n_windows = 0; tau_sum = 0;
      while (busy) @(posedge clk);
      sending = 1;
      while (k_sent < NSAMP) @(posedge clk);
      sending = 0;
      @(posedge clk);
      while (emu_fifo_level != 0 || busy) @(posedge clk);
      repeat (3) @(posedge clk);
      check(n_windows == NWIN, $sformatf("series %0d: %0d windows", series, n_windows));
      $display("series %0d: %0d windows, mean tau %0.2f", series, n_windows, real'(tau_sum) / NWIN);
      if (series == 0) begin
        mode_emu <= 1'b0;             // back to sensor mode before the next series
        @(posedge clk); @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
