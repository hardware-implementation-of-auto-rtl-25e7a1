// tb_amif_top: end-to-end test of the AMIF calculator at reduced size
// (8 levels, 4 lags, 39-sample window, a multiple of the test signal period) so that every mechanism occurs often.
//
// Phase 1 feeds a noisy sine from the sensor port, with some samples offered
// while the calculator is busy (they must be dropped and flagged) and some
// out of range (clipped). Phase 2 switches to the emulator port (the
// measurement must restart) and streams samples at full rate through the
// FIFO, which fills and holds the source off. After every result the AMIF
// of each lag is compared with a floating-point recomputation from the
// accepted samples, tau with the first minimum of the design's own values
// and, where not a near tie, of the reference values. The spacing of
// results at full rate must be 2*N+4 cycles.
module tb_amif_top;
  import amif_ref_pkg::*;

  localparam int N  = 8;
  localparam int L  = 4;
  localparam int M  = 39;
  localparam int SW = 16;
  localparam int F  = 12;
  localparam int ACC_W = 40;
  localparam int TW = $clog2(L + 1);
  localparam int LO = -4096;
  localparam int SH = 10;
  localparam real TOL = 2.0 * M / (2.0 ** F) + 1.0e-6;

  logic clk = 0, rst_n = 0;
  logic mode_emu = 0;
  logic sensor_valid = 0, emu_valid = 0;
  logic signed [SW-1:0] sensor_data = '0, emu_data = '0;
  logic sensor_overrun, emu_ready, amif_valid, tau_found, tau_valid, sample_clipped, busy;
  logic [$clog2(16):0] emu_fifo_level;
  logic signed [ACC_W-1:0] amif [L];
  logic [TW-1:0] tau;

  always #5 clk = ~clk;

  amif_top #(.N_LEVELS(N), .L_MAX(L), .WINDOW(M), .SAMPLE_W(SW), .LOG_FRAC(F),
             .ACC_W(ACC_W), .FIFO_DEPTH(16)) dut (
    .clk, .rst_n, .mode_emu,
    .scale_lo(SW'(LO)), .scale_shift(5'(SH)),
    .sensor_valid, .sensor_data, .sensor_overrun,
    .emu_valid, .emu_data, .emu_ready, .emu_fifo_level,
    .amif, .amif_valid, .tau, .tau_found, .tau_valid, .sample_clipped, .busy
  );

  int checks = 0, failures = 0;
  int lv[$];
  int pend[$];
  int n_overrun = 0, n_clip = 0, n_switch = 0, n_stall = 0, n_results = 0;
  int n_slide = 0, n_same_cell = 0, n_found = 0, n_rate_ok = 0;
  int cyc = 0, last_valid_cyc = -1;
  bit full_rate = 0;
  int exp_tau_rtl = 0;

  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic int sig(input int t);
    real v;
    v = 3000.0 * $sin(2.0 * 3.14159265 * t / 13.0) + real'($urandom_range(0, 1200)) - 600.0;
    if (t % 41 == 7)  v = 9000.0;   // out of range high
    if (t % 53 == 11) v = -9000.0;  // out of range low
    return int'(v);
  endfunction

  // model: record accepted samples
  always @(posedge clk) begin
    if (rst_n) begin
      if (!mode_emu && sensor_valid && !sensor_overrun && !dut.u_src.switched)
        lv.push_back(scale_bin(int'(sensor_data), LO, SH, N));
      if (sensor_valid && sensor_overrun) n_overrun++;
      // emulator samples queue in the FIFO until the calculator takes one
      if (mode_emu && dut.shift && pend.size() > 0)
        lv.push_back(pend.pop_front());
      if (mode_emu && emu_valid && emu_ready)
        pend.push_back(scale_bin(int'(emu_data), LO, SH, N));
      if (emu_valid && !emu_ready) n_stall++;
      if (sample_clipped) n_clip++;
    end
  end

  // result checker
  always @(posedge clk) begin
    if (rst_n && amif_valid) begin
      real s[];
      int t, trtl;
      real mg;
      s = new[L];
      t = lv.size() - 1;
      n_results++;
      if (lv.size() > L + M) n_slide++;
      for (int l = 1; l <= L; l++) begin
        real got;
        s[l-1] = amif_ref(lv, t, l, L, M, N);
        got = real'(amif[l-1]) / (2.0 ** F);
        check((got - s[l-1] < TOL) && (s[l-1] - got < TOL),
              $sformatf("lag %0d amif %f expected %f", l, got, s[l-1]));
        if (lv.size() > L + M &&
            lv[t-L] == lv[t-L-M] && lv[t-L+l] == lv[t-L-M+l]) n_same_cell++;
      end
      trtl = L;
      for (int l = 1; l < L; l++) if (amif[l-1] < amif[l]) begin trtl = l; break; end
      exp_tau_rtl = trtl;
      mg = first_min_margin(s, L);
      if (mg > 2.0 * TOL) check(first_min_real(s, L) == trtl, "first minimum vs reference");
      if (full_rate) begin
        if (last_valid_cyc >= 0) begin
          check(cyc - last_valid_cyc == 2*N + 4,
                $sformatf("result spacing %0d", cyc - last_valid_cyc));
          if (cyc - last_valid_cyc == 2*N + 4) n_rate_ok++;
        end
        last_valid_cyc = cyc;
      end
    end
    if (rst_n && tau_valid) begin
      check(int'(tau) == exp_tau_rtl, $sformatf("tau %0d expected %0d", tau, exp_tau_rtl));
      check(tau_found == (exp_tau_rtl < L), "tau_found");
      if (tau_found) n_found++;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    t = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (busy) @(posedge clk);
    // ---- phase 1: sensor --------------------------------------------------
    for (int k = 0; k < 90; k++) begin
      @(posedge clk);
      sensor_valid <= 1;
      sensor_data  <= SW'(sig(t)); t++;
      @(posedge clk);
      sensor_valid <= 0;
      if (k % 9 == 4) begin
        // second sample while the calculator is busy: dropped
        repeat (3) @(posedge clk);
        sensor_valid <= 1;
        sensor_data  <= SW'(sig(t)); t++;
        @(posedge clk);
        sensor_valid <= 0;
      end
      repeat (2*N + 8) @(posedge clk);
    end
    // ---- phase 2: emulator at full rate -------------------------------------
    @(posedge clk);
    mode_emu <= 1;
    n_switch++;
    @(posedge clk);
    lv.delete();
    @(posedge clk);
    while (busy) @(posedge clk);
    full_rate = 1;
    for (int k = 0; k < 120; k++) begin
      emu_valid <= 1;
      emu_data  <= SW'(sig(t));
      @(posedge clk);
      while (!emu_ready) @(posedge clk);
      t++;
    end
    emu_valid <= 0;
    full_rate = 0;
    while (emu_fifo_level != 0 || busy) @(posedge clk);
    repeat (5) @(posedge clk);
    // ---- mechanisms -----------------------------------------------------------
    $display("results=%0d overrun=%0d clipped=%0d switch=%0d stall=%0d slide=%0d same_cell=%0d found=%0d rate_ok=%0d",
             n_results, n_overrun, n_clip, n_switch, n_stall, n_slide, n_same_cell, n_found, n_rate_ok);
    check(n_results > 100, "results produced");
    check(n_overrun > 0,   "sensor overrun happened");
    check(n_clip > 0,      "clipping happened");
    check(n_switch > 0,    "mode switch happened");
    check(n_stall > 0,     "emulator FIFO stall happened");
    check(n_slide > 0,     "window slid (samples left the window)");
    check(n_same_cell > 0, "entering and leaving pair in the same cell");
    check(n_found > 0,     "a first minimum was found");
    check(n_rate_ok > 0,   "full-rate spacing observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
