// tb_amif_full: one complete measurement with the calculator at its default
// size (128 levels, lags 1..15, 512-sample window), fed through the
// emulator port with the x coordinate of the Rossler system
//   dx/dt = -y - z,  dy/dt = x + 0.2 y,  dz/dt = 0.2 + z (x - 5.7)
// (4th-order Runge-Kutta, step 0.01, one sample every 0.05 time units,
// transient discarded), a chaotic test signal whose AMIF has a clear first
// minimum inside the 15 lags (lag 11 at this sampling period). For the first full window and the following
// results the AMIF of all 15 lags is compared with a floating-point
// recomputation, and tau with the first minimum of both the design's values
// and (where not a near tie) the reference values. The per-sample time of
// 2*128+4 cycles is checked while the FIFO keeps the calculator busy.
module tb_amif_full;
  import amif_ref_pkg::*;

  localparam int N  = 128;
  localparam int L  = 15;
  localparam int M  = 512;
  localparam int F  = 12;
  localparam int LO = -32768;
  localparam int SH = 9;
  localparam int EXTRA = 24;               // results after the first full window
  localparam int NSAMP = M + L + EXTRA - 1;
  localparam real TOL = 2.0 * M / (2.0 ** F) + 1.0e-6;

  logic clk = 0, rst_n = 0;
  logic emu_valid = 0;
  logic signed [15:0] emu_data = '0;
  logic sensor_overrun, emu_ready, amif_valid, tau_found, tau_valid, sample_clipped, busy;
  logic [4:0] emu_fifo_level;
  logic signed [39:0] amif [L];
  logic [3:0] tau;

  always #5 clk = ~clk;

  amif_top dut (
    .clk, .rst_n, .mode_emu(1'b1),
    .scale_lo(16'sh8000), .scale_shift(5'(SH)),
    .sensor_valid(1'b0), .sensor_data(16'sd0), .sensor_overrun,
    .emu_valid, .emu_data, .emu_ready, .emu_fifo_level,
    .amif, .amif_valid, .tau, .tau_found, .tau_valid, .sample_clipped, .busy
  );

  int checks = 0, failures = 0;
  int lv[$];
  int pend[$];
  int raw[$];
  int cyc = 0, last_valid = -1, n_results = 0, exp_tau = 0, n_rate = 0;
  int tau_hist[16];

  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  task automatic rossler(input int n);
    real x, y, z, h;
    x = 1.0; y = 1.0; z = 0.0; h = 0.01;
    for (int s = 0; s < n + 500; s++) begin
      for (int k = 0; k < 5; k++) begin
        real k1x, k1y, k1z, k2x, k2y, k2z, k3x, k3y, k3z, k4x, k4y, k4z;
        k1x = -y - z;                  k1y = x + 0.2*y;                  k1z = 0.2 + z*(x - 5.7);
        k2x = -(y+h/2*k1y) - (z+h/2*k1z); k2y = (x+h/2*k1x) + 0.2*(y+h/2*k1y);
        k2z = 0.2 + (z+h/2*k1z)*((x+h/2*k1x) - 5.7);
        k3x = -(y+h/2*k2y) - (z+h/2*k2z); k3y = (x+h/2*k2x) + 0.2*(y+h/2*k2y);
        k3z = 0.2 + (z+h/2*k2z)*((x+h/2*k2x) - 5.7);
        k4x = -(y+h*k3y) - (z+h*k3z);  k4y = (x+h*k3x) + 0.2*(y+h*k3y);
        k4z = 0.2 + (z+h*k3z)*((x+h*k3x) - 5.7);
        x += h/6*(k1x + 2*k2x + 2*k3x + k4x);
        y += h/6*(k1y + 2*k2y + 2*k3y + k4y);
        z += h/6*(k1z + 2*k2z + 2*k3z + k4z);
      end
      if (s >= 500) raw.push_back(int'(x * 2000.0));
    end
  endtask

  // emulator driver and model: a sample is taken when valid && ready at an
  // edge; it then waits in the FIFO until the calculator shifts it in
  int  k_sent = 0;
  bit  sending = 0;
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
    if (rst_n && amif_valid) begin
      real s[];
      int t, trtl;
      s = new[L];
      t = lv.size() - 1;
      n_results++;
      for (int l = 1; l <= L; l++) begin
        real got;
        s[l-1] = amif_ref(lv, t, l, L, M, N);
        got = real'(amif[l-1]) / (2.0 ** F);
        check((got - s[l-1] < TOL) && (s[l-1] - got < TOL),
              $sformatf("lag %0d amif %f expected %f", l, got, s[l-1]));
      end
      trtl = L;
      for (int l = 1; l < L; l++) if (amif[l-1] < amif[l]) begin trtl = l; break; end
      exp_tau = trtl;
      if (first_min_margin(s, L) > 2.0 * TOL) check(first_min_real(s, L) == trtl, "first minimum vs reference");
      if (n_results == 1)
        $display("first full window: AMIF(1..15)/2^F = %0.2f %0.2f %0.2f ... %0.2f %0.2f",
                 s[0], s[1], s[2], s[13], s[14]);
      if (last_valid >= 0) begin
        check(cyc - last_valid == 2*N + 4, $sformatf("result spacing %0d", cyc - last_valid));
        n_rate++;
      end
      last_valid = cyc;
    end
    if (rst_n && tau_valid) begin
      check(int'(tau) == exp_tau, $sformatf("tau %0d expected %0d", tau, exp_tau));
      tau_hist[tau]++;
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rossler(NSAMP);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (busy) @(posedge clk);
    sending = 1;
    while (k_sent < NSAMP) @(posedge clk);
    @(posedge clk);
    while (emu_fifo_level != 0 || busy) @(posedge clk);
    repeat (5) @(posedge clk);
    check(n_results == EXTRA, $sformatf("%0d results, expected %0d", n_results, EXTRA));
    check(n_rate > 0, "full-rate spacing observed");
    for (int k = 1; k <= L; k++) if (tau_hist[k] != 0) $display("tau = %0d in %0d results", k, tau_hist[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
