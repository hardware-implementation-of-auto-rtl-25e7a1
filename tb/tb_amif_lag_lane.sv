// tb_amif_lag_lane: one lag lane (lag 2 of 3, 8 levels, 24-sample window)
// run by the real controller and a histogram A, with the entering and
// leaving samples supplied by the testbench's own delay model. After each
// commit the lane's AMIF must match the floating-point recomputation; the
// window slides and same-cell updates must occur.
module tb_amif_lag_lane;
  import amif_pkg::*;
  import amif_ref_pkg::*;
  localparam int N = 8, L = 3, LAG = 2, M = 24, F = 12;
  localparam int CW = $clog2(M + 1), BW = 3, AW = 6;
  localparam real TOL = 2.0 * M / (2.0 ** F) + 1.0e-6;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic sample_ready, shift, clr, init_we, prep, scan_issue, cap_const, d_en, commit, done, busy;
  logic [AW-1:0] init_addr0, init_addr1;
  scan_phase_e phase, d_phase;
  logic [BW-1:0] idx, d_idx, ha_addr0;
  logic [BW-1:0] a_in = '0, a_out = '0, b_in = '0, b_out = '0;
  logic in_valid = 0, out_valid = 0;
  logic [CW-1:0] ha_rd0, ha_rd1;
  logic signed [39:0] amif;
  int x[$];
  int checks = 0, failures = 0, n_same = 0, n_slide = 0;

  always #5 clk = ~clk;

  amif_ctrl #(.N_LEVELS(N)) u_ctrl (.clk, .rst_n, .restart(1'b0), .sample_valid, .sample_ready,
    .shift, .in_valid, .clr, .init_we, .init_addr0, .init_addr1, .prep, .scan_issue, .phase, .idx,
    .cap_const, .d_en, .d_phase, .d_idx, .commit, .done, .busy);

  assign ha_addr0 = prep ? a_in : idx;
  amif_hist1d #(.N_LEVELS(N), .CW(CW)) u_a (.clk, .rst_n, .clr, .upd(commit), .in_valid,
    .in_bin(a_in), .out_valid, .out_bin(a_out), .rd_addr0(ha_addr0), .rd_addr1(a_out),
    .rd_data0(ha_rd0), .rd_data1(ha_rd1));

  amif_lag_lane #(.N_LEVELS(N), .WINDOW(M), .LOG_FRAC(F), .ACC_W(40)) dut (.clk, .rst_n,
    .clr, .init_we, .init_addr0, .init_addr1, .prep, .scan_issue, .phase, .idx, .cap_const,
    .d_en, .d_phase, .d_idx, .commit, .a_in, .a_out, .b_in, .b_out, .in_valid, .out_valid,
    .ha_rd0, .ha_rd1, .amif);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", x.size(), what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample taps, updated with the shift like the sample buffer
  always @(posedge clk) begin
    if (shift) begin
      int t;
      x.push_back((x.size() % 24 < 12) ? int'($urandom_range(0, N - 1)) : x.size() % 3);
      t = x.size() - 1;
      in_valid  <= x.size() >= L + 1;
      out_valid <= x.size() >= L + M + 1;
      a_in  <= BW'(t >= L ? x[t-L] : 0);
      b_in  <= BW'(t >= L ? x[t-L+LAG] : 0);
      a_out <= BW'(t >= L + M ? x[t-L-M] : 0);
      b_out <= BW'(t >= L + M ? x[t-L-M+LAG] : 0);
      if (t >= L + M && x[t-L] == x[t-L-M] && x[t-L+LAG] == x[t-L-M+LAG]) n_same++;
      if (t >= L + M) n_slide++;
    end
  end

  always @(posedge clk) begin
    if (done && x.size() >= L + M) begin
      real s;
      s = amif_ref(x, x.size() - 1, LAG, L, M, N);
      check(real'(amif) / (2.0 ** F) - s < TOL && s - real'(amif) / (2.0 ** F) < TOL,
            $sformatf("amif %f expected %f", real'(amif) / (2.0 ** F), s));
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    sample_valid = 1;
    while (x.size() < 300) @(negedge clk);
    sample_valid = 0;
    repeat (3 * N + 8) @(negedge clk);
    check(n_same > 0 && n_slide > 0, "same-cell and sliding updates happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
