// tb_amif_update: drives the AMIF update engine alone through complete
// row/column scans for a random sample stream (6 levels, lag 2 of 3,
// 20-sample window), feeding it counts from histograms kept by the
// testbench. After every sample the sum must equal the floating-point
// AMIF of the testbench histograms; the scans take 2N enabled cycles.
module tb_amif_update;
  import amif_pkg::*;
  import amif_ref_pkg::*;
  localparam int N = 6, L = 3, LAG = 2, M = 20, F = 12;
  localparam int CW = $clog2(M + 1);
  localparam real TOL = 2.0 * M / (2.0 ** F) + 1.0e-6;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  scan_phase_e phase = PH_ROWS;
  logic [2:0] idx = '0, a_in = '0, a_out = '0, b_in = '0, b_out = '0;
  logic in_valid = 0, out_valid = 0;
  logic [CW-1:0] ab0 = '0, ab1 = '0, h_scan = '0, ca_in = '0, ca_out = '0, cb_in = '0, cb_out = '0;
  logic signed [39:0] amif;
  int A [N];
  int B [N];
  int AB [N*N];
  int x[$];
  int checks = 0, failures = 0, n_same = 0, n_slide = 0;

  always #5 clk = ~clk;

  amif_update #(.N_LEVELS(N), .WINDOW(M), .LOG_FRAC(F), .ACC_W(40)) dut (.clk, .rst_n, .clr, .en,
    .phase, .idx, .a_in, .a_out, .b_in, .b_out, .in_valid, .out_valid, .ab0, .ab1, .h_scan,
    .ca_in, .ca_out, .cb_in, .cb_out, .amif);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", x.size(), what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (A[k]) begin A[k] = 0; B[k] = 0; end
    foreach (AB[k]) AB[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      int t, ai, ao, bi, bo, vi, vo, cyc0;
      real s;
      x.push_back((k % 37 < 18) ? $urandom_range(0, N - 1) : $urandom_range(2, 3));
      t = x.size() - 1;
      vi = (x.size() >= L + 1);
      vo = (x.size() >= L + M + 1);
      if (!vi) continue;
      ai = x[t-L]; bi = x[t-L+LAG];
      ao = vo ? x[t-L-M] : 0; bo = vo ? x[t-L-M+LAG] : 0;
      if (vo && ai == ao && bi == bo) n_same++;
      if (vo) n_slide++;
      a_in = 3'(ai); a_out = 3'(ao); b_in = 3'(bi); b_out = 3'(bo);
      in_valid = 1'(vi); out_valid = 1'(vo);
      ca_in = CW'(A[ai]); ca_out = CW'(A[ao]); cb_in = CW'(B[bi]); cb_out = CW'(B[bo]);
      for (int p = 0; p < 2; p++) begin
        for (int j = 0; j < N; j++) begin
          en = 1; idx = 3'(j);
          if (p == 0) begin
            phase = PH_ROWS; ab0 = CW'(AB[ai*N+j]); ab1 = CW'(AB[ao*N+j]); h_scan = CW'(B[j]);
          end else begin
            phase = PH_COLS; ab0 = CW'(AB[j*N+bi]); ab1 = CW'(AB[j*N+bo]); h_scan = CW'(A[j]);
          end
          @(negedge clk);
        end
      end
      en = 0;
      A[ai]++; B[bi]++; AB[ai*N+bi]++;
      if (vo) begin A[ao]--; B[bo]--; AB[ao*N+bo]--; end
      s = 0.0;
      foreach (AB[c]) s += flog(AB[c]);
      foreach (A[c]) s -= flog(A[c]) + flog(B[c]);
      @(negedge clk);
      check(real'(amif) / (2.0 ** F) - s < TOL && s - real'(amif) / (2.0 ** F) < TOL,
            $sformatf("amif %f expected %f", real'(amif) / (2.0 ** F), s));
    end
    check(n_same > 0 && n_slide > 0, "same-cell and sliding updates happened");
    clr = 1; @(negedge clk); clr = 0;
    check(amif == '0, "clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
