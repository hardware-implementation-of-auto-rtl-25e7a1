// tb_amif_hist2d: random reads and writes on both ports of the joint
// histogram memory against an array model: one-cycle read latency,
// read-before-write on a port, and independent ports.
module tb_amif_hist2d;
  localparam int N = 8, CW = 6, AW = 6;
  logic clk = 0, rst_n = 0;
  logic [AW-1:0] a0 = '0, a1 = '0;
  logic we0 = 0, we1 = 0;
  logic [CW-1:0] w0 = '0, w1 = '0, r0, r1;
  int m [N*N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  amif_hist2d #(.N_LEVELS(N), .CW(CW), .AW(AW)) dut (.clk, .rst_n, .addr0(a0), .we0, .wdata0(w0),
    .rdata0(r0), .addr1(a1), .we1, .wdata1(w1), .rdata1(r1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e0, e1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N*N; k += 2) begin   // fill through both ports
      a0 = AW'(k); a1 = AW'(k + 1); we0 = 1; we1 = 1; w0 = CW'(k); w1 = CW'(k + 1);
      m[k] = k % (1 << CW); m[k+1] = (k + 1) % (1 << CW);
      @(negedge clk);
    end
    for (int k = 0; k < 5000; k++) begin
      a0 = AW'($urandom); a1 = AW'($urandom);
      we0 = $urandom_range(0, 1); we1 = $urandom_range(0, 1) && (a1 != a0);
      w0 = CW'($urandom); w1 = CW'($urandom);
      e0 = m[a0]; e1 = m[a1];
      @(negedge clk);
      check(int'(r0) == e0 && int'(r1) == e1, $sformatf("read %0d/%0d got %0d/%0d", e0, e1, r0, r1));
      if (we0) m[a0] = int'(w0);
      if (we1) m[a1] = int'(w1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
