// tb_amif_hist1d: random increment/decrement updates (including same-bin
// and one-sided updates) and random reads on both ports against an array
// model; reads must return the count one cycle after the address; clr.
module tb_amif_hist1d;
  localparam int N = 16, CW = 8;
  logic clk = 0, rst_n = 0, clr = 0, upd = 0, in_valid = 0, out_valid = 0;
  logic [3:0] in_bin = '0, out_bin = '0, a0 = '0, a1 = '0;
  logic [CW-1:0] d0, d1;
  int m [N];
  int e0, e1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  amif_hist1d #(.N_LEVELS(N), .CW(CW)) dut (.clk, .rst_n, .clr, .upd, .in_valid, .in_bin,
    .out_valid, .out_bin, .rd_addr0(a0), .rd_addr1(a1), .rd_data0(d0), .rd_data1(d1));

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
    foreach (m[k]) m[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      upd = $urandom_range(0, 1);
      in_valid = $urandom_range(0, 3) != 0;
      in_bin = 4'($urandom_range(0, 7));        // low bins fill up
      out_bin = 4'($urandom_range(0, N - 1));
      out_valid = $urandom_range(0, 1) && (m[out_bin] > 0 || (in_valid && in_bin == out_bin));
      clr = (k == 3000);
      a0 = 4'($urandom); a1 = 4'($urandom);
      e0 = m[a0]; e1 = m[a1];
      @(posedge clk);
      if (clr) foreach (m[j]) m[j] = 0;
      else if (upd) begin
        if (in_valid) m[in_bin]++;
        if (out_valid) m[out_bin]--;
      end
      @(negedge clk);
      check(int'(d0) == e0 && int'(d1) == e1, $sformatf("read %0d/%0d got %0d/%0d", e0, e1, d0, d1));
      upd = 0;
    end
    for (int k = 0; k < N; k++) begin
      @(negedge clk); a0 = 4'(k); a1 = 4'(N - 1 - k);
      @(negedge clk);
      check(int'(d0) == m[k] && int'(d1) == m[N-1-k], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
