// tb_amif_sample_fifo: random valid/ready on both sides against a queue
// model; checks order, level, full (in_ready low) and empty, and that both
// full and empty actually happen.
module tb_amif_sample_fifo;
  localparam int D = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0;
  logic [15:0] in_data = '0;
  logic in_ready, out_valid;
  logic [15:0] out_data;
  logic [3:0] level;
  int q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  always #5 clk = ~clk;

  amif_sample_fifo #(.W(16), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready, .level);

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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int bias;
      @(negedge clk);
      bias = (k / 500) % 2;
      in_valid  = $urandom_range(0, 3) < (bias ? 3 : 1);
      in_data   = 16'($urandom);
      out_ready = $urandom_range(0, 3) < (bias ? 1 : 3);
      #1;
      check(int'(level) == q.size(), "level");
      check(out_valid == (q.size() > 0), "out_valid");
      check(in_ready == (q.size() < D || out_ready), "in_ready");
      if (q.size() > 0) check(out_data == 16'(q[0]), "order");
      if (q.size() == D) n_full++;
      if (q.size() == 0) n_empty++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(int'(in_data));
    end
    check(n_full > 0 && n_empty > 0, "full and empty happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
