// tb_amif_sample_buffer: random shift patterns (idle gaps and back-to-back
// shifts) against a list of all samples; checks the entering and leaving
// sample of histogram A and of every lag, the three validity flags and clr.
module tb_amif_sample_buffer;
  localparam int N = 16, L = 3, M = 7;
  logic clk = 0, rst_n = 0, clr = 0, shift = 0;
  logic [3:0] din = '0;
  logic [3:0] a_in, a_out;
  logic [3:0] b_in [L];
  logic [3:0] b_out [L];
  logic in_valid, out_valid, full;
  int x[$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  amif_sample_buffer #(.N_LEVELS(N), .L_MAX(L), .WINDOW(M)) dut (.clk, .rst_n, .clr, .shift, .din,
    .a_in, .a_out, .b_in, .b_out, .in_valid, .out_valid, .full);

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

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int t;
      shift = $urandom_range(0, 2) != 0;
      din = 4'($urandom);
      clr = (k == 1500);
      @(posedge clk);
      if (clr) x.delete();
      else if (shift) x.push_back(int'(din));
      @(negedge clk);
      shift = 0; clr = 0;
      t = x.size() - 1;
      check(in_valid == (x.size() >= L + 1), "in_valid");
      check(out_valid == (x.size() >= L + M + 1), "out_valid");
      check(full == (x.size() >= L + M), "full");
      if (in_valid) begin
        check(int'(a_in) == x[t-L], "a_in");
        for (int l = 1; l <= L; l++) check(int'(b_in[l-1]) == x[t-L+l], "b_in");
      end
      if (out_valid) begin
        check(int'(a_out) == x[t-L-M], "a_out");
        for (int l = 1; l <= L; l++) check(int'(b_out[l-1]) == x[t-L-M+l], "b_out");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
