// tb_amif_input_scaling: random and corner samples against an independent
// integer model of bin = clamp((sample - lo) >> shift, 0, N-1), including
// the clipped flag at both ends.
module tb_amif_input_scaling;
  localparam int SW = 16;
  localparam int N  = 128;
  logic signed [SW-1:0] sample, lo;
  logic [4:0] shift;
  logic [6:0] bin;
  logic clipped;
  int checks = 0, failures = 0;

  amif_input_scaling #(.SAMPLE_W(SW), .N_LEVELS(N)) dut (.sample, .lo, .shift, .bin, .clipped);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int s, input int l, input int sh);
    int d, e;
    bit c;
    sample = SW'(s); lo = SW'(l); shift = 5'(sh);
    #1;
    d = s - l;
    c = 0;
    if (d < 0) begin e = 0; c = 1; end
    else begin
      e = d / (1 << sh);
      if (e > N - 1) begin e = N - 1; c = 1; end
    end
    checks++;
    if (int'(bin) != e || clipped != c) begin
      failures++;
      if (failures < 10) $display("FAIL: s=%0d lo=%0d sh=%0d bin=%0d/%0d clip=%0d/%0d", s, l, sh, bin, e, clipped, c);
    end
  endtask

  initial begin
    one(-32768, -32768, 9); one(32767, -32768, 9); one(0, -32768, 9);
    one(-100, 0, 3); one(1023, 0, 3); one(1024, 0, 3); one(32767, 32767, 0);
    one(-32768, 32767, 0); one(5, 5, 16);
    for (int k = 0; k < 5000; k++)
      one($signed(16'($urandom)), $signed(16'($urandom)), $urandom_range(0, 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
