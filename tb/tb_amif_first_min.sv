// tb_amif_first_min: hand-made AMIF curves (falling then rising, monotone,
// equal neighbours, minimum at the first and the last possible lag) and
// random curves against an independent search for the first rise.
module tb_amif_first_min;
  localparam int L = 15;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [39:0] amif [L];
  logic [3:0] tau;
  logic found, valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  amif_first_min #(.L_MAX(L), .ACC_W(40)) dut (.clk, .rst_n, .start, .amif, .tau, .found, .valid);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input longint v [L]);
    int e;
    e = L;
    for (int l = L - 1; l >= 1; l--) if (v[l-1] < v[l]) e = l;
    for (int l = 0; l < L; l++) amif[l] = 40'(v[l]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!valid || int'(tau) != e || found != (e < L)) begin
      failures++;
      if (failures < 10) $display("FAIL: tau=%0d expected %0d found=%0d valid=%0d", tau, e, found, valid);
    end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("FAIL: valid longer than one cycle"); end
  endtask

  initial begin
    longint v [L];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) v[l] = -100 * l + ((l >= 4) ? 500 * (l - 3) : 0);
    run(v);                                   // minimum at lag 4
    for (int l = 0; l < L; l++) v[l] = -1000 + l;
    run(v);                                   // rising at once: tau = 1
    for (int l = 0; l < L; l++) v[l] = -l;
    run(v);                                   // falling throughout: none
    for (int l = 0; l < L; l++) v[l] = (l < 3) ? -5 : -5 + (l - 2);
    run(v);                                   // flat then rising: tau = 3
    for (int l = 0; l < L; l++) v[l] = (l == L - 1) ? 10 : -l;
    run(v);                                   // rise at the last lag
    for (int k = 0; k < 300; k++) begin
      for (int l = 0; l < L; l++) v[l] = longint'($urandom_range(0, 20)) - 4000;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
