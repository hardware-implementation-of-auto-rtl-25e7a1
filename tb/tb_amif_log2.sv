// tb_amif_log2: checks every entry of the log2 table against the
// floating-point logarithm (within 0.5 LSB plus a little), the definition
// log2(0) = 0, exact powers of two and the zero output above the table.
module tb_amif_log2;
  localparam int MAXC = 600;
  localparam int F    = 12;
  localparam int CW   = $clog2(MAXC + 1);
  localparam int LW   = $clog2(CW + 1) + F;
  logic [CW-1:0] x;
  logic [LW-1:0] y;
  int checks = 0, failures = 0;

  amif_log2 #(.MAX_COUNT(MAXC), .CW(CW), .LOG_FRAC(F), .LW(LW)) dut (.x, .y);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < (1 << CW); k++) begin
      real e, g;
      x = CW'(k);
      #1;
      if (k == 0 || k > MAXC) check(y == '0, $sformatf("x=%0d y=%0d", k, y));
      else begin
        e = $ln(real'(k)) / $ln(2.0) * (2.0 ** F);
        g = real'(y);
        check(g - e < 0.51 && e - g < 0.51, $sformatf("x=%0d y=%0d expected %f", k, y, e));
      end
    end
    for (int p = 0; p < 10; p++) begin
      x = CW'(1 << p); #1;
      check(int'(y) == p * (1 << F), $sformatf("power of two %0d: %0d", 1 << p, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
