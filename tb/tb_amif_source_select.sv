// tb_amif_source_select: random traffic on both sources in both modes,
// checking the selected data, the emulator back-pressure, the sensor
// overrun flag and the restart pulse and blocked cycle at a mode change.
module tb_amif_source_select;
  logic clk = 0, rst_n = 0;
  logic mode_emu = 0, sens_valid = 0, emu_valid = 0, out_ready = 0;
  logic [15:0] sens_data = '0, emu_data = '0;
  logic emu_ready, out_valid, overrun, switched;
  logic [15:0] out_data;
  logic mode_ref = 0;
  int checks = 0, failures = 0, n_sw = 0, n_ovr = 0;

  always #5 clk = ~clk;

  amif_source_select #(.SAMPLE_W(16)) dut (.clk, .rst_n, .mode_emu, .sens_valid, .sens_data,
    .emu_valid, .emu_data, .emu_ready, .out_valid, .out_data, .out_ready, .overrun, .switched);

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
    for (int k = 0; k < 3000; k++) begin
      bit sw;
      @(negedge clk);
      if ($urandom_range(0, 49) == 0) mode_emu = ~mode_emu;
      sens_valid = $urandom_range(0, 1); sens_data = 16'($urandom);
      emu_valid  = $urandom_range(0, 1); emu_data  = 16'($urandom);
      out_ready  = $urandom_range(0, 3) != 0;
      #1;
      sw = (mode_emu != mode_ref);
      check(switched == sw, "switched");
      if (sw) begin
        n_sw++;
        check(!out_valid && !emu_ready, "nothing passes while switching");
      end else if (mode_ref) begin
        check(out_valid == emu_valid && out_data == emu_data, "emulator data");
        check(emu_ready == out_ready, "emulator ready");
        check(!overrun, "no overrun in emulator mode");
      end else begin
        check(out_valid == sens_valid && out_data == sens_data, "sensor data");
        check(!emu_ready, "emulator held in sensor mode");
        check(overrun == (sens_valid && !out_ready), "overrun");
        if (overrun) n_ovr++;
      end
      @(posedge clk);
      mode_ref = mode_emu;
    end
    check(n_sw > 10 && n_ovr > 10, "mode changes and overruns happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
