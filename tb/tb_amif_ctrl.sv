// tb_amif_ctrl: checks the controller's schedule cycle by cycle (4 levels):
// the clearing sweep after reset covers every joint-histogram address once,
// a sample is followed by prep, N row and N column scan cycles with indices
// 0..N-1, the data-side copies one cycle later, drain and commit, i.e. 2N+4
// cycles from one accepted sample to the next; a sample with in_valid = 0
// ends after prep; restart returns to the clearing sweep.
module tb_amif_ctrl;
  import amif_pkg::*;
  localparam int N = 4, AW = 4, HALF = N*N/2;
  logic clk = 0, rst_n = 0, restart = 0, sample_valid = 0, in_valid = 0;
  logic sample_ready, shift, clr, init_we, prep, scan_issue, cap_const, d_en, commit, done, busy;
  logic [AW-1:0] init_addr0, init_addr1;
  scan_phase_e phase, d_phase;
  logic [1:0] idx, d_idx;
  int checks = 0, failures = 0;
  bit seen [N*N];

  always #5 clk = ~clk;

  amif_ctrl #(.N_LEVELS(N)) dut (.clk, .rst_n, .restart, .sample_valid, .sample_ready, .shift,
    .in_valid, .clr, .init_we, .init_addr0, .init_addr1, .prep, .scan_issue, .phase, .idx,
    .cap_const, .d_en, .d_phase, .d_idx, .commit, .done, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic init_sweep();
    foreach (seen[k]) seen[k] = 0;
    for (int k = 0; k < HALF; k++) begin
      check(init_we && clr && busy && !sample_ready, "clearing sweep");
      seen[init_addr0] = 1; seen[init_addr1] = 1;
      @(negedge clk);
    end
    foreach (seen[k]) check(seen[k], $sformatf("address %0d cleared", k));
    check(!init_we && !clr && sample_ready && !busy, "idle after sweep");
  endtask

  // full sample; returns with the controller idle again
  task automatic one_sample(input bit full_update);
    sample_valid = 1;
    #1 check(shift, "shift on accept");
    @(negedge clk);
    sample_valid = 0;
    in_valid = full_update;
    check(prep && !shift && !sample_ready, "prep");
    @(negedge clk);
    if (!full_update) begin
      check(sample_ready && !scan_issue && cap_const, "skip without update");
      return;
    end
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < N; j++) begin
        check(scan_issue && int'(idx) == j && phase == (p ? PH_COLS : PH_ROWS), "scan issue");
        check((p == 0 && j == 0) ? (cap_const && !d_en) : (d_en && int'(d_idx) == (p*N + j - 1) % N), "data side");
        @(negedge clk);
      end
    check(!scan_issue && d_en && d_phase == PH_COLS && int'(d_idx) == N - 1, "drain");
    @(negedge clk);
    check(commit && done && !d_en, "commit");
    @(negedge clk);
    check(sample_ready && !commit, "idle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    init_sweep();
    one_sample(0);
    one_sample(1);
    one_sample(1);
    // restart in the middle of a scan
    sample_valid = 1; @(negedge clk); sample_valid = 0; in_valid = 1;
    repeat (3) @(negedge clk);
    restart = 1;
    #1 check(clr && !sample_ready, "restart clears");
    @(negedge clk);
    restart = 0;
    #1 check(!d_en, "no data after restart");
    init_sweep();
    one_sample(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
