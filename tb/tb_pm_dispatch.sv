// tb_pm_dispatch: self-checking test of the power-aware dispatch hold.
// Random bundles and ready bits: a bundle issues exactly when every unit it
// needs is ready, wake-up requests go to exactly the needed units, and the
// stall and issue counters match a count kept here.
module tb_pm_dispatch;
  localparam int NU = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic bundle_valid, dispatch;
  logic [NU-1:0] need, unit_ready, wake, hold_by;
  logic [31:0] stall_cycles, dispatched;
  pm_dispatch #(.NUNITS(NU)) dut (.*);

  int n_stall = 0, n_issue = 0;
  initial begin
    bundle_valid = 0; need = '0; unit_ready = '0;
    @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      bit exp;
      bundle_valid = ($urandom_range(0, 3) != 0);
      need = NU'($urandom) & NU'($urandom);
      unit_ready = ~(NU'($urandom) & NU'($urandom) & NU'($urandom));
      #1;
      exp = bundle_valid;
      for (int u = 0; u < NU; u++) if (need[u] && !unit_ready[u]) exp = 0;
      chk(dispatch == exp, "dispatch iff all needed units ready");
      chk(wake == (bundle_valid ? need : '0), "wake the needed units");
      if (bundle_valid && !exp) n_stall++;
      if (exp) n_issue++;
      @(posedge clk); #1;
    end
    chk(stall_cycles == 32'(n_stall), "stall counter");
    chk(dispatched == 32'(n_issue), "issue counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
