// tb_pg_unit_ctrl: self-checking test of the per-unit power controller.
// Part 1 replays the paper's software-managed VU example with a 2-cycle
// power-on/off delay: two 1-cycle operations, setpm off with the second,
// 2 cycles of power-off transition, 10 cycles off, setpm on, 2 cycles of
// power-on transition, next operation 16 cycles after the first.
// Part 2 checks auto mode: wake-up latency, the 8-cycle idle-detection
// threshold, and on / off overrides. Part 3 checks a 60-cycle unit (HBM/ICI).
module tb_pg_unit_ctrl;
  import regate_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic pm_set, active, busy, wake_req;
  pm_mode_e pm_mode, mode;
  unit_state_e state;
  logic ready, pwr_on, low_power, force_on, force_off;
  pg_unit_ctrl #(.WAKE_DELAY(2), .OFF_DELAY(2), .IDLE_THRESH(8), .IDLE_EN(1'b1), .RESET_ON(1'b1)) dut (.*);

  logic h_set, h_act, h_busy, h_wake, h_ready, h_pwr, h_lp, h_fon, h_foff;
  pm_mode_e h_mode;
  unit_state_e h_state;
  pg_unit_ctrl #(.WAKE_DELAY(60), .OFF_DELAY(60), .IDLE_THRESH(137), .IDLE_EN(1'b1), .RESET_ON(1'b0)) u_hbm (
    .clk, .rst_n, .pm_set(h_set), .pm_mode(PM_AUTO), .active(h_act), .busy(h_busy),
    .wake_req(h_wake), .state(h_state), .mode(h_mode), .ready(h_ready), .pwr_on(h_pwr),
    .low_power(h_lp), .force_on(h_fon), .force_off(h_foff));

  int t, n_off, n_trans;

  initial begin
    {pm_set, active, busy, wake_req} = '0; pm_mode = PM_AUTO;
    {h_set, h_act, h_busy, h_wake} = '0;
    step(); rst_n = 1; step();
    chk(ready && mode == PM_AUTO, "reset: on, auto");
    // ---- part 1: the paper's timeline ----
    active = 1; step();                              // cycle 0: I1
    pm_set = 1; pm_mode = PM_OFF; step();            // cycle 1: I2 + setpm off
    pm_set = 0; active = 0;
    n_trans = 0; n_off = 0;
    for (int c = 2; c < 14; c++) begin
      if (c < 4) begin chk(state == U_GATING, $sformatf("cycle %0d powering off", c)); n_trans++; end
      else begin chk(state == U_OFF && low_power, $sformatf("cycle %0d off", c)); n_off++; end
      if (c == 13) begin pm_set = 1; pm_mode = PM_ON; end   // cycle 14 setpm on
      step();
    end
    pm_set = 0;
    chk(n_off == 10, "10 cycles fully off");
    chk(!ready && state == U_WAKING, "cycle 15 waking");
    step();
    chk(ready && force_on, "cycle 16 ready for the next operation");
    // ---- part 2: auto mode ----
    pm_set = 1; pm_mode = PM_AUTO; step(); pm_set = 0;
    active = 1; step(); active = 0;
    t = 0;
    while (ready && t < 50) begin step(); t++; end
    chk(t == 8, $sformatf("auto: gated after %0d idle cycles (expect 8)", t));
    repeat (4) step();
    chk(low_power, "auto: off");
    wake_req = 1; step();
    chk(!ready, "wake: not ready after 1 cycle");
    step();
    chk(ready, "wake: ready after 2 cycles");
    active = 1; step(); active = 0; wake_req = 0;
    // busy blocks power-off
    busy = 1; repeat (20) step();
    chk(ready, "busy unit stays on");
    busy = 0;
    // mode on: never gates
    pm_set = 1; pm_mode = PM_ON; step(); pm_set = 0;
    repeat (30) step();
    chk(ready, "mode on: stays on");
    // mode off: gates, wakes for an operation, gates again
    pm_set = 1; pm_mode = PM_OFF; step(); pm_set = 0;
    repeat (3) step();
    chk(low_power, "mode off: off");
    wake_req = 1; step(); step();
    chk(ready, "mode off: operation wakes the unit");
    active = 1; step(); active = 0; wake_req = 0;
    chk(state == U_GATING, "mode off: gated right after the operation");
    // ---- part 3: 60-cycle unit ----
    h_wake = 1; t = 0;
    step(); t++;
    while (!h_ready && t < 200) begin step(); t++; end
    chk(t == 60, $sformatf("HBM wake-up %0d cycles (expect 60)", t));
    h_act = 1; step(); h_act = 0; h_wake = 0;
    t = 0;
    while (h_ready && t < 400) begin step(); t++; end
    chk(t == 137, $sformatf("HBM idle threshold %0d (expect 137)", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
