// tb_sram_seg_pg_ctrl: self-checking test of the SRAM segment power states
// (8 segments, policy period 16). Checks the periodic sleep of unaccessed
// segments in auto mode, the 4-cycle wake from sleep and 10-cycle wake from
// off, setpm over a segment range (off, sleep, on), the data-loss pulse on
// entering off, and the state counters.
module tb_sram_seg_pg_ctrl;
  import regate_pkg::*;
  localparam int NS = 8;
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

  logic cmd_valid, acc_valid, acc_ready, tick;
  logic [2:0] cmd_seg_lo, cmd_seg_hi, acc_seg;
  pm_mode_e cmd_mode;
  seg_state_e seg_state [NS];
  logic [NS-1:0] seg_lost;
  logic [3:0] n_on, n_sleep, n_off;
  sram_seg_pg_ctrl #(.NSEG(NS), .SLEEP_DELAY(4), .OFF_DELAY(10), .SLEEP_PERIOD(16)) dut (.*);

  int t;
  int lost_cnt [NS];
  always @(negedge clk) for (int s = 0; s < NS; s++) if (seg_lost[s]) lost_cnt[s]++;

  task automatic access(input int s, output int lat);
    acc_valid = 1; acc_seg = 3'(s); lat = 0;
    #1;
    while (!acc_ready) begin step(); lat++; end
    step(); acc_valid = 0;
  endtask

  initial begin
    cmd_valid = 0; acc_valid = 0; cmd_seg_lo = 0; cmd_seg_hi = 0; acc_seg = 0; cmd_mode = PM_AUTO;
    for (int s = 0; s < NS; s++) lost_cnt[s] = 0;
    step(); rst_n = 1; step();
    chk(n_on == NS, "reset: all on");
    // keep segment 2 busy across two policy ticks, the rest go to sleep
    for (int c = 0; c < 40; c++) begin
      acc_valid = (c % 3 == 0); acc_seg = 3'd2; step();
    end
    acc_valid = 0;
    chk(seg_state[2] == S_ON, "accessed segment stays on");
    chk(seg_state[5] == S_SLEEP && n_sleep == NS - 1, "unaccessed segments sleep");
    access(5, t);
    chk(t == 4, $sformatf("wake from sleep %0d cycles (expect 4)", t));
    // setpm off on segments 4..6
    cmd_valid = 1; cmd_seg_lo = 3'd4; cmd_seg_hi = 3'd6; cmd_mode = PM_OFF; step(); cmd_valid = 0;
    t = 1;
    while (seg_state[4] != S_OFF && t < 40) begin step(); t++; end
    // t - 1 edges after the command: one to latch the mode, then the 10-cycle power-off transition
    chk(t - 1 == 1 + 10, $sformatf("power-off transition %0d cycles (expect 1 + 10)", t - 1));
    repeat (2) step();
    chk(seg_state[4] == S_OFF && seg_state[5] == S_OFF && seg_state[6] == S_OFF, "range off");
    chk(seg_state[3] != S_OFF && seg_state[7] != S_OFF, "outside range untouched");
    chk(lost_cnt[4] == 1 && lost_cnt[5] == 1 && lost_cnt[3] == 0, "data-loss pulse once per segment");
    chk(n_off == 3, "off counter");
    access(6, t);
    chk(t == 10, $sformatf("wake from off %0d cycles (expect 10)", t));
    // after a quiet period it returns to off
    repeat (40) step();
    chk(seg_state[6] == S_OFF, "off-mode segment returns to off");
    // setpm on over everything
    cmd_valid = 1; cmd_seg_lo = 3'd0; cmd_seg_hi = 3'd7; cmd_mode = PM_ON; step(); cmd_valid = 0;
    repeat (15) step();
    chk(n_on == NS, "mode on: all segments woken");
    repeat (50) step();
    chk(n_on == NS, "mode on: nothing sleeps");
    // setpm sleep on segment 1
    cmd_valid = 1; cmd_seg_lo = 3'd1; cmd_seg_hi = 3'd1; cmd_mode = PM_SLEEP; step(); cmd_valid = 0;
    repeat (6) step();
    chk(seg_state[1] == S_SLEEP && lost_cnt[1] == 0, "mode sleep: asleep, data kept");
    access(1, t);
    chk(t == 4, "sleep-mode segment wakes in 4 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
