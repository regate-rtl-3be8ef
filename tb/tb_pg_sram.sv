// tb_pg_sram: self-checking test of the segment-gated scratchpad (64 KB,
// 16 segments of 8 rows, policy period 32). Checks write / read round trips,
// the one-cycle read latency, data kept across sleep and lost across off
// (rows read as zero until rewritten), the wake-up stalls (4 and 10
// cycles), that en = 0 holds an access, and setpm byte ranges rounded to
// segments.
module tb_pg_sram;
  import regate_pkg::*;
  localparam int RB = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask
  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic cmd_valid, req, en, we, ready, rvalid, policy_tick;
  logic [31:0] cmd_start, cmd_end;
  pm_mode_e cmd_mode;
  logic [6:0] addr;
  logic [RB-1:0] wdata, rdata;
  logic [4:0] n_on, n_sleep, n_off;
  pg_sram #(.SRAM_BYTES(64'd65536), .SLEEP_PERIOD(32)) dut (.*);

  function automatic logic [RB-1:0] pat(input int a, input int salt);
    logic [RB-1:0] v;
    for (int w = 0; w < RB / 32; w++) v[w*32 +: 32] = 32'(a * 7919 + w * 31 + salt);
    return v;
  endfunction

  task automatic wr(input int a, input logic [RB-1:0] d, output int lat);
    req = 1; we = 1; addr = 7'(a); wdata = d; lat = 0; #1;
    while (!ready) begin step(); lat++; end
    step(); req = 0; we = 0;
  endtask
  task automatic rd(input int a, output logic [RB-1:0] d, output int lat);
    req = 1; we = 0; addr = 7'(a); lat = 0; #1;
    while (!ready) begin step(); lat++; end
    step(); req = 0;
    chk(rvalid, "rvalid one cycle after the read");
    d = rdata;
  endtask

  logic [RB-1:0] d;
  int lat;
  initial begin
    cmd_valid = 0; req = 0; en = 1; we = 0; addr = 0; wdata = '0;
    cmd_start = 0; cmd_end = 0; cmd_mode = PM_AUTO;
    step(); rst_n = 1; step();
    for (int a = 0; a < 128; a += 3) wr(a, pat(a, 1), lat);
    for (int a = 0; a < 128; a += 3) begin
      rd(a, d, lat);
      chk(d == pat(a, 1), $sformatf("row %0d read back", a));
    end
    // let every segment fall asleep
    repeat (80) step();
    chk(n_sleep == 16, "auto: all segments asleep");
    rd(9, d, lat);
    chk(lat == 4, $sformatf("sleep wake stall %0d (expect 4)", lat));
    chk(d == pat(9, 1), "data kept through sleep");
    // setpm off over bytes 0x1000..0x2fff = segments 1 and 2 (rows 8..23)
    cmd_valid = 1; cmd_start = 32'h1000; cmd_end = 32'h2fff; cmd_mode = PM_OFF; step(); cmd_valid = 0;
    repeat (20) step();
    chk(n_off == 2, "setpm off: two segments off");
    rd(12, d, lat);
    chk(lat == 10, $sformatf("off wake stall %0d (expect 10)", lat));
    chk(d == '0, "data lost through off");
    rd(3, d, lat);
    chk(d == pat(3, 1), "segment 0 untouched");
    wr(15, pat(15, 2), lat);
    rd(15, d, lat);
    chk(d == pat(15, 2), "rewritten row readable");
    // en = 0 holds the access
    req = 1; we = 1; en = 0; addr = 7'd30; wdata = pat(30, 9);
    repeat (12) step();
    req = 0; we = 0; en = 1;
    rd(30, d, lat);
    chk(d == pat(30, 1), "en low: no write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
