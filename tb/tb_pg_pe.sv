// tb_pg_pe: self-checking test of one power-gated processing element.
// Walks the PE through OFF -> W_on -> ON -> W_on -> OFF, checks the MAC
// result against hand-computed values, checks that the weight survives W_on
// but not OFF, that I and S are lost when the PE leaves ON, the one-cycle
// wake-up from a PE_on input, and the force_on override.
module tb_pg_pe;
  import regate_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic row_on, col_on, pe_on_left, pe_on_top, force_on, pe_on_out, w_we;
  pe_pwr_e pwr;
  logic signed [15:0] w_in, in_left, in_right;
  logic signed [31:0] psum_top, psum_bot;
  int checks = 0, failures = 0;

  pg_pe dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic step();
    @(posedge clk); #1;
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {row_on, col_on, pe_on_left, pe_on_top, force_on, w_we} = '0;
    w_in = 0; in_left = 0; psum_top = 0;
    step(); rst_n = 1'b1; step();
    chk(pwr == PE_OFF, "reset: OFF");
    row_on = 1; col_on = 0; #1;
    chk(pwr == PE_OFF, "row only: OFF");
    col_on = 1; #1;
    chk(pwr == PE_W_ON, "row&col: W_on");
    w_we = 1; w_in = -16'sd3; step(); w_we = 0;
    // PE_on from the left: ON one cycle later
    pe_on_left = 1; #1;
    chk(pwr == PE_W_ON && pe_on_out == 0, "PE_on not yet registered");
    step();
    chk(pwr == PE_ON && pe_on_out == 1, "ON after one cycle");
    in_left = 16'sd7; psum_top = 32'sd100; step();
    chk(in_right == 7, "I register captured input");
    psum_top = 32'sd50; step();
    chk(psum_bot == 50 + 7 * (-3), "MAC result 50 + 7*(-3)");
    // leave ON via the left input, keep ON via the top input
    pe_on_left = 0; pe_on_top = 1; in_left = 16'sd2; step();
    chk(pwr == PE_ON, "top PE_on keeps ON");
    pe_on_top = 0; psum_top = 0; step();
    // register is cleared one cycle after PE_on falls
    step();
    chk(pwr == PE_W_ON, "back to W_on");
    chk(in_right == 0 && psum_bot == 0, "I and S lost in W_on");
    // weight kept in W_on
    pe_on_top = 1; step();
    in_left = 16'sd4; psum_top = 32'sd1; step();
    psum_top = 32'sd1; step();
    chk(psum_bot == 1 + 4 * (-3), "weight retained through W_on");
    pe_on_top = 0; step(); step();
    // column off: weight lost
    col_on = 0; step();
    chk(pwr == PE_OFF, "column off: OFF");
    col_on = 1; pe_on_left = 1; step(); step();
    in_left = 16'sd9; psum_top = 32'sd5; step();
    psum_top = 32'sd5; step();
    chk(psum_bot == 5, "weight lost in OFF (reads zero)");
    pe_on_left = 0; step(); step();
    // PE_on cannot be set while the weight domain is off
    row_on = 0; pe_on_left = 1; step(); step();
    chk(pwr == PE_OFF && pe_on_out == 0, "disabled PE ignores PE_on");
    // force_on
    row_on = 1; pe_on_left = 0; force_on = 1; step(); step();
    chk(pwr == PE_ON && pe_on_out == 1, "force_on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
