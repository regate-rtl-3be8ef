// tb_sa_input_queue: self-checking test of three row queues chained as in
// the array. Checks FIFO order, the one-cycle wake-up before the first pop
// of row 0, the one-cycle skew between rows, the PE_on window (raised with
// data at the head, held one cycle past the last pop) and the full flag.
module tb_sa_input_queue;
  localparam int R = 3, D = 4;
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

  logic push;
  logic [15:0] pdata [R];
  logic [R-1:0] full, empty, pop, pe_on;
  logic [15:0] odata [R];
  for (genvar i = 0; i < R; i++) begin : g
    sa_input_queue #(.IN_W(16), .DEPTH(D)) q (
      .clk, .rst_n, .is_head(i == 0), .push, .push_data(pdata[i]),
      .full(full[i]), .empty(empty[i]),
      .release_in((i == 0) ? 1'b0 : pop[(i == 0) ? 0 : i - 1]),
      .pop(pop[i]), .out_data(odata[i]), .pe_on_out(pe_on[i]));
  end

  int first_pop [R];
  int last_pop [R];
  int got [R];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  // record pops and check data order: row i value k is 100*i + k
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < R; i++) if (pop[i]) begin
      chk(pe_on[i], $sformatf("row %0d PE_on high while it pops", i));
      chk(odata[i] == 16'(100 * i + got[i]), $sformatf("row %0d item %0d data", i, got[i]));
      if (got[i] == 0) first_pop[i] = cyc;
      last_pop[i] = cyc;
      got[i]++;
    end
  end

  initial begin
    push = 0;
    for (int i = 0; i < R; i++) begin pdata[i] = 0; got[i] = 0; end
    step(); rst_n = 1; step();
    chk(pe_on == '0, "idle: no PE_on");
    // write D vectors back to back
    for (int k = 0; k < D; k++) begin
      push = 1;
      for (int i = 0; i < R; i++) pdata[i] = 16'(100 * i + k);
      step();
      if (k == 0) chk(pe_on[0] && !pop[0], "row 0: PE_on with data at head, no pop yet");
    end
    push = 0;
    repeat (D + R + 4) step();
    for (int i = 0; i < R; i++) chk(got[i] == D, $sformatf("row %0d popped all", i));
    chk(first_pop[1] == first_pop[0] + 1, "row 1 one cycle after row 0");
    chk(first_pop[2] == first_pop[0] + 2, "row 2 two cycles after row 0");
    chk(last_pop[0] - first_pop[0] == D - 1, "row 0 pops back to back");
    chk(pe_on == '0 && empty == '1, "drained: PE_on low");
    // PE_on stays one cycle after the last pop
    push = 1; for (int i = 0; i < R; i++) pdata[i] = 16'(100 * i + D); step(); push = 0;
    while (!pop[0]) step();
    step();
    chk(pe_on[0], "row 0 PE_on held the cycle after its last pop");
    step();
    chk(!pe_on[0], "row 0 PE_on low two cycles after its last pop");
    repeat (4) step();
    // fill to full without draining: head pops, so fill faster than D
    push = 1; for (int i = 0; i < R; i++) pdata[i] = 16'(100 * i + D + 1);
    step();
    for (int i = 0; i < R; i++) got[i] = D + 1;
    push = 0;
    repeat (8) step();
    chk(full == '0, "never full in this pattern");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
