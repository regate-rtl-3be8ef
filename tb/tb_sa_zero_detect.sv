// tb_sa_zero_detect: self-checking test of the row/column zero-weight
// power-gating control. A 4x4 instance replays the paper's example
// (weight row 0,4,0,0 -> col_nz 0,1,0,0 -> col_on 1,1,0,0). An 8x8 instance
// loads random tiles with random all-zero rows and columns and compares the
// bitmaps and the prefix-OR registers with a reference computed here, and
// checks the one-cycle register latency and the force_on / force_off
// overrides.
module tb_sa_zero_detect;
  localparam int N = 8;
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

  // 4x4: the paper's example
  logic a_v, a_first, a_fon, a_foff;
  logic [1:0] a_row;
  logic [3:0][15:0] a_vec;
  logic [3:0] a_cnz, a_rnz, a_con, a_ron;
  sa_zero_detect #(.N(4), .IN_W(16)) u4 (
    .clk, .rst_n, .w_valid(a_v), .w_first(a_first), .w_row(a_row), .w_vec(a_vec),
    .force_on(a_fon), .force_off(a_foff),
    .col_nz(a_cnz), .row_nz(a_rnz), .col_on(a_con), .row_on(a_ron));

  // 8x8: random tiles
  logic b_v, b_first, b_fon, b_foff;
  logic [2:0] b_row;
  logic [N-1:0][15:0] b_vec;
  logic [N-1:0] b_cnz, b_rnz, b_con, b_ron;
  sa_zero_detect #(.N(N), .IN_W(16)) u8 (
    .clk, .rst_n, .w_valid(b_v), .w_first(b_first), .w_row(b_row), .w_vec(b_vec),
    .force_on(b_fon), .force_off(b_foff),
    .col_nz(b_cnz), .row_nz(b_rnz), .col_on(b_con), .row_on(b_ron));

  logic [15:0] tile [N][N];
  logic [N-1:0] ecnz, ernz, econ, eron;

  initial begin
    {a_v, a_first, a_fon, a_foff, b_v, b_first, b_fon, b_foff} = '0;
    a_row = 0; a_vec = '0; b_row = 0; b_vec = '0;
    step(); rst_n = 1; step();
    // paper example: column 0 is written first (index 0)
    a_v = 1; a_first = 1; a_row = 0;
    a_vec[0] = 0; a_vec[1] = 4; a_vec[2] = 0; a_vec[3] = 0;
    step(); a_v = 0; a_first = 0;
    chk(a_cnz == 4'b0010, "example col_nz = 0,1,0,0");
    chk(a_con == 4'b0000, "row_on/col_on one cycle behind the bitmaps");
    step();
    chk(a_con == 4'b0011, "example col_on = 1,1,0,0");
    chk(a_ron == 4'b1111, "row 0 non-zero: all rows on");

    for (int t = 0; t < 40; t++) begin
      int zr, zc;
      zr = $urandom_range(0, N - 1);
      zc = $urandom_range(0, N - 1);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          if ((t % 4 != 0) && (i < zr || j >= zc)) tile[i][j] = 16'h0;
          else if ($urandom_range(0, 3) == 0)       tile[i][j] = 16'h0;
          else                                       tile[i][j] = 16'($urandom_range(1, 65535));
        end
      // load rows in a random order
      for (int k = 0; k < N; k++) begin
        b_v = 1; b_first = (k == 0); b_row = 3'((k * 5 + t) % N);
        for (int j = 0; j < N; j++) b_vec[j] = tile[(k * 5 + t) % N][j];
        step();
      end
      b_v = 0; b_first = 0;
      // reference
      ecnz = '0; ernz = '0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (tile[i][j] != 0) begin ecnz[j] = 1; ernz[i] = 1; end
      for (int j = 0; j < N; j++) begin
        econ[j] = 0;
        for (int k = j; k < N; k++) econ[j] |= ecnz[k];
      end
      for (int i = 0; i < N; i++) begin
        eron[i] = 0;
        for (int k = 0; k <= i; k++) eron[i] |= ernz[k];
      end
      step();
      chk(b_cnz == ecnz, $sformatf("tile %0d col_nz", t));
      chk(b_rnz == ernz, $sformatf("tile %0d row_nz", t));
      chk(b_con == econ, $sformatf("tile %0d col_on %b vs %b", t, b_con, econ));
      chk(b_ron == eron, $sformatf("tile %0d row_on %b vs %b", t, b_ron, eron));
    end
    b_fon = 1; step(); step();
    chk(b_con == '1 && b_ron == '1, "force_on");
    b_foff = 1; step();
    chk(b_con == '0 && b_ron == '0, "force_off wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
