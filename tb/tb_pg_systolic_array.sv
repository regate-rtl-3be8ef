// tb_pg_systolic_array: self-checking test of the spatially power-gated
// systolic array (8x8 here). Each test loads a weight tile whose top rows and
// right columns may be all zero, streams M input vectors, and checks
//   * every output partial sum against a matrix product computed here,
//   * the latency: a vector pushed in cycle p leaves column j at p + N + 3 + j,
//   * W_on PEs = (rows on) x (columns on) from the prefix-OR rule,
//   * that fewer than all PEs are ever ON when M < N (diagonal gating) and
//     none are ON once the array has drained,
//   * force_off (weights lost) and force_on (all PEs on).
module tb_pg_systolic_array;
  localparam int N = 8;
  localparam int CW = $clog2(N * N + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask
  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic force_on, force_off, w_valid, w_first, in_valid, in_ready, busy;
  logic [$clog2(N)-1:0] w_row;
  logic [N-1:0][15:0] w_vec, in_vec;
  logic [N-1:0] out_valid, row_nz, col_nz, row_on, col_on;
  logic [N-1:0][31:0] out_psum;
  logic [CW-1:0] pe_on_cnt, pe_w_cnt;

  pg_systolic_array #(.N(N), .QDEPTH(8)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic signed [15:0] W [N][N];
  logic signed [15:0] X [N][N];
  int ncol [N];
  logic signed [31:0] got [N][N];
  int out_cyc [N];
  int peak_on;
  int push_cyc;

  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < N; j++) if (out_valid[j]) begin
      if (ncol[j] < N) got[ncol[j]][j] = out_psum[j];
      if (ncol[j] == 0) out_cyc[j] = cyc;
      ncol[j]++;
    end
    if (int'(pe_on_cnt) > peak_on) peak_on = int'(pe_on_cnt);
  end

  task automatic run_tile(input int zr, input int zc, input int m);
    int ron, con;
    logic signed [31:0] e;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        W[i][j] = (i < zr || j >= zc) ? 16'sd0 : 16'($urandom_range(0, 15) - 7);
    for (int k = 0; k < m; k++)
      for (int i = 0; i < N; i++) X[k][i] = 16'($urandom_range(0, 255) - 128);
    // load weights, bottom row first
    for (int k = 0; k < N; k++) begin
      w_valid = 1; w_first = (k == 0); w_row = $clog2(N)'(N - 1 - k);
      for (int j = 0; j < N; j++) w_vec[j] = W[N - 1 - k][j];
      step();
    end
    w_valid = 0; w_first = 0;
    step(); step(); step();
    ron = 0; con = 0;
    for (int i = 0; i < N; i++) begin
      bit any = 0;
      for (int r = 0; r <= i; r++) for (int j = 0; j < N; j++) if (W[r][j] != 0) any = 1;
      ron += int'(any);
    end
    for (int j = 0; j < N; j++) begin
      bit any = 0;
      for (int c = j; c < N; c++) for (int i = 0; i < N; i++) if (W[i][c] != 0) any = 1;
      con += int'(any);
    end
    chk(int'(pe_w_cnt) == ron * con, $sformatf("W_on PEs %0d = %0d x %0d", pe_w_cnt, ron, con));
    chk(pe_on_cnt == 0, "no PE ON before inputs");
    for (int j = 0; j < N; j++) ncol[j] = 0;
    peak_on = 0;
    for (int k = 0; k < m; k++) begin
      in_valid = 1;
      for (int i = 0; i < N; i++) in_vec[i] = X[k][i];
      if (k == 0) push_cyc = cyc;
      step();
    end
    in_valid = 0;
    repeat (3 * N + 8) step();
    for (int j = 0; j < N; j++) begin
      chk(ncol[j] == m, $sformatf("column %0d produced %0d of %0d", j, ncol[j], m));
      chk(out_cyc[j] == push_cyc + N + 3 + j, $sformatf("column %0d latency %0d", j, out_cyc[j] - push_cyc));
      for (int k = 0; k < m; k++) begin
        e = 0;
        for (int i = 0; i < N; i++) e += 32'(X[k][i]) * 32'(W[i][j]);
        chk(got[k][j] == e, $sformatf("zr=%0d zc=%0d m=%0d out[%0d][%0d] %0d exp %0d", zr, zc, m, k, j, got[k][j], e));
      end
    end
    if (m < N / 2 && ron >= 4 && con >= 4) chk(peak_on < ron * con, $sformatf("diagonal gating: peak ON %0d < %0d", peak_on, ron * con));
    chk(pe_on_cnt == 0 && !busy, "drained: no PE ON");
  endtask

  initial begin
    {force_on, force_off, w_valid, w_first, in_valid} = '0;
    w_row = 0; w_vec = '0; in_vec = '0;
    step(); rst_n = 1; step();
    run_tile(0, N, N);       // full tile
    run_tile(2, 5, 3);       // zero top rows, zero right columns, small M
    run_tile(0, 3, 1);
    run_tile(5, N, 2);
    for (int t = 0; t < 6; t++) run_tile($urandom_range(0, N - 1), $urandom_range(1, N), $urandom_range(1, N));
    // whole-array off: weights lost
    force_off = 1; step(); step();
    chk(pe_w_cnt == 0, "force_off: everything off");
    force_off = 0;
    force_on = 1; step(); step(); step();
    chk(int'(pe_on_cnt) == N * N, "force_on: all PEs ON");
    force_on = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
