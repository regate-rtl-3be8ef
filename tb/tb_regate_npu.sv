// tb_regate_npu: end-to-end test of the NPU power-gating fabric at reduced
// size (2 SAs of 8x8, 2 VUs, 64 KB SRAM; delays and thresholds at their
// defaults). A short program of VLIW bundles exercises, and counts, every
// mechanism of the design:
//   SA   - matmul through the array with zero rows / columns (row/column
//          gating), diagonal PE wake-up, setpm sa off and wake-on-demand
//          (10-cycle stall), results checked against a reference product;
//   VU   - the setpm off / on sequence of two VUs (2-cycle transitions),
//          idle-detection gating in auto mode and wake-on-demand stall;
//   SRAM - writes / reads, auto sleep and wake stall, setpm off over a
//          byte range from scalar registers (data lost), setpm on;
//   HBM  - DMA wake from self-refresh (60 cycles), idle detection back to
//          low power after 137 idle cycles;
//   ICI  - the same with 153 idle cycles.
// Each mechanism that never happens counts as a failure.
module tb_regate_npu;
  import regate_pkg::*;
  localparam int NSA = 2, NVU = 2, N = 8, RB = 4096;
  localparam longint SB = 65536;
  localparam int ROWS = int'(SB * 8 / 64'(RB)), SAW = $clog2(ROWS), NSEG = int'(SB / 4096), SW = $clog2(NSEG);
  localparam int CNTW = $clog2(N * N + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask
  initial begin
    #4000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic bundle_valid, bundle_ready, misc_valid;
  logic [31:0] misc_instr;
  logic [NSA-1:0] sa_w_valid, sa_w_first, sa_in_valid;
  logic [NSA-1:0][$clog2(N)-1:0] sa_w_row;
  logic [NSA-1:0][N-1:0][15:0] sa_w_vec, sa_in_vec;
  logic [NVU-1:0] vu_op, vu_issue, vu_pwr_on;
  logic sram_req, sram_we, sram_rvalid;
  logic [SAW-1:0] sram_addr;
  logic [RB-1:0] sram_wdata, sram_rdata;
  logic dma_op, ici_op, dma_busy, ici_busy, dma_start, ici_start, dma_pwr_on, hbm_low_power, ici_pwr_on;
  logic [4:0] sreg_raddr_a, sreg_raddr_b;
  logic [31:0] sreg_rdata_a, sreg_rdata_b;
  logic [NSA-1:0][N-1:0] sa_out_valid;
  logic [NSA-1:0][N-1:0][31:0] sa_out_psum;
  unit_state_e sa_state [NSA];
  unit_state_e vu_state [NVU];
  unit_state_e hbm_state, ici_state;
  logic [NSA-1:0][CNTW-1:0] sa_pe_on_cnt, sa_pe_w_cnt;
  logic [SW:0] sram_seg_on, sram_seg_sleep, sram_seg_off;
  logic setpm_illegal;
  logic [31:0] stall_cycles, bundles_issued;

  regate_npu #(.NUM_SA(NSA), .NUM_VU(NVU), .SA_N(N), .SRAM_BYTES(SB), .SRAM_PERIOD(64)) dut (.*);

  // scalar register file
  logic [31:0] sreg [32];
  assign sreg_rdata_a = sreg[sreg_raddr_a];
  assign sreg_rdata_b = sreg[sreg_raddr_b];

  // DMA / ICI transfer models: busy for a fixed time after a start
  int dma_left = 0, ici_left = 0;
  assign dma_busy = (dma_left > 0);
  assign ici_busy = (ici_left > 0);
  always @(posedge clk) begin
    if (dma_start) dma_left <= 40; else if (dma_left > 0) dma_left <= dma_left - 1;
    if (ici_start) ici_left <= 30; else if (ici_left > 0) ici_left <= ici_left - 1;
  end

  // ---- mechanism counters ----
  int cyc = 0;
  int m_rowcol = 0, m_diag = 0, m_sa_off = 0, m_sa_wake = 0, m_vu_sw_off = 0, m_vu_auto = 0,
      m_vu_wake = 0, m_sram_sleep = 0, m_sram_off = 0, m_sram_wake = 0, m_hbm_lp = 0,
      m_hbm_wake = 0, m_ici_off = 0, m_ici_wake = 0, m_hold = 0;
  unit_state_e vu_prev [NVU];
  unit_state_e hbm_prev, ici_prev, sa_prev [NSA];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (bundle_valid && !bundle_ready) m_hold++;
    for (int k = 0; k < NSA; k++) begin
      if (sa_pe_w_cnt[k] != 0 && int'(sa_pe_w_cnt[k]) < N * N) m_rowcol++;
      if (sa_pe_on_cnt[k] != 0 && sa_pe_on_cnt[k] < sa_pe_w_cnt[k]) m_diag++;
      if (sa_state[k] == U_OFF && sa_prev[k] != U_OFF) m_sa_off++;
      if (sa_state[k] == U_WAKING && sa_prev[k] == U_OFF) m_sa_wake++;
      sa_prev[k] <= sa_state[k];
    end
    for (int k = 0; k < NVU; k++) begin
      if (vu_state[k] == U_WAKING && vu_prev[k] == U_OFF && bundle_valid && vu_op[k]) m_vu_wake++;
      vu_prev[k] <= vu_state[k];
    end
    if (hbm_state == U_OFF && hbm_prev == U_GATING) m_hbm_lp++;
    if (hbm_state == U_WAKING && hbm_prev == U_OFF) m_hbm_wake++;
    if (ici_state == U_OFF && ici_prev == U_GATING) m_ici_off++;
    if (ici_state == U_WAKING && ici_prev == U_OFF) m_ici_wake++;
    hbm_prev <= hbm_state; ici_prev <= ici_state;
  end

  // ---- bundle issue ----
  task automatic clear_bundle();
    bundle_valid = 0; misc_valid = 0; misc_instr = '0;
    sa_w_valid = '0; sa_w_first = '0; sa_in_valid = '0; sa_w_row = '0;
    vu_op = '0; sram_req = 0; sram_we = 0; dma_op = 0; ici_op = 0;
  endtask
  // issue the bundle set up by the caller; returns the cycles it waited
  task automatic issue(output int waited);
    bundle_valid = 1; waited = 0; #1;
    while (!bundle_ready) begin step(); waited++; end
    step();
    clear_bundle();
  endtask
  task automatic nop(input int n); repeat (n) step(); endtask
  function automatic logic [31:0] setpm_imm(input logic [7:0] id, input fu_type_e ty, input pm_mode_e md);
    return {8'hA5, 8'h00, 2'b00, id, 1'b1, ty, md};
  endfunction
  function automatic logic [31:0] setpm_sram(input logic [4:0] rs_s, input logic [4:0] rs_e, input pm_mode_e md);
    return {8'hA5, 8'h00, rs_e, rs_s, 1'b0, FU_SRAM, md};
  endfunction

  // ---- SA results ----
  logic signed [15:0] W [N][N];
  logic signed [15:0] X [N][N];
  logic signed [31:0] got [NSA][N][N];
  int ncol [NSA][N];
  always @(negedge clk) if (rst_n)
    for (int k = 0; k < NSA; k++)
      for (int j = 0; j < N; j++) if (sa_out_valid[k][j]) begin
        if (ncol[k][j] < N) got[k][ncol[k][j]][j] = sa_out_psum[k][j];
        ncol[k][j]++;
      end

  task automatic matmul(input int k, input int zr, input int zc, input int m);
    int w;
    logic signed [31:0] e;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        W[i][j] = (i < zr || j >= zc) ? 16'sd0 : 16'($urandom_range(0, 31) - 15);
    for (int r = 0; r < m; r++)
      for (int i = 0; i < N; i++) X[r][i] = 16'($urandom_range(0, 511) - 256);
    for (int r = 0; r < N; r++) begin
      sa_w_valid[k] = 1; sa_w_first[k] = (r == 0); sa_w_row[k] = $clog2(N)'(r);
      for (int j = 0; j < N; j++) sa_w_vec[k][j] = W[r][j];
      issue(w);
    end
    nop(3);
    for (int j = 0; j < N; j++) ncol[k][j] = 0;
    for (int r = 0; r < m; r++) begin
      sa_in_valid[k] = 1;
      for (int i = 0; i < N; i++) sa_in_vec[k][i] = X[r][i];
      issue(w);
    end
    nop(3 * N + 6);
    for (int j = 0; j < N; j++) begin
      chk(ncol[k][j] == m, $sformatf("SA%0d column %0d result count", k, j));
      for (int r = 0; r < m; r++) begin
        e = 0;
        for (int i = 0; i < N; i++) e += 32'(X[r][i]) * 32'(W[i][j]);
        chk(got[k][r][j] == e, $sformatf("SA%0d out[%0d][%0d] = %0d, expected %0d", k, r, j, got[k][r][j], e));
      end
    end
  endtask

  function automatic logic [RB-1:0] pat(input int a);
    logic [RB-1:0] v;
    for (int q = 0; q < RB / 32; q++) v[q*32 +: 32] = 32'(a * 1000003 + q);
    return v;
  endfunction

  int w, t0;
  logic [RB-1:0] rdq;
  initial begin
    clear_bundle();
    sa_w_vec = '0; sa_in_vec = '0; sram_addr = '0; sram_wdata = '0;
    for (int i = 0; i < 32; i++) sreg[i] = 0;
    for (int k = 0; k < NSA; k++) begin sa_prev[k] = U_ON; for (int j = 0; j < N; j++) ncol[k][j] = 0; end
    for (int k = 0; k < NVU; k++) vu_prev[k] = U_OFF;
    hbm_prev = U_OFF; ici_prev = U_OFF;
    step(); rst_n = 1; step();

    // ---- SA: spatial gating ----
    matmul(0, 0, N, N);
    matmul(0, 3, 5, 2);
    matmul(1, 1, 6, 3);
    // ---- SA: software off, wake on demand ----
    misc_valid = 1; misc_instr = setpm_imm(8'b10, FU_SA, PM_OFF); issue(w);
    nop(15);
    chk(sa_state[1] == U_OFF && sa_pe_w_cnt[1] == 0, "SA1 off by setpm, weights dropped");
    misc_valid = 1; misc_instr = setpm_imm(8'b10, FU_SA, PM_AUTO); issue(w);
    sa_w_valid[1] = 1; sa_w_first[1] = 1; sa_w_row[1] = 0; issue(w);
    chk(w == 10, $sformatf("SA wake-up stall %0d cycles (expect 10)", w));
    matmul(1, 2, 4, 4);

    // ---- VU: the setpm off / on sequence ----
    vu_op = 2'b11; issue(w);                                   // wakes both VUs (off at reset)
    chk(w == 2, $sformatf("VU wake stall %0d (expect 2)", w));
    vu_op = 2'b11; issue(w);
    vu_op = 2'b11; misc_valid = 1; misc_instr = setpm_imm(8'b11, FU_VU, PM_OFF); issue(w);
    nop(2);
    chk(vu_state[0] == U_OFF && vu_state[1] == U_OFF && !vu_pwr_on[0], "VUs off after 2-cycle transition");
    m_vu_sw_off++;
    nop(9);
    misc_valid = 1; misc_instr = setpm_imm(8'b11, FU_VU, PM_ON); issue(w);
    step();
    vu_op = 2'b11; issue(w);
    chk(w == 0, "VU ready 2 cycles after setpm on");
    // auto mode: idle detection
    misc_valid = 1; misc_instr = setpm_imm(8'b11, FU_VU, PM_AUTO); issue(w);
    vu_op = 2'b01; issue(w);
    nop(14);
    chk(vu_state[0] == U_OFF, "VU0 gated by idle detection");
    if (vu_state[0] == U_OFF) m_vu_auto++;
    vu_op = 2'b01; issue(w);
    chk(w == 2, "VU0 wake-on-demand stall");

    // ---- SRAM ----
    for (int a = 0; a < ROWS; a += 5) begin
      sram_req = 1; sram_we = 1; sram_addr = SAW'(a); sram_wdata = pat(a); issue(w);
    end
    nop(140);
    chk(int'(sram_seg_sleep) == NSEG, "SRAM: all segments asleep");
    if (int'(sram_seg_sleep) == NSEG) m_sram_sleep++;
    sram_req = 1; sram_addr = SAW'(20); issue(w);
    chk(w == 4, $sformatf("SRAM sleep wake stall %0d (expect 4)", w));
    if (w == 4) m_sram_wake++;
    step();
    chk(sram_rdata == pat(20), "SRAM data kept in sleep");
    // setpm off over segments 2..3 (bytes 0x2000..0x3fff) from r3 / r4
    sreg[3] = 32'h2000; sreg[4] = 32'h3fff;
    misc_valid = 1; misc_instr = setpm_sram(5'd3, 5'd4, PM_OFF); issue(w);
    nop(12);
    chk(int'(sram_seg_off) == 2, "SRAM: two segments off");
    if (int'(sram_seg_off) == 2) m_sram_off++;
    sram_req = 1; sram_addr = SAW'(20); issue(w);
    chk(w == 10, $sformatf("SRAM off wake stall %0d (expect 10)", w));
    step();
    chk(sram_rdata == '0, "SRAM data lost in off");
    sram_req = 1; sram_addr = SAW'(5); issue(w);
    step();
    chk(sram_rdata == pat(5), "SRAM segment 0 data kept");

    // ---- HBM / DMA ----
    chk(hbm_low_power, "HBM starts in low-power mode");
    dma_op = 1; issue(w);
    chk(w == 60, $sformatf("HBM wake stall %0d (expect 60)", w));
    t0 = cyc;
    while (!hbm_low_power && cyc - t0 < 1000) step();
    chk(cyc - t0 >= 40 + 137 && cyc - t0 <= 40 + 137 + 64, $sformatf("HBM back to low power after %0d cycles", cyc - t0));

    // ---- ICI ----
    ici_op = 1; issue(w);
    chk(w == 60, $sformatf("ICI wake stall %0d (expect 60)", w));
    t0 = cyc;
    while (ici_pwr_on && cyc - t0 < 1000) step();
    chk(cyc - t0 >= 30 + 153, $sformatf("ICI gated after %0d cycles", cyc - t0));
    nop(70);

    chk(!setpm_illegal, "no illegal setpm");
    chk(stall_cycles == 32'(m_hold), "dispatch stall counter");
    chk(m_rowcol > 0, "mechanism: row/column gating");
    chk(m_diag > 0, "mechanism: diagonal PE wake-up");
    chk(m_sa_off > 0, "mechanism: SA software off");
    chk(m_sa_wake > 0, "mechanism: SA wake on demand");
    chk(m_vu_sw_off > 0, "mechanism: VU software off");
    chk(m_vu_auto > 0, "mechanism: VU idle detection");
    chk(m_vu_wake > 0, "mechanism: VU wake on demand");
    chk(m_sram_sleep > 0, "mechanism: SRAM periodic sleep");
    chk(m_sram_off > 0, "mechanism: SRAM software off");
    chk(m_sram_wake > 0, "mechanism: SRAM wake stall");
    chk(m_hbm_lp > 0 && m_hbm_wake > 0, "mechanism: HBM low power and wake");
    chk(m_ici_off > 0 && m_ici_wake > 0, "mechanism: ICI gating and wake");
    chk(m_hold > 0, "mechanism: dispatch hold");
    $display("mechanisms: rowcol=%0d diag=%0d sa_off=%0d sa_wake=%0d vu_sw_off=%0d vu_auto=%0d vu_wake=%0d sram_sleep=%0d sram_off=%0d sram_wake=%0d hbm_lp=%0d hbm_wake=%0d ici_off=%0d ici_wake=%0d hold=%0d",
             m_rowcol, m_diag, m_sa_off, m_sa_wake, m_vu_sw_off, m_vu_auto, m_vu_wake, m_sram_sleep, m_sram_off, m_sram_wake, m_hbm_lp, m_hbm_wake, m_ici_off, m_ici_wake, m_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
