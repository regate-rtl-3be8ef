// regate_npu: the power-gating fabric of one NPU core, with its systolic
// arrays and scratchpad SRAM.
//
// The NPU has NUM_SA weight-stationary systolic arrays (SAs), NUM_VU SIMD
// vector units (VUs), an on-chip scratchpad SRAM, a DMA engine with the HBM
// controller & PHY, and the inter-chip interconnect (ICI) controller & PHY.
// Every one of them can be power-gated:
//   SA   - PE-level spatial gating inside pg_systolic_array (auto mode);
//          whole-array on / off by setpm through a pg_unit_ctrl (10 cycles).
//   VU   - idle detection (8 idle cycles) or software on / off, 2-cycle
//          wake-up. The VU datapath is outside this module: vu_issue tells
//          it an operation was issued, vu_pwr_on drives its power switch.
//   SRAM - per-4 KB-segment on / sleep / off (pg_sram).
//   HBM  - idle detection puts the HBM controller in its low-power
//          self-refresh mode and gates the DMA engine (60-cycle wake-up).
//   ICI  - idle detection gates the ICI controller & PHY (60 cycles).
// setpm in the misc slot (setpm_decoder) selects auto / on / off (/ sleep)
// per unit or SRAM range. pm_dispatch holds a bundle until all the units it
// uses are awake and sends them wake-up requests.
//
// Bundle interface (one VLIW bundle per cycle, held until bundle_ready):
//   misc_valid / misc_instr        - misc slot (setpm)
//   sa_w_valid[k], sa_w_first[k], sa_w_row[k], sa_w_vec[k]
//                                  - push one weight row into SA k
//   sa_in_valid[k], sa_in_vec[k]   - push one input vector into SA k
//   vu_op[k]                       - an operation for VU k
//   sram_req / sram_we / sram_addr / sram_wdata - one SRAM row access
//   dma_op / ici_op                - start a DMA (HBM) / ICI transfer
// The external DMA engine and ICI report dma_busy / ici_busy while their
// transfers run. SA results leave on sa_out_valid / sa_out_psum.
// Timing: a bundle is dispatched in the cycle bundle_ready is high; setpm
// takes effect from the next cycle; wake-up delays are those of the paper.
// Unit thresholds: VU idle threshold 8 cycles (paper: "at least 8 cycles");
// HBM and ICI thresholds one third of their break-even times (137 and 153
// cycles, the paper's idle-detection window for its baseline; the paper
// gives no separate value for this design).
module regate_npu
  import regate_pkg::*;
#(
  parameter int unsigned     NUM_SA       = 8,
  parameter int unsigned     NUM_VU       = 6,
  parameter int unsigned     SA_N         = 128,
  parameter int unsigned     IN_W         = 16,
  parameter int unsigned     PSUM_W       = 32,
  parameter int unsigned     QDEPTH       = 8,
  parameter longint unsigned SRAM_BYTES   = 64'd134217728,
  parameter int unsigned     ROW_BITS     = 4096,
  parameter int unsigned     SA_DELAY     = 10,
  parameter int unsigned     VU_DELAY     = 2,
  parameter int unsigned     VU_IDLE      = 8,
  parameter int unsigned     HBM_DELAY    = 60,
  parameter int unsigned     HBM_IDLE     = 137,
  parameter int unsigned     ICI_DELAY    = 60,
  parameter int unsigned     ICI_IDLE     = 153,
  parameter int unsigned     SRAM_SLEEP_DELAY = 4,
  parameter int unsigned     SRAM_OFF_DELAY   = 10,
  parameter int unsigned     SRAM_PERIOD      = 1024,
  localparam int unsigned    RW    = $clog2(SA_N),
  localparam int unsigned    ROWS  = int'(SRAM_BYTES * 8 / 64'(ROW_BITS)),
  localparam int unsigned    SAW   = $clog2(ROWS),
  localparam int unsigned    NSEG  = int'(SRAM_BYTES / 64'(4096)),
  localparam int unsigned    SW    = $clog2(NSEG),
  localparam int unsigned    CNTW  = $clog2(SA_N * SA_N + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // bundle
  input  logic                                bundle_valid,
  output logic                                bundle_ready,
  input  logic                                misc_valid,
  input  logic [MISC_W-1:0]                   misc_instr,
  input  logic [NUM_SA-1:0]                   sa_w_valid,
  input  logic [NUM_SA-1:0]                   sa_w_first,
  input  logic [NUM_SA-1:0][RW-1:0]           sa_w_row,
  input  logic [NUM_SA-1:0][SA_N-1:0][IN_W-1:0] sa_w_vec,
  input  logic [NUM_SA-1:0]                   sa_in_valid,
  input  logic [NUM_SA-1:0][SA_N-1:0][IN_W-1:0] sa_in_vec,
  input  logic [NUM_VU-1:0]                   vu_op,
  input  logic                                sram_req,
  input  logic                                sram_we,
  input  logic [SAW-1:0]                      sram_addr,
  input  logic [ROW_BITS-1:0]                 sram_wdata,
  input  logic                                dma_op,
  input  logic                                ici_op,
  // scalar register file read port (setpm operands)
  output logic [SREG_AW-1:0]                  sreg_raddr_a,
  output logic [SREG_AW-1:0]                  sreg_raddr_b,
  input  logic [SREG_W-1:0]                   sreg_rdata_a,
  input  logic [SREG_W-1:0]                   sreg_rdata_b,
  // SA results
  output logic [NUM_SA-1:0][SA_N-1:0]         sa_out_valid,
  output logic [NUM_SA-1:0][SA_N-1:0][PSUM_W-1:0] sa_out_psum,
  // SRAM read data
  output logic                                sram_rvalid,
  output logic [ROW_BITS-1:0]                 sram_rdata,
  // vector units (datapath outside)
  output logic [NUM_VU-1:0]                   vu_issue,
  output logic [NUM_VU-1:0]                   vu_pwr_on,
  // DMA / HBM and ICI (controllers & PHYs outside)
  input  logic                                dma_busy,
  input  logic                                ici_busy,
  output logic                                dma_start,
  output logic                                ici_start,
  output logic                                dma_pwr_on,
  output logic                                hbm_low_power,
  output logic                                ici_pwr_on,
  // power status
  output unit_state_e                         sa_state  [NUM_SA],
  output unit_state_e                         vu_state  [NUM_VU],
  output unit_state_e                         hbm_state,
  output unit_state_e                         ici_state,
  output logic [NUM_SA-1:0][CNTW-1:0]         sa_pe_on_cnt,
  output logic [NUM_SA-1:0][CNTW-1:0]         sa_pe_w_cnt,
  output logic [SW:0]                         sram_seg_on,
  output logic [SW:0]                         sram_seg_sleep,
  output logic [SW:0]                         sram_seg_off,
  output logic                                setpm_illegal,
  output logic [31:0]                         stall_cycles,
  output logic [31:0]                         bundles_issued
);

  localparam int unsigned U_HBM  = NUM_SA + NUM_VU;
  localparam int unsigned U_ICI  = U_HBM + 1;
  localparam int unsigned U_SRAM = U_HBM + 2;
  localparam int unsigned NU     = U_HBM + 3;

  // ---- setpm ----
  pm_cmd_t cmd;
  logic    dispatch;
  logic    cmd_go;

  setpm_decoder u_dec (
    .misc_valid (bundle_valid && misc_valid),
    .misc_instr,
    .sreg_raddr_a, .sreg_raddr_b, .sreg_rdata_a, .sreg_rdata_b,
    .cmd, .illegal(setpm_illegal)
  );
  assign cmd_go = dispatch && cmd.valid;

  // ---- dispatch ----
  logic [NU-1:0] need, unit_ready, wake, hold_by;

  pm_dispatch #(.NUNITS(NU)) u_disp (
    .clk, .rst_n, .bundle_valid, .need, .unit_ready,
    .dispatch, .wake, .hold_by,
    .stall_cycles, .dispatched(bundles_issued)
  );
  assign bundle_ready = dispatch;

  // ---- systolic arrays ----
  for (genvar k = 0; k < NUM_SA; k++) begin : g_sa
    logic f_on, f_off, c_ready, in_ready, sa_busy;
    logic [SA_N-1:0] row_nz, col_nz, row_on, col_on;

    pg_unit_ctrl #(
      .WAKE_DELAY(SA_DELAY), .OFF_DELAY(SA_DELAY), .IDLE_THRESH(1),
      .IDLE_EN(1'b0), .RESET_ON(1'b1)
    ) u_ctrl (
      .clk, .rst_n,
      .pm_set   (cmd_go && cmd.fu_type == FU_SA && cmd.fu_id[k]),
      .pm_mode  (cmd.mode),
      .active   (dispatch && need[k]),
      .busy     (sa_busy),
      .wake_req (wake[k]),
      .state    (sa_state[k]),
      .mode     (),
      .ready    (c_ready),
      .pwr_on   (),
      .low_power(),
      .force_on (f_on),
      .force_off(f_off)
    );

    pg_systolic_array #(.N(SA_N), .IN_W(IN_W), .PSUM_W(PSUM_W), .QDEPTH(QDEPTH)) u_sa (
      .clk, .rst_n,
      .force_on (f_on),
      .force_off(f_off),
      .w_valid  (dispatch && sa_w_valid[k]),
      .w_first  (sa_w_first[k]),
      .w_row    (sa_w_row[k]),
      .w_vec    (sa_w_vec[k]),
      .in_valid (dispatch && sa_in_valid[k]),
      .in_vec   (sa_in_vec[k]),
      .in_ready (in_ready),
      .out_valid(sa_out_valid[k]),
      .out_psum (sa_out_psum[k]),
      .row_nz, .col_nz, .row_on, .col_on,
      .pe_on_cnt(sa_pe_on_cnt[k]),
      .pe_w_cnt (sa_pe_w_cnt[k]),
      .busy     (sa_busy)
    );

    assign need[k]       = sa_w_valid[k] | sa_in_valid[k];
    assign unit_ready[k] = c_ready && (!sa_in_valid[k] || in_ready);

  end

  // ---- vector units ----
  for (genvar k = 0; k < NUM_VU; k++) begin : g_vu
    logic c_ready;
    pg_unit_ctrl #(
      .WAKE_DELAY(VU_DELAY), .OFF_DELAY(VU_DELAY), .IDLE_THRESH(VU_IDLE),
      .IDLE_EN(1'b1), .RESET_ON(1'b0)
    ) u_ctrl (
      .clk, .rst_n,
      .pm_set   (cmd_go && cmd.fu_type == FU_VU && cmd.fu_id[k]),
      .pm_mode  (cmd.mode),
      .active   (dispatch && vu_op[k]),
      .busy     (1'b0),
      .wake_req (wake[NUM_SA+k]),
      .state    (vu_state[k]),
      .mode     (),
      .ready    (c_ready),
      .pwr_on   (vu_pwr_on[k]),
      .low_power(),
      .force_on (),
      .force_off()
    );
    assign need[NUM_SA+k]       = vu_op[k];
    assign unit_ready[NUM_SA+k] = c_ready;
    assign vu_issue[k]          = dispatch && vu_op[k];
  end

  // ---- HBM controller & PHY with the DMA engine ----
  logic hbm_ready, ici_ready;

  pg_unit_ctrl #(
    .WAKE_DELAY(HBM_DELAY), .OFF_DELAY(HBM_DELAY), .IDLE_THRESH(HBM_IDLE),
    .IDLE_EN(1'b1), .RESET_ON(1'b0)
  ) u_hbm (
    .clk, .rst_n,
    .pm_set   (cmd_go && cmd.fu_type == FU_HBM && cmd.fu_id[0]),
    .pm_mode  (cmd.mode),
    .active   ((dispatch && dma_op) || dma_busy),
    .busy     (dma_busy),
    .wake_req (wake[U_HBM]),
    .state    (hbm_state),
    .mode     (),
    .ready    (hbm_ready),
    .pwr_on   (dma_pwr_on),
    .low_power(hbm_low_power),
    .force_on (),
    .force_off()
  );
  assign need[U_HBM]       = dma_op;
  assign unit_ready[U_HBM] = hbm_ready;
  assign dma_start         = dispatch && dma_op;

  // ---- ICI controller & PHY ----
  pg_unit_ctrl #(
    .WAKE_DELAY(ICI_DELAY), .OFF_DELAY(ICI_DELAY), .IDLE_THRESH(ICI_IDLE),
    .IDLE_EN(1'b1), .RESET_ON(1'b0)
  ) u_ici (
    .clk, .rst_n,
    .pm_set   (cmd_go && cmd.fu_type == FU_ICI && cmd.fu_id[0]),
    .pm_mode  (cmd.mode),
    .active   ((dispatch && ici_op) || ici_busy),
    .busy     (ici_busy),
    .wake_req (wake[U_ICI]),
    .state    (ici_state),
    .mode     (),
    .ready    (ici_ready),
    .pwr_on   (ici_pwr_on),
    .low_power(),
    .force_on (),
    .force_off()
  );
  assign need[U_ICI]       = ici_op;
  assign unit_ready[U_ICI] = ici_ready;
  assign ici_start         = dispatch && ici_op;

  // ---- scratchpad SRAM ----
  logic sram_ready;

  pg_sram #(
    .SRAM_BYTES(SRAM_BYTES), .SEG_BYTES(4096), .ROW_BITS(ROW_BITS),
    .SLEEP_DELAY(SRAM_SLEEP_DELAY), .OFF_DELAY(SRAM_OFF_DELAY),
    .SLEEP_PERIOD(SRAM_PERIOD)
  ) u_sram (
    .clk, .rst_n,
    .cmd_valid (cmd_go && cmd.fu_type == FU_SRAM),
    .cmd_start (cmd.start_addr),
    .cmd_end   (cmd.end_addr),
    .cmd_mode  (cmd.mode),
    .req       (bundle_valid && sram_req),
    .en        (dispatch),
    .we        (sram_we),
    .addr      (sram_addr),
    .wdata     (sram_wdata),
    .ready     (sram_ready),
    .rvalid    (sram_rvalid),
    .rdata     (sram_rdata),
    .n_on      (sram_seg_on),
    .n_sleep   (sram_seg_sleep),
    .n_off     (sram_seg_off),
    .policy_tick()
  );
  assign need[U_SRAM]       = sram_req;
  assign unit_ready[U_SRAM] = sram_ready;

endmodule
