// pg_sram: on-chip scratchpad SRAM with per-segment power gating.
//
// The array holds SRAM_BYTES bytes as rows of ROW_BITS bits (one row is one
// 128-lane x 32-bit vector sublane, 512 bytes; a 4 KB segment, the size of a
// vector register, is eight rows). sram_seg_pg_ctrl keeps the power state of
// every segment; this module adds the storage and the single read/write
// port.
//
// Port: req / we / addr (row index) / wdata. A pending request (req) wakes
// the addressed segment; ready is high while that segment is ON. The access
// is performed in a cycle where req, ready and en are all high (en lets a
// dispatch stage hold an access that waits for other units; tie it high
// otherwise). A read returns rdata with rvalid one cycle after it is
// performed.
// setpm for the SRAM arrives as cmd_valid with byte addresses start / end;
// every segment from the one holding start to the one holding end, both
// included, takes the new mode (the paper passes start and end addresses in
// scalar registers; the rounding to whole segments is this design's choice).
//
// Data loss in OFF: when a segment reaches OFF, a valid bit per row is
// cleared; a row whose bit is clear reads as zero until written again. This
// stands in for the undefined contents of a powered-off SRAM macro, so the
// model is deterministic; the SRAM cell array itself is written as a plain
// memory. Sleep keeps the contents.
module pg_sram
  import regate_pkg::*;
#(
  parameter longint unsigned SRAM_BYTES   = 64'd134217728,
  parameter int unsigned     SEG_BYTES    = 4096,
  parameter int unsigned     ROW_BITS     = 4096,
  parameter int unsigned     SLEEP_DELAY  = 4,
  parameter int unsigned     OFF_DELAY    = 10,
  parameter int unsigned     SLEEP_PERIOD = 1024,
  localparam int unsigned    ROWS         = int'(SRAM_BYTES * 8 / 64'(ROW_BITS)),
  localparam int unsigned    NSEG         = int'(SRAM_BYTES / 64'(SEG_BYTES)),
  localparam int unsigned    RPS          = SEG_BYTES * 8 / ROW_BITS,
  localparam int unsigned    AW           = $clog2(ROWS),
  localparam int unsigned    SW           = $clog2(NSEG)
) (
  input  logic                clk,
  input  logic                rst_n,
  // setpm over a byte-address range
  input  logic                cmd_valid,
  input  logic [SREG_W-1:0]   cmd_start,
  input  logic [SREG_W-1:0]   cmd_end,
  input  pm_mode_e            cmd_mode,
  // access port
  input  logic                req,
  input  logic                en,
  input  logic                we,
  input  logic [AW-1:0]       addr,
  input  logic [ROW_BITS-1:0] wdata,
  output logic                ready,
  output logic                rvalid,
  output logic [ROW_BITS-1:0] rdata,
  // status
  output logic [SW:0]         n_on,
  output logic [SW:0]         n_sleep,
  output logic [SW:0]         n_off,
  output logic                policy_tick
);

  localparam int unsigned OW = $clog2(SEG_BYTES);
  localparam int unsigned RW = (RPS > 1) ? $clog2(RPS) : 1;

  logic [ROW_BITS-1:0] mem [ROWS];
  logic [RPS-1:0]      row_ok [NSEG];
  logic [NSEG-1:0]     seg_lost;
  seg_state_e          seg_state [NSEG];
  logic [SW-1:0]       seg, seg_lo, seg_hi;
  logic [RW-1:0]       row_in_seg;
  logic                rd_ok_q;
  logic                fire;

  assign fire = req && ready && en;

  assign seg        = SW'(addr >> $clog2(RPS));
  assign row_in_seg = RW'(addr);
  assign seg_lo     = SW'(cmd_start >> OW);
  assign seg_hi     = SW'(cmd_end >> OW);

  sram_seg_pg_ctrl #(
    .NSEG(NSEG), .SLEEP_DELAY(SLEEP_DELAY), .OFF_DELAY(OFF_DELAY),
    .SLEEP_PERIOD(SLEEP_PERIOD)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_seg_lo(seg_lo), .cmd_seg_hi(seg_hi), .cmd_mode,
    .acc_valid(req), .acc_seg(seg), .acc_ready(ready),
    .seg_state, .seg_lost, .n_on, .n_sleep, .n_off, .tick(policy_tick)
  );

  always_ff @(posedge clk) begin
    if (fire && we) mem[addr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSEG; s++) row_ok[s] <= '0;
      rvalid  <= 1'b0;
      rd_ok_q <= 1'b0;
    end else begin
      for (int s = 0; s < NSEG; s++) if (seg_lost[s]) row_ok[s] <= '0;
      if (fire && we) row_ok[seg][row_in_seg] <= 1'b1;
      rvalid  <= fire && !we;
      rd_ok_q <= row_ok[seg][row_in_seg];
    end
  end

  logic [ROW_BITS-1:0] rd_q;
  always_ff @(posedge clk) begin
    if (fire && !we) rd_q <= mem[addr];
  end
  assign rdata = rd_ok_q ? rd_q : '0;

endmodule
