// sram_seg_pg_ctrl: power-state controller of the segments of the on-chip
// scratchpad SRAM.
//
// The SRAM is split into NSEG equal segments (4 KB, one vector register, in
// the paper's NPU). Each segment is ON, SLEEP (drowsy: lower supply, data
// kept) or OFF (gated supply, data lost), and has a 2-bit software mode set
// by "setpm start,end,sram,mode" over a range of segments:
//   auto  - hardware policy: at every policy tick (every SLEEP_PERIOD cycles)
//           a segment that was not accessed since the previous tick is put
//           to sleep; an access wakes it again.
//   on    - stays on.
//   sleep - goes to sleep as soon as it is not being accessed.
//   off   - powers off as soon as it is not being accessed (data lost).
// An access to a segment that is not ON is held (acc_ready low) and wakes the
// segment; in sleep / off mode the segment returns to its low-power state
// once a policy tick passes without access. Entering OFF pulses
// seg_lost[s] so the array can forget the segment's contents.
//
// Timing (the paper's per-segment delays): power-down and wake-up take
// SLEEP_DELAY cycles for sleep and OFF_DELAY cycles for off. A request seen
// in cycle t to a SLEEP segment is served (acc_ready) at t + SLEEP_DELAY,
// to an OFF segment at t + OFF_DELAY. The policy period is this design's
// choice; the paper only says unused segments are "periodically" put to
// sleep. Segments come out of reset ON in auto mode.
module sram_seg_pg_ctrl
  import regate_pkg::*;
#(
  parameter int unsigned NSEG         = 32768,
  parameter int unsigned SLEEP_DELAY  = 4,
  parameter int unsigned OFF_DELAY    = 10,
  parameter int unsigned SLEEP_PERIOD = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // setpm over a segment range [seg_lo, seg_hi]
  input  logic                    cmd_valid,
  input  logic [$clog2(NSEG)-1:0] cmd_seg_lo,
  input  logic [$clog2(NSEG)-1:0] cmd_seg_hi,
  input  pm_mode_e                cmd_mode,
  // access
  input  logic                    acc_valid,
  input  logic [$clog2(NSEG)-1:0] acc_seg,
  output logic                    acc_ready,
  // status
  output seg_state_e              seg_state [NSEG],
  output logic [NSEG-1:0]         seg_lost,
  output logic [$clog2(NSEG):0]   n_on,
  output logic [$clog2(NSEG):0]   n_sleep,
  output logic [$clog2(NSEG):0]   n_off,
  output logic                    tick
);

  localparam int unsigned SW = $clog2(NSEG);
  localparam int unsigned MAXD = (OFF_DELAY > SLEEP_DELAY) ? OFF_DELAY : SLEEP_DELAY;
  localparam int unsigned CW = $clog2(MAXD + 1);
  localparam int unsigned PW = (SLEEP_PERIOD > 1) ? $clog2(SLEEP_PERIOD) : 1;

  seg_state_e    st_q  [NSEG];
  pm_mode_e      md_q  [NSEG];
  logic [CW-1:0] cnt_q [NSEG];
  logic [NSEG-1:0] acc_q;
  logic [PW-1:0] per_q;

  assign tick      = (per_q == PW'(SLEEP_PERIOD - 1));
  assign acc_ready = acc_valid && (st_q[acc_seg] == S_ON);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) per_q <= '0;
    else        per_q <= tick ? '0 : per_q + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSEG; s++) begin
        st_q[s]  <= S_ON;
        md_q[s]  <= PM_AUTO;
        cnt_q[s] <= '0;
        acc_q[s]    <= 1'b0;
        seg_lost[s] <= 1'b0;
      end
    end else begin
      for (int s = 0; s < NSEG; s++) begin
        logic here, in_rng, quiet;
        here     = acc_valid && (acc_seg == SW'(s));
        in_rng   = cmd_valid && (SW'(s) >= cmd_seg_lo) && (SW'(s) <= cmd_seg_hi);
        quiet    = !here && !acc_q[s];
        seg_lost[s] <= 1'b0;
        if (in_rng) md_q[s] <= cmd_mode;
        // access history of the current policy period
        if (here)                acc_q[s] <= 1'b1;
        else if (tick || in_rng) acc_q[s] <= 1'b0;
        unique case (st_q[s])
          S_ON: begin
            if (md_q[s] == PM_OFF && (quiet || tick) && !here) begin
              st_q[s] <= S_TO_OFF;   cnt_q[s] <= CW'(OFF_DELAY);
            end else if (((md_q[s] == PM_SLEEP && (quiet || tick)) ||
                          (md_q[s] == PM_AUTO && tick && !acc_q[s])) && !here) begin
              st_q[s] <= S_TO_SLEEP; cnt_q[s] <= CW'(SLEEP_DELAY);
            end
          end
          S_TO_SLEEP: begin
            cnt_q[s] <= cnt_q[s] - 1'b1;
            if (cnt_q[s] <= 1) st_q[s] <= S_SLEEP;
          end
          S_TO_OFF: begin
            cnt_q[s] <= cnt_q[s] - 1'b1;
            if (cnt_q[s] <= 1) begin
              st_q[s]     <= S_OFF;
              seg_lost[s] <= 1'b1;
            end
          end
          S_SLEEP: begin
            if (here || md_q[s] == PM_ON) begin
              st_q[s] <= S_WAKING;   cnt_q[s] <= CW'(SLEEP_DELAY - 1);
            end else if (md_q[s] == PM_OFF) begin
              st_q[s] <= S_TO_OFF;   cnt_q[s] <= CW'(OFF_DELAY);
            end
          end
          S_OFF: begin
            if (here || md_q[s] == PM_ON) begin
              st_q[s] <= S_WAKING;   cnt_q[s] <= CW'(OFF_DELAY - 1);
            end
          end
          S_WAKING: begin
            cnt_q[s] <= cnt_q[s] - 1'b1;
            if (cnt_q[s] <= 1) st_q[s] <= S_ON;
          end
          default: st_q[s] <= S_ON;
        endcase
      end
    end
  end

  always_comb begin
    n_on    = '0;
    n_sleep = '0;
    n_off   = '0;
    for (int s = 0; s < NSEG; s++) begin
      seg_state[s] = st_q[s];
      if (st_q[s] == S_ON || st_q[s] == S_WAKING) n_on    = n_on + 1'b1;
      if (st_q[s] == S_SLEEP)                     n_sleep = n_sleep + 1'b1;
      if (st_q[s] == S_OFF)                       n_off   = n_off + 1'b1;
    end
  end

endmodule
