// pg_unit_ctrl: power controller of one functional unit with a single power
// domain (a vector unit, a whole systolic array, the HBM controller & PHY
// with the DMA engine, or the ICI controller & PHY).
//
// Mode register (set by a decoded setpm command, reset to auto):
//   auto - hardware policy. With IDLE_EN = 1 the unit starts powering off
//          after IDLE_THRESH consecutive idle cycles (idle detection); with
//          IDLE_EN = 0 the unit simply stays on (used for the systolic
//          array, whose auto policy is the PE-level gating inside it).
//   on   - never gate; wake up at once if off.
//   off  - gate as soon as no operation is running or waiting for the unit
//          (sleep is treated as off).
// In every mode an operation that needs the unit raises wake_req; the unit
// wakes and sets its ready bit, exactly as the paper's dispatch stage
// expects. In off mode it powers off again when the operation is done.
//
// States: OFF -> WAKING -> ON -> GATING -> OFF. A wake request (or on mode)
// seen in cycle t makes the unit ready at t + WAKE_DELAY. A power-off decided
// in cycle t makes the unit unusable from t + 1 and fully off at
// t + 1 + OFF_DELAY. Both delays are the paper's "power on/off delay"
// (VU 2, HBM 60, ICI 60, full SA 10 cycles); the idle-detection thresholds
// are set by the instantiating module.
//
// Inputs: active (the unit does work this cycle, resets idle detection),
// busy (work continues past this cycle, blocks power-off), wake_req.
// Outputs: ready (dispatch may issue to the unit), pwr_on (header switch
// closed: WAKING or ON), low_power (fully OFF), force_on / force_off for
// units with their own finer-grained gating.
module pg_unit_ctrl
  import regate_pkg::*;
#(
  parameter int unsigned WAKE_DELAY  = 2,
  parameter int unsigned OFF_DELAY   = 2,
  parameter int unsigned IDLE_THRESH = 8,
  parameter bit          IDLE_EN     = 1'b1,
  parameter bit          RESET_ON    = 1'b0   // state after reset: ON or OFF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pm_set,
  input  pm_mode_e    pm_mode,
  input  logic        active,
  input  logic        busy,
  input  logic        wake_req,
  output unit_state_e state,
  output pm_mode_e    mode,
  output logic        ready,
  output logic        pwr_on,
  output logic        low_power,
  output logic        force_on,
  output logic        force_off
);

  localparam int unsigned CW = 16;

  pm_mode_e    mode_q, mode_eff;
  unit_state_e state_q;
  logic [CW-1:0] cnt_q, idle_q;
  logic          idle_now, want_on, go_down;

  assign mode_eff = pm_set ? pm_mode : mode_q;
  assign idle_now = ~active & ~busy & ~wake_req;
  assign want_on  = wake_req | (mode_eff == PM_ON);
  always_comb begin
    go_down = 1'b0;
    if (!busy && !(wake_req && !active) && !(mode_eff == PM_ON)) begin
      if (mode_eff == PM_OFF || mode_eff == PM_SLEEP) go_down = 1'b1;
      else if (IDLE_EN && idle_now && (idle_q >= CW'(IDLE_THRESH - 1))) go_down = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q  <= PM_AUTO;
      state_q <= RESET_ON ? U_ON : U_OFF;
      cnt_q   <= '0;
      idle_q  <= '0;
    end else begin
      if (pm_set) mode_q <= pm_mode;
      idle_q <= (state_q == U_ON && idle_now) ? idle_q + 1'b1 : '0;
      unique case (state_q)
        U_ON: if (go_down) begin
          state_q <= U_GATING;
          cnt_q   <= CW'(OFF_DELAY);
        end
        U_GATING: begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q <= 1) state_q <= U_OFF;
        end
        U_OFF: if (want_on) begin
          if (WAKE_DELAY <= 1) state_q <= U_ON;
          else begin
            state_q <= U_WAKING;
            cnt_q   <= CW'(WAKE_DELAY - 1);
          end
        end
        U_WAKING: begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q <= 1) state_q <= U_ON;
        end
        default: state_q <= U_OFF;
      endcase
    end
  end

  assign state     = state_q;
  assign mode      = mode_q;
  assign ready     = (state_q == U_ON);
  assign pwr_on    = (state_q == U_ON) || (state_q == U_WAKING);
  assign low_power = (state_q == U_OFF);
  assign force_on  = (mode_q == PM_ON) && (state_q == U_ON);
  assign force_off = (state_q == U_OFF) || (state_q == U_GATING);

  // an operation is never issued to a unit that is not powered
  assert property (@(posedge clk) disable iff (!rst_n) active |-> (state_q == U_ON))
    else $error("pg_unit_ctrl: activity while not ready");

endmodule
