// pm_dispatch: power-aware hold condition of the in-order VLIW dispatch
// stage.
//
// A powered-down unit is treated as a structural hazard: each unit exports a
// ready bit (set only while it is powered on), and a bundle is dispatched
// only when every unit it needs is ready. While a bundle waits, it sends a
// wake-up request to every unit it needs; a unit that is already on ignores
// it, a unit that is off starts waking and sets its ready bit when done.
// Because every unit has its own ready bit, units wake and sleep
// independently. This follows the paper's description of the pipeline; the
// counters of stall cycles and the one-hot "which unit held the bundle"
// report are this design's additions for power / performance accounting.
//
// Interface: bundle_valid with need[u] (the bundle uses unit u) and
// unit_ready[u]; dispatch is high in the cycle the bundle issues; wake[u]
// goes to the power controller of unit u; hold_by[u] is high while unit u
// is the reason the bundle waits. Timing: combinational hold, registered
// counters.
module pm_dispatch #(
  parameter int unsigned NUNITS = 16,
  parameter int unsigned CNT_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bundle_valid,
  input  logic [NUNITS-1:0] need,
  input  logic [NUNITS-1:0] unit_ready,
  output logic              dispatch,
  output logic [NUNITS-1:0] wake,
  output logic [NUNITS-1:0] hold_by,
  output logic [CNT_W-1:0]  stall_cycles,
  output logic [CNT_W-1:0]  dispatched
);

  assign hold_by  = bundle_valid ? (need & ~unit_ready) : '0;
  assign dispatch = bundle_valid && (hold_by == '0);
  assign wake     = bundle_valid ? need : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_cycles <= '0;
      dispatched   <= '0;
    end else begin
      if (bundle_valid && !dispatch) stall_cycles <= stall_cycles + 1'b1;
      if (dispatch)                  dispatched   <= dispatched + 1'b1;
    end
  end

endmodule
