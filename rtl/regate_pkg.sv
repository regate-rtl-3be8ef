// regate_pkg: types and constants shared by the power-gating fabric.
//
// Power modes follow the software-visible modes of the setpm instruction:
// auto (hardware policy, the reset default), on, off and, for the SRAM only,
// sleep. The field widths of setpm (8-bit functional-unit bitmap, 3-bit
// unit type, 2-bit mode) are the ones given for an NPU with 8 SAs and 8 VUs.
// The numeric encodings of modes, unit types and the opcode are this
// design's own choice; the paper names the values but does not encode them.
package regate_pkg;

  // Software-selected power mode (2 bits).
  typedef enum logic [1:0] {
    PM_AUTO  = 2'd0,
    PM_ON    = 2'd1,
    PM_OFF   = 2'd2,
    PM_SLEEP = 2'd3
  } pm_mode_e;

  // Functional-unit type field of setpm (3 bits).
  typedef enum logic [2:0] {
    FU_SA   = 3'd0,
    FU_VU   = 3'd1,
    FU_SRAM = 3'd2,
    FU_HBM  = 3'd3,
    FU_ICI  = 3'd4
  } fu_type_e;

  // Power mode of one processing element of the systolic array.
  typedef enum logic [1:0] {
    PE_OFF  = 2'd0,   // fully gated
    PE_W_ON = 2'd1,   // only the weight register powered
    PE_ON   = 2'd2    // all registers and the MAC powered
  } pe_pwr_e;

  // Power state of a unit with a single power domain (SA, VU, HBM, ICI).
  typedef enum logic [1:0] {
    U_OFF    = 2'd0,
    U_WAKING = 2'd1,
    U_ON     = 2'd2,
    U_GATING = 2'd3
  } unit_state_e;

  // Power state of one SRAM segment.
  typedef enum logic [2:0] {
    S_ON       = 3'd0,
    S_TO_SLEEP = 3'd1,
    S_SLEEP    = 3'd2,
    S_TO_OFF   = 3'd3,
    S_OFF      = 3'd4,
    S_WAKING   = 3'd5
  } seg_state_e;

  // Misc-slot instruction word. Field order follows the setpm layout, opcode
  // at the most significant end and mode at the least significant end.
  localparam int unsigned MISC_W    = 32;
  localparam int unsigned SREG_AW   = 5;    // scalar register index width
  localparam int unsigned SREG_W    = 32;   // scalar register width
  localparam int unsigned FU_ID_W   = 8;    // functional-unit bitmap width
  localparam logic [7:0]  OPC_SETPM = 8'hA5;

  // Decoded setpm command as delivered to the power controllers.
  typedef struct packed {
    logic                valid;
    fu_type_e            fu_type;
    pm_mode_e            mode;
    logic [FU_ID_W-1:0]  fu_id;       // bitmap of SAs / VUs (bit 0 for HBM/ICI)
    logic [SREG_W-1:0]   start_addr;  // SRAM byte address, first byte
    logic [SREG_W-1:0]   end_addr;    // SRAM byte address, last byte
  } pm_cmd_t;

endpackage
