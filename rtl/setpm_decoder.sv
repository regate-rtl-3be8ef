// setpm_decoder: decodes the setpm (set power mode) instruction carried in
// the miscellaneous slot of a VLIW bundle and reads its register operands.
//
// setpm has three variants:
//   setpm %start, %end, sram, $mode   - SRAM byte range from two scalar regs
//   setpm %fu_id, $fu_type, $mode     - unit bitmap from a scalar register
//   setpm $fu_id, $fu_type, $mode     - unit bitmap as an 8-bit immediate
// The fields and their widths (8-bit bitmap, 1-bit register/immediate flag,
// 3-bit unit type, 2-bit mode, fields ordered opcode first and mode last)
// follow the paper. The bit positions, the opcode value and the 5-bit
// register indices are this design's choice:
//   [31:24] opcode   [23:16] reserved
//   [15:11] rs_end (sram)          [10:6] rs_start (sram) / rs_fu_id
//   [13:6]  fu_id immediate (when [5] = 1)
//   [5] immediate flag   [4:2] fu_type   [1:0] mode
// For the SRAM variant the flag bit is ignored.
//
// Timing: combinational; the scalar register file is read in the same cycle
// (sreg_raddr_* out, sreg_rdata_* in) and cmd is valid in the cycle the misc
// slot is valid.
module setpm_decoder
  import regate_pkg::*;
(
  input  logic               misc_valid,
  input  logic [MISC_W-1:0]  misc_instr,
  output logic [SREG_AW-1:0] sreg_raddr_a,
  output logic [SREG_AW-1:0] sreg_raddr_b,
  input  logic [SREG_W-1:0]  sreg_rdata_a,
  input  logic [SREG_W-1:0]  sreg_rdata_b,
  output pm_cmd_t            cmd,
  output logic               illegal
);

  logic       is_setpm, use_imm;
  fu_type_e   fu_type;

  assign is_setpm     = misc_valid && (misc_instr[31:24] == OPC_SETPM);
  assign use_imm      = misc_instr[5];
  assign fu_type      = fu_type_e'(misc_instr[4:2]);
  assign sreg_raddr_a = misc_instr[10:6];
  assign sreg_raddr_b = misc_instr[15:11];

  always_comb begin
    cmd            = '0;
    illegal        = 1'b0;
    cmd.valid      = is_setpm;
    cmd.fu_type    = fu_type;
    cmd.mode       = pm_mode_e'(misc_instr[1:0]);
    if (fu_type == FU_SRAM) begin
      cmd.start_addr = sreg_rdata_a;
      cmd.end_addr   = sreg_rdata_b;
    end else begin
      cmd.fu_id = use_imm ? misc_instr[13:6] : sreg_rdata_a[FU_ID_W-1:0];
    end
    // sleep exists only for the SRAM; unknown unit types are rejected
    if (is_setpm && ((fu_type != FU_SRAM && cmd.mode == PM_SLEEP) ||
                     (misc_instr[4:2] > 3'(FU_ICI)))) begin
      illegal   = 1'b1;
      cmd.valid = 1'b0;
    end
  end

endmodule
