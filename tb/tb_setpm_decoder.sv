// tb_setpm_decoder: self-checking test of the setpm decoder. Encodes the
// three setpm variants (SRAM range, register bitmap, immediate bitmap) with
// random fields, including the paper's example "setpm 0b1011,vu,off", and
// checks the decoded command, the register read addresses, non-setpm
// opcodes, and rejection of sleep on a non-SRAM unit.
module tb_setpm_decoder;
  import regate_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic misc_valid, illegal;
  logic [31:0] misc_instr, sreg_rdata_a, sreg_rdata_b;
  logic [4:0] sreg_raddr_a, sreg_raddr_b;
  pm_cmd_t cmd;
  setpm_decoder dut (.*);

  // scalar register file model: r[i] = i * 0x01010101 ^ 0x5a5a
  always_comb begin
    sreg_rdata_a = 32'(sreg_raddr_a) * 32'h01010101 ^ 32'h5a5a;
    sreg_rdata_b = 32'(sreg_raddr_b) * 32'h01010101 ^ 32'h5a5a;
  end

  function automatic logic [31:0] enc_imm(input logic [7:0] id, input logic [2:0] ty, input logic [1:0] md);
    return {8'hA5, 8'h00, 2'b00, id, 1'b1, ty, md};
  endfunction
  function automatic logic [31:0] enc_reg(input logic [4:0] rs, input logic [2:0] ty, input logic [1:0] md);
    return {8'hA5, 8'h00, 5'd0, rs, 1'b0, ty, md};
  endfunction
  function automatic logic [31:0] enc_sram(input logic [4:0] rs_s, input logic [4:0] rs_e, input logic [1:0] md);
    return {8'hA5, 8'h00, rs_e, rs_s, 1'b0, 3'd2, md};
  endfunction

  initial begin
    misc_valid = 1;
    // the paper's example: VU 0, 1 and 3 off
    misc_instr = enc_imm(8'b0000_1011, 3'd1, 2'd2); #1;
    chk(cmd.valid && cmd.fu_type == FU_VU && cmd.mode == PM_OFF && cmd.fu_id == 8'b1011, "setpm 0b1011,vu,off");
    for (int t = 0; t < 200; t++) begin
      logic [7:0] id; logic [4:0] ra, rb; logic [2:0] ty; logic [1:0] md;
      id = 8'($urandom); ra = 5'($urandom); rb = 5'($urandom);
      ty = 3'($urandom_range(0, 4)); md = 2'($urandom_range(0, 2));
      if (ty == 3'd2) continue;
      misc_instr = enc_imm(id, ty, md); #1;
      chk(cmd.valid && cmd.fu_id == id && cmd.fu_type == fu_type_e'(ty) && cmd.mode == pm_mode_e'(md), "immediate variant");
      misc_instr = enc_reg(ra, ty, md); #1;
      chk(sreg_raddr_a == ra && cmd.valid && cmd.fu_id == 8'(32'(ra) * 32'h01010101 ^ 32'h5a5a), "register variant");
      md = 2'($urandom_range(0, 3));
      misc_instr = enc_sram(ra, rb, md); #1;
      chk(cmd.valid && cmd.fu_type == FU_SRAM && cmd.mode == pm_mode_e'(md) &&
          cmd.start_addr == (32'(ra) * 32'h01010101 ^ 32'h5a5a) &&
          cmd.end_addr == (32'(rb) * 32'h01010101 ^ 32'h5a5a), "sram variant");
    end
    misc_instr = enc_imm(8'h01, 3'd1, 2'd3); #1;
    chk(!cmd.valid && illegal, "sleep on a VU rejected");
    misc_instr = enc_imm(8'h01, 3'd6, 2'd0); #1;
    chk(!cmd.valid && illegal, "unknown unit type rejected");
    misc_instr = {8'h11, 24'h0}; #1;
    chk(!cmd.valid && !illegal, "other opcode ignored");
    misc_valid = 0; misc_instr = enc_imm(8'h01, 3'd0, 2'd1); #1;
    chk(!cmd.valid, "invalid slot ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
