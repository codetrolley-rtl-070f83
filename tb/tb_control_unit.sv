// tb_control_unit: decoder test. Encodes instructions of every RV32I format
// with random fields through the testbench encoder and checks register
// fields, the sign-extended immediate, the key control flags and the
// detection of illegal encodings.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_control_unit;
  import ct_pkg::*;
  import tb_rv_pkg::*;
  logic [31:0] instr, imm;
  ctrl_t ctrl;
  logic [4:0] rs1, rs2, rd;
  int checks = 0, failures = 0;

  control_unit dut (.*);

  initial begin #100000000; failures++; `TB_DONE end

  initial begin
    for (int k = 0; k < 400; k++) begin
      int r1, r2, d, i12, off;
      r1 = $urandom_range(31); r2 = $urandom_range(31); d = $urandom_range(31);
      i12 = $urandom_range(4095) - 2048;
      off = ($urandom_range(4095) - 2048) * 2;

      instr = ADDI(d, r1, i12); #1;
      `TB_CHECK(ctrl.alu_op == ALU_ADD && ctrl.b_sel == BSEL_IMM && ctrl.reg_write &&
                rd == 5'(d) && rs1 == 5'(r1) && imm == 32'(i12) && !ctrl.illegal &&
                ctrl.uses_rs1 && !ctrl.uses_rs2, "addi")

      instr = SUB(d, r1, r2); #1;
      `TB_CHECK(ctrl.alu_op == ALU_SUB && ctrl.b_sel == BSEL_RS2 && ctrl.reg_write &&
                rs2 == 5'(r2) && ctrl.uses_rs2 && !ctrl.illegal, "sub")

      instr = SRAI(d, r1, r2); #1;
      `TB_CHECK(ctrl.alu_op == ALU_SRA && imm[4:0] == 5'(r2) && !ctrl.illegal, "srai")

      instr = LW(d, r1, i12); #1;
      `TB_CHECK(ctrl.mem_read && ctrl.wb_sel == WB_MEM && ctrl.reg_write && imm == 32'(i12) &&
                ctrl.funct3 == 3'b010 && !ctrl.mem_write, "lw")

      instr = SB(r2, r1, i12); #1;
      `TB_CHECK(ctrl.mem_write && !ctrl.reg_write && imm == 32'(i12) && ctrl.funct3 == 3'b000 &&
                ctrl.uses_rs2, "sb")

      instr = enc_b(off, r2, r1, 3'($urandom_range(1) ? $urandom_range(1) : $urandom_range(7, 4))); #1;
      `TB_CHECK(ctrl.is_branch && !ctrl.reg_write && imm == 32'(off) && !ctrl.is_jal &&
                ctrl.uses_rs1 && ctrl.uses_rs2 && !ctrl.illegal, "branch")

      instr = enc_b(off, r2, r1, 3'($urandom_range(3, 2))); #1;
      `TB_CHECK(!ctrl.is_branch && ctrl.illegal, "bad branch funct3")

      instr = JAL(d, off * 64); #1;
      `TB_CHECK(ctrl.is_jal && ctrl.wb_sel == WB_LINK && ctrl.reg_write &&
                imm == 32'(off * 64) && !ctrl.is_branch, "jal")

      instr = JALR(d, r1, i12); #1;
      `TB_CHECK(ctrl.is_jalr && ctrl.wb_sel == WB_LINK && imm == 32'(i12) && ctrl.uses_rs1, "jalr")

      instr = LUI(d, i12 + 2048); #1;
      `TB_CHECK(ctrl.alu_op == ALU_PASSB && imm == {20'(i12 + 2048), 12'd0} && ctrl.reg_write &&
                !ctrl.uses_rs1, "lui")

      instr = AUIPC(d, i12 + 2048); #1;
      `TB_CHECK(ctrl.a_sel == ASEL_PC && imm == {20'(i12 + 2048), 12'd0}, "auipc")
    end
    instr = ECALL(); #1;
    `TB_CHECK(ctrl.halt && !ctrl.illegal && !ctrl.reg_write, "ecall")
    instr = 32'h00100073; #1;
    `TB_CHECK(ctrl.halt, "ebreak")
    instr = 32'hFFFF_FFFF; #1;
    `TB_CHECK(ctrl.illegal && !ctrl.reg_write && !ctrl.mem_write, "illegal")
    instr = 32'h0000_0000; #1;
    `TB_CHECK(ctrl.illegal && !ctrl.reg_write, "all zero")
    `TB_DONE
  end
endmodule
