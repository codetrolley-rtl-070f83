// control_unit: Decode-stage instruction decoder and immediate generator.
//
// Turns a 32-bit RV32I instruction into the control bundle ct_pkg::ctrl_t
// (ALU operation, operand selects, write-back source, memory access, branch
// and jump flags, which source registers are read) and the sign-extended
// immediate of its format. Conditional branches are flagged with is_branch;
// these are the instructions whose outcome the deobfuscation unit may
// reverse. ECALL and EBREAK raise halt, which stops the core when it retires.
// FENCE decodes as a no-op. Anything else raises illegal and is executed as a
// no-op. Purely combinational. The paper names the control unit only; the
// decoding follows the RISC-V specification and the bundle layout is this
// design's own.
module control_unit
  import ct_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl,
  output logic [31:0] imm,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [4:0]  rd
);
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];
  assign rd     = instr[11:7];

  always_comb begin
    ctrl        = '0;
    ctrl.alu_op = ALU_ADD;
    ctrl.a_sel  = ASEL_RS1;
    ctrl.b_sel  = BSEL_IMM;
    ctrl.wb_sel = WB_ALU;
    ctrl.funct3 = funct3;
    imm         = '0;

    unique case (opcode)
      OP_LUI: begin
        imm            = {instr[31:12], 12'd0};
        ctrl.alu_op    = ALU_PASSB;
        ctrl.reg_write = 1'b1;
      end
      OP_AUIPC: begin
        imm            = {instr[31:12], 12'd0};
        ctrl.a_sel     = ASEL_PC;
        ctrl.reg_write = 1'b1;
      end
      OP_JAL: begin
        imm            = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
        ctrl.is_jal    = 1'b1;
        ctrl.wb_sel    = WB_LINK;
        ctrl.reg_write = 1'b1;
      end
      OP_JALR: begin
        imm            = {{20{instr[31]}}, instr[31:20]};
        ctrl.is_jalr   = 1'b1;
        ctrl.wb_sel    = WB_LINK;
        ctrl.reg_write = 1'b1;
        ctrl.uses_rs1  = 1'b1;
        ctrl.illegal   = (funct3 != 3'b000);
      end
      OP_BRANCH: begin
        imm            = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
        ctrl.is_branch = (funct3 != 3'b010) && (funct3 != 3'b011);
        ctrl.illegal   = (funct3 == 3'b010) || (funct3 == 3'b011);
        ctrl.uses_rs1  = 1'b1;
        ctrl.uses_rs2  = 1'b1;
      end
      OP_LOAD: begin
        imm            = {{20{instr[31]}}, instr[31:20]};
        ctrl.mem_read  = 1'b1;
        ctrl.wb_sel    = WB_MEM;
        ctrl.reg_write = 1'b1;
        ctrl.uses_rs1  = 1'b1;
        ctrl.illegal   = (funct3 == 3'b011) || (funct3 == 3'b110) || (funct3 == 3'b111);
        if (ctrl.illegal) begin
          ctrl.mem_read  = 1'b0;
          ctrl.reg_write = 1'b0;
        end
      end
      OP_STORE: begin
        imm            = {{20{instr[31]}}, instr[31:25], instr[11:7]};
        ctrl.mem_write = (funct3 == 3'b000) || (funct3 == 3'b001) || (funct3 == 3'b010);
        ctrl.illegal   = !ctrl.mem_write;
        ctrl.uses_rs1  = 1'b1;
        ctrl.uses_rs2  = 1'b1;
      end
      OP_IMM: begin
        imm            = {{20{instr[31]}}, instr[31:20]};
        ctrl.reg_write = 1'b1;
        ctrl.uses_rs1  = 1'b1;
        unique case (funct3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          3'b001: begin
            ctrl.alu_op  = ALU_SLL;
            ctrl.illegal = (funct7 != 7'b0000000);
          end
          default: begin // 3'b101
            ctrl.alu_op  = funct7[5] ? ALU_SRA : ALU_SRL;
            ctrl.illegal = (funct7 != 7'b0000000) && (funct7 != 7'b0100000);
          end
        endcase
        if (ctrl.illegal) ctrl.reg_write = 1'b0;
      end
      OP_REG: begin
        ctrl.b_sel     = BSEL_RS2;
        ctrl.reg_write = 1'b1;
        ctrl.uses_rs1  = 1'b1;
        ctrl.uses_rs2  = 1'b1;
        unique case (funct3)
          3'b000:  ctrl.alu_op = funct7[5] ? ALU_SUB : ALU_ADD;
          3'b001:  ctrl.alu_op = ALU_SLL;
          3'b010:  ctrl.alu_op = ALU_SLT;
          3'b011:  ctrl.alu_op = ALU_SLTU;
          3'b100:  ctrl.alu_op = ALU_XOR;
          3'b101:  ctrl.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
          3'b110:  ctrl.alu_op = ALU_OR;
          default: ctrl.alu_op = ALU_AND;
        endcase
        ctrl.illegal = !((funct7 == 7'b0000000) ||
                         (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101)));
        if (ctrl.illegal) ctrl.reg_write = 1'b0;
      end
      OP_FENCE: begin
        // executed as a no-op: the pipeline has no caches to order
      end
      OP_SYSTEM: begin
        ctrl.halt    = (instr[31:7] == 25'd0) || (instr[31:7] == {12'd1, 13'd0});
        ctrl.illegal = !ctrl.halt;
      end
      default: ctrl.illegal = 1'b1;
    endcase

    if (instr[1:0] != 2'b11) begin
      ctrl         = '0;
      ctrl.alu_op  = ALU_ADD;
      ctrl.a_sel   = ASEL_RS1;
      ctrl.b_sel   = BSEL_IMM;
      ctrl.wb_sel  = WB_ALU;
      ctrl.illegal = 1'b1;
    end
  end
endmodule
