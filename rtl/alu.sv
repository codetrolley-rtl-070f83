// alu: Execute-stage arithmetic unit and branch comparator.
//
// Computes the RV32I integer operations selected by op on operands a and b
// and, separately, evaluates the branch condition given by the branch funct3
// on the two register operands (cmp_a, cmp_b). The branch output cond is the
// signal that the deobfuscation unit XORs with the hash bit before it decides
// whether the branch is taken. Purely combinational. The operation set is
// RV32I; the encoding of op is this design's own (ct_pkg::alu_op_e).
module alu
  import ct_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  input  logic [2:0]  br_funct3,
  input  logic [31:0] cmp_a,
  input  logic [31:0] cmp_b,
  output logic        cond
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
  end

  always_comb begin
    unique case (br_funct3)
      F3_BEQ:  cond = (cmp_a == cmp_b);
      F3_BNE:  cond = (cmp_a != cmp_b);
      F3_BLT:  cond = ($signed(cmp_a) <  $signed(cmp_b));
      F3_BGE:  cond = ($signed(cmp_a) >= $signed(cmp_b));
      F3_BLTU: cond = (cmp_a <  cmp_b);
      F3_BGEU: cond = (cmp_a >= cmp_b);
      default: cond = 1'b0;
    endcase
  end
endmodule
