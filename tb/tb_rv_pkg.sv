// tb_rv_pkg: testbench helpers for the CodeTrolley pipeline.
//
// Holds an RV32I instruction encoder (one function per instruction used by
// the tests), a reference model of the keyed branch hash, written
// independently of the RTL from the round definition documented in
// branch_hash, and the branch obfuscator: the transformation the compiler
// applies to a program, which reverses a conditional branch (BEQ<->BNE,
// BLT<->BGE, BLTU<->BGEU, i.e. funct3 bit 0 flipped) when the hash bit of its
// address is 1.
package tb_rv_pkg;

  // ---------------- encoder ----------------
  function automatic logic [31:0] enc_r(input logic [6:0] f7, input int rs2, input int rs1,
                                        input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_i(input int imm, input int rs1, input logic [2:0] f3,
                                        input int rd, input logic [6:0] op);
    logic [11:0] i; i = 12'(imm);
    return {i, 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_s(input int imm, input int rs2, input int rs1,
                                        input logic [2:0] f3);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(input int off, input int rs2, input int rs1,
                                        input logic [2:0] f3);
    logic [12:0] i; i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(input int imm20, input int rd, input logic [6:0] op);
    return {20'(imm20), 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_j(input int off, input int rd);
    logic [20:0] i; i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] ADDI(input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b010, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ORI (input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b110, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(input int rd, input int rs1, input int sh);  return enc_i(sh,  rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(input int rd, input int rs1, input int sh);  return enc_i(sh,  rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(input int rd, input int rs1, input int sh);  return enc_i(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD (input int rd, input int rs1, input int rs2); return enc_r(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (input int rd, input int rs1, input int rs2); return enc_r(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR (input int rd, input int rs1, input int rs2); return enc_r(7'h00, rs2, rs1, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(input int rd, input int rs1, input int rs2); return enc_r(7'h00, rs2, rs1, 3'b011, rd, 7'b0110011); endfunction
  function automatic logic [31:0] LUI (input int rd, input int imm20);              return enc_u(imm20, rd, 7'b0110111); endfunction
  function automatic logic [31:0] AUIPC(input int rd, input int imm20);             return enc_u(imm20, rd, 7'b0010111); endfunction
  function automatic logic [31:0] LW  (input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LB  (input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU (input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH  (input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (input int rs2, input int rs1, input int imm); return enc_s(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] SB  (input int rs2, input int rs1, input int imm); return enc_s(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] SH  (input int rs2, input int rs1, input int imm); return enc_s(imm, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] BEQ (input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] BNE (input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] BLT (input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b100); endfunction
  function automatic logic [31:0] BGE (input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b101); endfunction
  function automatic logic [31:0] BLTU(input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b110); endfunction
  function automatic logic [31:0] BGEU(input int rs1, input int rs2, input int off); return enc_b(off, rs2, rs1, 3'b111); endfunction
  function automatic logic [31:0] JAL (input int rd, input int off);                return enc_j(off, rd); endfunction
  function automatic logic [31:0] JALR(input int rd, input int rs1, input int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic logic [31:0] ECALL();                                          return 32'h00000073; endfunction
  function automatic logic [31:0] NOP();                                            return 32'h00000013; endfunction

  // ---------------- reference hash ----------------
  function automatic logic [31:0] rol32(input logic [31:0] x, input int s);
    logic [63:0] d; d = {x, x};
    return d[63-s -: 32];
  endfunction

  function automatic logic ref_hash(input logic [31:0] pc, input logic [63:0] key, input int rounds);
    logic [31:0] a, b, k [2];
    k[0] = key[31:0];
    k[1] = key[63:32];
    a = pc ^ k[0];
    b = k[1] ^ 32'h9E3779B9;
    for (int r = 0; r < rounds; r++) begin
      logic [7:0] rc; rc = 8'(r);
      a = a + b + k[r % 2];
      b = rol32(b, 7) ^ a;
      a = rol32(a, 13) ^ {rc, rc, rc, rc};
    end
    return ^(a ^ b);
  endfunction

  // ---------------- obfuscator ----------------
  function automatic logic is_cond_branch(input logic [31:0] ins);
    return (ins[6:0] == 7'b1100011) && (ins[14:13] != 2'b01);
  endfunction

  function automatic logic [31:0] obfuscate(input logic [31:0] ins, input logic [31:0] pc,
                                            input logic [63:0] key, input int rounds);
    if (is_cond_branch(ins) && ref_hash(pc, key, rounds)) return ins ^ 32'h0000_1000;
    return ins;
  endfunction

endpackage
