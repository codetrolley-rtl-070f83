// tb_alu: ALU and branch comparator test against a behavioural model, with
// random and corner-case operands for every operation and branch condition.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_alu;
  import ct_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, cmp_a, cmp_b;
  logic [2:0] br_funct3;
  logic cond;
  int checks = 0, failures = 0;

  alu dut (.*);

  initial begin #100000000; failures++; `TB_DONE end

  function automatic logic [31:0] pick();
    case ($urandom_range(5))
      0: return 32'h0;
      1: return 32'h8000_0000;
      2: return 32'hFFFF_FFFF;
      3: return 32'($urandom_range(40));
      default: return $urandom;
    endcase
  endfunction

  initial begin
    for (int k = 0; k < 5000; k++) begin
      logic [31:0] e; logic ec; longint sa, sb;
      op = alu_op_e'($urandom_range(10)); a = pick(); b = pick();
      br_funct3 = 3'($urandom); cmp_a = pick(); cmp_b = $urandom_range(2) == 0 ? cmp_a : pick();
      #1;
      sa = longint'($signed(a)); sb = longint'($signed(b));
      case (op)
        ALU_ADD:  e = 32'(longint'(a) + longint'(b));
        ALU_SUB:  e = 32'(longint'(a) - longint'(b));
        ALU_SLL:  e = 32'(64'(a) << (b % 32));
        ALU_SLT:  e = (sa < sb) ? 1 : 0;
        ALU_SLTU: e = (longint'(a) < longint'(b)) ? 1 : 0;
        ALU_XOR:  e = a ^ b;
        ALU_SRL:  e = 32'(64'(a) >> (b % 32));
        ALU_SRA:  e = 32'(sa >>> (b % 32));
        ALU_OR:   e = a | b;
        ALU_AND:  e = a & b;
        default:  e = b;
      endcase
      sa = longint'($signed(cmp_a)); sb = longint'($signed(cmp_b));
      case (br_funct3)
        3'b000: ec = cmp_a == cmp_b;
        3'b001: ec = cmp_a != cmp_b;
        3'b100: ec = sa < sb;
        3'b101: ec = sa >= sb;
        3'b110: ec = longint'(cmp_a) < longint'(cmp_b);
        3'b111: ec = longint'(cmp_a) >= longint'(cmp_b);
        default: ec = 0;
      endcase
      `TB_CHECK(y == e, $sformatf("op %s a=%h b=%h y=%h exp %h", op.name(), a, b, y, e))
      `TB_CHECK(cond == ec, $sformatf("branch f3=%0d a=%h b=%h", br_funct3, cmp_a, cmp_b))
    end
    `TB_DONE
  end
endmodule
