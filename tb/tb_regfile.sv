// tb_regfile: register file test. Random writes and reads against an array
// model; checks reset to zero, x0 hard-wired to zero and the write-through
// read of a register written in the same cycle.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_regfile;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, we = 0;
  logic [4:0] rs1 = 0, rs2 = 0, rd = 0;
  logic [31:0] rdata1, rdata2, wdata = 0;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  regfile dut (.*);

  initial begin #(10 * 20000); failures++; `TB_DONE end

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      rs1 = 5'(i); #1;
      `TB_CHECK(rdata1 == 0, $sformatf("reset x%0d", i))
    end
    for (int k = 0; k < 3000; k++) begin
      we = 1'($urandom); rd = 5'($urandom); wdata = $urandom;
      rs1 = 5'($urandom); rs2 = $urandom_range(3) == 0 ? rd : 5'($urandom);
      #1;
      `TB_CHECK(rdata1 == ((we && rd == rs1 && rs1 != 0) ? wdata : model[rs1]), $sformatf("rs1 x%0d", rs1))
      `TB_CHECK(rdata2 == ((we && rd == rs2 && rs2 != 0) ? wdata : model[rs2]), $sformatf("rs2 x%0d", rs2))
      @(negedge clk);
      if (we && rd != 0) model[rd] = wdata;
    end
    `TB_DONE
  end
endmodule
