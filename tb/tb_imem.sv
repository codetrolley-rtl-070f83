// tb_imem: instruction memory test. Writes a pseudo-random word to every
// location, then reads them back in random order and checks the one-cycle
// read latency and that the output holds while rd_en is low.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_imem;
  localparam int D = 256;
  logic clk = 0; always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [31:0] rd_addr = 0, wr_addr = 0, wr_data = 0, rd_data;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  imem #(.DEPTH(D)) dut (.*);

  initial begin #(10 * 20000); failures++; `TB_DONE end

  initial begin
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      model[a] = $urandom; wr_en = 1; wr_addr = 32'(a * 4); wr_data = model[a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < 500; k++) begin
      int a; a = $urandom_range(D - 1);
      rd_en = 1; rd_addr = 32'(a * 4) | 32'($urandom_range(3));
      @(negedge clk);
      `TB_CHECK(rd_data == model[a], $sformatf("read %0d", a))
      rd_en = 0; rd_addr = $urandom;
      @(negedge clk);
      `TB_CHECK(rd_data == model[a], $sformatf("hold %0d", a))
    end
    `TB_DONE
  end
endmodule
