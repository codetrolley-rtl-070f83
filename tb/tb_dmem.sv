// tb_dmem: data memory test. Random word, half-word and byte writes with
// byte enables and random reads, compared with a byte-array model; the read
// word must appear one cycle after the request.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_dmem;
  localparam int D = 64;
  logic clk = 0; always #5 clk = ~clk;
  logic req = 0, we = 0;
  logic [3:0] be = 0;
  logic [31:0] addr = 0, wdata = 0, rdata;
  logic [7:0] model [D * 4];
  int checks = 0, failures = 0;

  dmem #(.DEPTH(D)) dut (.*);

  initial begin #(10 * 20000); failures++; `TB_DONE end

  initial begin
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      req = 1; we = 1; be = 4'hF; addr = 32'(a * 4); wdata = $urandom;
      for (int b = 0; b < 4; b++) model[a * 4 + b] = wdata[8 * b +: 8];
      @(negedge clk);
    end
    for (int k = 0; k < 2000; k++) begin
      int a; a = $urandom_range(D - 1);
      addr = 32'(a * 4);
      req = 1;
      if ($urandom_range(1)) begin
        we = 1; be = 4'($urandom); wdata = $urandom;
        for (int b = 0; b < 4; b++) if (be[b]) model[a * 4 + b] = wdata[8 * b +: 8];
        @(negedge clk);
      end else begin
        we = 0;
        @(negedge clk);
        req = 0;
        `TB_CHECK(rdata == {model[a * 4 + 3], model[a * 4 + 2], model[a * 4 + 1], model[a * 4]},
                  $sformatf("read word %0d", a))
      end
    end
    `TB_DONE
  end
endmodule
