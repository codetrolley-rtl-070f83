// tb_branch_hash: hash unit test for the two latencies evaluated (8 and 16
// cycles). For random addresses and keys it checks the result against the
// testbench reference model, that valid rises exactly HASH_CYCLES cycles
// after start, that the result is held until clear, that clear aborts a
// computation and that start is accepted in the cycle of a clear.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_branch_hash;
  import tb_rv_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;

  logic        start [2], clear [2], ready [2], busy [2], valid [2], result [2];
  logic [31:0] pc [2], res_pc [2];
  logic [63:0] key [2];
  localparam int H [2] = '{8, 16};

  for (genvar g = 0; g < 2; g++) begin : g_h
    branch_hash #(.HASH_CYCLES(H[g])) dut (
      .clk(clk), .rst_n(rst_n), .start(start[g]), .pc(pc[g]), .key(key[g]),
      .clear(clear[g]), .ready(ready[g]), .busy(busy[g]), .valid(valid[g]),
      .result(result[g]), .res_pc(res_pc[g]));
  end

  initial begin #(10 * 100000); failures++; `TB_DONE end

  task automatic one(input int g, input bit clear_with_start);
    int lat;
    logic exp;
    pc[g] = $urandom & ~32'h3; key[g] = {$urandom, $urandom};
    exp = ref_hash(pc[g], key[g], H[g]);
    `TB_CHECK(ready[g] || clear[g], "ready before start")
    start[g] = 1;
    @(negedge clk);
    start[g] = 0; clear[g] = 0;
    pc[g] = $urandom; key[g] = key[g];
    lat = 1;
    while (!valid[g] && lat < 100) begin @(negedge clk); lat++; end
    `TB_CHECK(lat == H[g], $sformatf("H=%0d latency %0d", H[g], lat))
    `TB_CHECK(result[g] == exp, $sformatf("H=%0d result", H[g]))
    repeat (3) @(negedge clk);
    `TB_CHECK(valid[g] && result[g] == exp && !ready[g], "result held")
    if (clear_with_start) clear[g] = 1;   // next start in the same cycle
    else begin clear[g] = 1; @(negedge clk); clear[g] = 0; end
  endtask

  int ones = 0;
  initial begin
    for (int g = 0; g < 2; g++) begin start[g] = 0; clear[g] = 0; pc[g] = 0; key[g] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int g = 0; g < 2; g++) begin
      `TB_CHECK(ready[g] && !valid[g] && !busy[g], "idle after reset")
      for (int k = 0; k < 60; k++) begin
        one(g, k % 2 == 1);
        ones += int'(result[g]);
      end
      clear[g] = 1; @(negedge clk); clear[g] = 0;
      // abort in the middle
      pc[g] = 32'h40; key[g] = 64'h1234; start[g] = 1; @(negedge clk); start[g] = 0;
      repeat (3) @(negedge clk);
      `TB_CHECK(busy[g], "busy while computing")
      clear[g] = 1; @(negedge clk); clear[g] = 0;
      repeat (H[g] + 2) @(negedge clk);
      `TB_CHECK(!valid[g] && ready[g], "clear aborts")
    end
    `TB_CHECK(ones > 20 && ones < 100, "result bit takes both values")
    `TB_DONE
  end
endmodule
