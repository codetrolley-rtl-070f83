// tb_hash_cache: hash-cache test. Random fills and lookups over a set of
// addresses that alias in the 256 lines, compared with a model of a
// direct-mapped cache (one entry per line, index pc[9:2]); also checks that
// flush empties it.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_hash_cache;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, flush = 0, fill = 0, fill_bit = 0, hit, bit_out;
  logic [31:0] lookup_pc = 0, fill_pc = 0;
  int checks = 0, failures = 0, hits = 0, misses = 0;

  hash_cache #(.LINES(256)) dut (.*);

  // model: line -> (valid, full address, bit)
  bit          m_v [256];
  logic [31:0] m_pc [256];
  bit          m_b [256];

  initial begin #(10 * 100000); failures++; `TB_DONE end

  function automatic logic [31:0] rand_pc();
    // 512 distinct word addresses in a 4 KiB window plus a far alias
    logic [31:0] p; p = {20'd0, 10'($urandom), 2'b00};
    if ($urandom_range(3) == 0) p[31:12] = 20'hABCDE;
    return p;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 6000; k++) begin
      int li;
      lookup_pc = rand_pc();
      li = int'(lookup_pc[9:2]);
      #1;
      if (m_v[li] && m_pc[li] == lookup_pc) begin
        hits++;
        `TB_CHECK(hit && bit_out == m_b[li], "hit")
      end else begin
        misses++;
        `TB_CHECK(!hit, "miss")
      end
      fill = $urandom_range(1); fill_pc = rand_pc(); fill_bit = 1'($urandom);
      flush = (k == 3000);
      @(negedge clk);
      if (flush) for (int i = 0; i < 256; i++) m_v[i] = 0;
      else if (fill) begin
        m_v[fill_pc[9:2]] = 1; m_pc[fill_pc[9:2]] = fill_pc; m_b[fill_pc[9:2]] = fill_bit;
      end
      fill = 0; flush = 0;
    end
    `TB_CHECK(hits > 200 && misses > 200, "hits and misses exercised")
    `TB_DONE
  end
endmodule
