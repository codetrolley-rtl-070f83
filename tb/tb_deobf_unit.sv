// tb_deobf_unit: deobfuscation unit test on four configurations:
//   0 cached-hash, 16-cycle hash   1 stalled-hash, 16-cycle hash
//   2 baseline                     3 cached-hash, 8-cycle hash
// A small driver plays the Decode and Execute stages: an instruction sits
// in Decode for a chosen number of cycles, moves to Execute and leaves as
// soon as ex_ready is high. Checked for each branch: the bit XORed into the
// branch equals the reference hash of its address and the key, the number of
// cycles Execute waits (H-1 for a miss that spent one cycle in Decode, fewer
// if it waited longer in Decode, 0 for a cache hit or in the baseline), that
// hits occur only in the cached configurations, that a flushed branch's hash
// is abandoned, that back-to-back misses each wait H-1 cycles, and that a
// cache flush forces misses again.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_deobf_unit;
  import ct_pkg::*;
  import tb_rv_pkg::*;
  localparam int NI = 4;
  localparam deobf_mode_e MODES [NI] = '{MODE_CACHED, MODE_STALLED, MODE_BASELINE, MODE_CACHED};
  localparam int H [NI] = '{16, 16, 16, 8};

  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  logic [63:0] key = 64'hDEAD_BEEF_0BAD_F00D;
  logic cache_flush [NI];
  logic d_valid [NI], d_is_branch [NI], d_advance [NI], flush_d [NI];
  logic [31:0] d_pc [NI];
  logic ex_valid [NI], ex_is_branch [NI], ex_cond [NI], ex_leave [NI];
  logic ex_ready [NI], ex_taken [NI], ex_bit [NI], ex_from_cache [NI];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_u
    deobf_unit #(.MODE(MODES[g]), .HASH_CYCLES(H[g]), .CACHE_LINES(256)) dut (
      .clk(clk), .rst_n(rst_n), .key(key), .cache_flush(cache_flush[g]),
      .d_valid(d_valid[g]), .d_is_branch(d_is_branch[g]), .d_pc(d_pc[g]),
      .d_advance(d_advance[g]), .flush_d(flush_d[g]),
      .ex_valid(ex_valid[g]), .ex_is_branch(ex_is_branch[g]), .ex_cond(ex_cond[g]),
      .ex_leave(ex_leave[g]), .ex_ready(ex_ready[g]), .ex_taken(ex_taken[g]),
      .ex_bit(ex_bit[g]), .ex_from_cache(ex_from_cache[g]));
    assign ex_leave[g] = ex_valid[g] && ex_ready[g];
  end

  initial begin #(10 * 200000); failures++; `TB_DONE end

  function automatic logic exp_bit(input int u, input logic [31:0] pc);
    return (MODES[u] == MODE_BASELINE) ? 1'b0 : ref_hash(pc, key, H[u]);
  endfunction

  // One instruction through Decode (dcyc cycles) and Execute. Returns the
  // cycles Execute waited and whether the bit came from the cache.
  task automatic issue(input int u, input logic [31:0] pc, input bit br, input bit cond,
                       input int dcyc, output int wait_c, output bit from_cache);
    d_valid[u] = 1; d_is_branch[u] = br; d_pc[u] = pc; d_advance[u] = 0;
    repeat (dcyc - 1) @(negedge clk);
    d_advance[u] = 1;
    @(negedge clk);
    d_valid[u] = 0; d_advance[u] = 0; d_pc[u] = $urandom;
    ex_valid[u] = 1; ex_is_branch[u] = br; ex_cond[u] = cond;
    wait_c = 0;
    #1;
    while (!ex_ready[u] && wait_c < 100) begin @(negedge clk); wait_c++; #1; end
    from_cache = ex_from_cache[u];
    `TB_CHECK(ex_taken[u] == (cond ^ (br ? exp_bit(u, pc) : 1'b0)),
              $sformatf("unit %0d pc %h taken", u, pc))
    @(negedge clk);
    ex_valid[u] = 0;
  endtask

  int w; bit fc;
  int n_hit [NI], n_stall [NI];
  logic [31:0] pcs [8];

  initial begin
    for (int u = 0; u < NI; u++) begin
      cache_flush[u] = 0; d_valid[u] = 0; d_is_branch[u] = 0; d_advance[u] = 0; flush_d[u] = 0;
      d_pc[u] = 0; ex_valid[u] = 0; ex_is_branch[u] = 0; ex_cond[u] = 0;
      n_hit[u] = 0; n_stall[u] = 0;
    end
    for (int i = 0; i < 8; i++) pcs[i] = 32'h100 + 32'(i * 36);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int u = 0; u < NI; u++) begin
      int miss_wait;
      miss_wait = (MODES[u] == MODE_BASELINE) ? 0 : H[u] - 1;
      // first pass: all misses, one cycle in Decode
      for (int i = 0; i < 8; i++) begin
        issue(u, pcs[i], 1, 1'($urandom), 1, w, fc);
        `TB_CHECK(w == miss_wait && !fc, $sformatf("unit %0d first pass wait %0d", u, w))
        n_stall[u] += w;
        issue(u, pcs[i] + 4, 0, 1'($urandom), 1, w, fc);
        `TB_CHECK(w == 0, "non-branch never waits")
      end
      // second pass: hits in the cached units
      for (int i = 0; i < 8; i++) begin
        issue(u, pcs[i], 1, 1'($urandom), 1, w, fc);
        if (MODES[u] == MODE_CACHED) begin
          `TB_CHECK(w == 0 && fc, $sformatf("unit %0d hit wait %0d", u, w))
          n_hit[u] += int'(fc);
        end else begin
          `TB_CHECK(w == miss_wait && !fc, $sformatf("unit %0d second pass wait %0d", u, w))
        end
      end
      // a miss that waits k cycles in Decode hides k-1 cycles of the hash
      for (int k = 2; k < 6; k++) begin
        issue(u, 32'h800 + 32'(k * 4), 1, 1'($urandom), k, w, fc);
        `TB_CHECK(w == ((miss_wait > k - 1) ? miss_wait - (k - 1) : 0),
                  $sformatf("unit %0d decode wait %0d gave %0d", u, k, w))
      end
      // a branch flushed in Decode abandons its hash; the next one starts at once
      d_valid[u] = 1; d_is_branch[u] = 1; d_pc[u] = 32'hC00;
      @(negedge clk);
      d_valid[u] = 0; flush_d[u] = 1;
      @(negedge clk);
      flush_d[u] = 0;
      issue(u, 32'hC40, 1, 1'($urandom), 1, w, fc);
      `TB_CHECK(w == miss_wait, $sformatf("unit %0d after flush wait %0d", u, w))
      // back-to-back misses: the second waits in Decode behind the first
      begin
        int w1, w2;
        d_valid[u] = 1; d_is_branch[u] = 1; d_pc[u] = 32'hD00; d_advance[u] = 1;
        @(negedge clk);
        d_pc[u] = 32'hD04; d_advance[u] = 0;
        ex_valid[u] = 1; ex_is_branch[u] = 1; ex_cond[u] = 0;
        w1 = 0; #1;
        while (!ex_ready[u] && w1 < 100) begin @(negedge clk); w1++; #1; end
        `TB_CHECK(ex_bit[u] == exp_bit(u, 32'hD00), "first of pair bit")
        d_advance[u] = 1;
        @(negedge clk);
        d_valid[u] = 0; d_advance[u] = 0; ex_cond[u] = 1;
        w2 = 0; #1;
        while (!ex_ready[u] && w2 < 100) begin @(negedge clk); w2++; #1; end
        `TB_CHECK(ex_taken[u] == !exp_bit(u, 32'hD04), "second of pair taken")
        @(negedge clk);
        ex_valid[u] = 0;
        `TB_CHECK(w1 == miss_wait && w2 == miss_wait,
                  $sformatf("unit %0d back-to-back waits %0d %0d", u, w1, w2))
      end
      // cache flush: the next visit misses again
      cache_flush[u] = 1; @(negedge clk); cache_flush[u] = 0;
      issue(u, pcs[0], 1, 0, 1, w, fc);
      `TB_CHECK(w == miss_wait && !fc, $sformatf("unit %0d after cache flush wait %0d", u, w))
    end
    `TB_CHECK(n_hit[0] == 8 && n_hit[3] == 8 && n_hit[1] == 0 && n_hit[2] == 0, "hits only when cached")
    `TB_CHECK(n_stall[1] == 8 * 15 && n_stall[3] == 8 * 7 && n_stall[2] == 0, "stall totals")
    `TB_DONE
  end
endmodule
