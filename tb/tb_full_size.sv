// tb_full_size: the CodeTrolley pipeline at its default configuration
// (cached-hash, 16-cycle hash, 256-line hash cache, 4 KiB instruction and
// data memories) running one complete program: an in-place insertion sort
// of 200 signed words, obfuscated with the program key.
//
// The program's four conditional branches (loop exit, inner-loop bound,
// comparison; BGE and BLT) are reversed wherever the key's hash bit is 1.
// The sorted array read back from data memory must match the testbench's
// own sort. Checked from the counters: every branch outcome was resolved
// with the hash bit, the cache missed at most once per static branch, and
// Execute waited at most 15 cycles per miss (so the cache removed nearly
// all of the 16-cycle hash cost). Cycle count and overhead are printed.
`timescale 1ns/1ps
module tb_full_size;
  import ct_pkg::*;
  import tb_rv_pkg::*;

  localparam int N = 200;
  localparam int PLEN = 22;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, key_we, host_imem_we, host_dmem_req, host_dmem_we;
  logic [63:0] key_in;
  logic [31:0] host_addr, host_wdata, host_dmem_rdata;
  logic        halted, illegal_seen;
  perf_t       perf;

  codetrolley_top dut (
    .clk(clk), .rst_n(rst_n), .key_we(key_we), .key_in(key_in),
    .host_imem_we(host_imem_we), .host_dmem_req(host_dmem_req), .host_dmem_we(host_dmem_we),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_dmem_rdata(host_dmem_rdata),
    .halted(halted), .illegal_seen(illegal_seen), .perf(perf));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] prog [PLEN];
  logic [63:0] key = 64'h5EC2_E7C0_DE70_11E1;
  int          arr [N];
  int          sorted [N];

  initial begin
    prog[0]  = ADDI(1, 0, 256);
    prog[1]  = ADDI(2, 0, N);
    prog[2]  = ADDI(3, 0, 1);
    prog[3]  = BGE(3, 2, (21 - 3) * 4);     // outer: i < n ?
    prog[4]  = SLLI(4, 3, 2);
    prog[5]  = ADD(4, 4, 1);
    prog[6]  = LW(5, 4, 0);                 // key = a[i]
    prog[7]  = ADDI(6, 3, -1);              // j = i - 1
    prog[8]  = BLT(6, 0, (16 - 8) * 4);     // inner: j < 0 -> place
    prog[9]  = SLLI(7, 6, 2);
    prog[10] = ADD(7, 7, 1);
    prog[11] = LW(8, 7, 0);
    prog[12] = BGE(5, 8, (16 - 12) * 4);    // key >= a[j] -> place
    prog[13] = SW(8, 7, 4);                 // a[j+1] = a[j]
    prog[14] = ADDI(6, 6, -1);
    prog[15] = JAL(0, (8 - 15) * 4);
    prog[16] = SLLI(7, 6, 2);               // place:
    prog[17] = ADD(7, 7, 1);
    prog[18] = SW(5, 7, 4);                 // a[j+1] = key
    prog[19] = ADDI(3, 3, 1);
    prog[20] = JAL(0, (3 - 20) * 4);
    prog[21] = ECALL();
  end

  initial begin
    int t0, ones;
    logic [31:0] w;
    rst_n = 0; key_we = 0; host_imem_we = 0; host_dmem_req = 0; host_dmem_we = 0;
    host_addr = 0; host_wdata = 0; key_in = 0;
    for (int i = 0; i < N; i++) begin
      arr[i] = int'($urandom_range(2000)) - 1000;
      sorted[i] = arr[i];
    end
    for (int i = 1; i < N; i++)            // reference sort
      for (int j = i; j > 0 && sorted[j - 1] > sorted[j]; j--) begin
        int t; t = sorted[j]; sorted[j] = sorted[j - 1]; sorted[j - 1] = t;
      end
    // a key that reverses some, but not all, of the three branches
    forever begin
      ones = 0;
      foreach (prog[a]) if (is_cond_branch(prog[a])) ones += int'(ref_hash(32'(a * 4), key, 16));
      if (ones inside {[1:2]}) break;
      key = key + 64'h9E37_79B9_7F4A_7C15;
    end
    $display("static branches reversed by the key: %0d of 3", ones);

    repeat (2) @(negedge clk);
    key_in = key; key_we = 1; @(negedge clk); key_we = 0;
    foreach (prog[a]) begin
      host_imem_we = 1; host_addr = 32'(a * 4);
      host_wdata = obfuscate(prog[a], 32'(a * 4), key, 16);
      @(negedge clk);
    end
    host_imem_we = 0;
    for (int i = 0; i < N; i++) begin
      host_dmem_req = 1; host_dmem_we = 1; host_addr = 32'(256 + 4 * i); host_wdata = arr[i];
      @(negedge clk);
    end
    host_dmem_req = 0; host_dmem_we = 0;

    rst_n = 1;
    t0 = 0;
    while (!halted && t0 < 2500000) begin @(negedge clk); t0++; end
    check(halted, "program halted");
    check(!illegal_seen, "no illegal instruction");
    $display("cycles=%0d retired=%0d branches=%0d inverted=%0d hash_stall=%0d raw_stall=%0d hits=%0d misses=%0d redirects=%0d",
             perf.cycles, perf.retired, perf.branches, perf.inverted, perf.hash_stall,
             perf.raw_stall, perf.cache_hits, perf.cache_misses, perf.redirects);
    $display("hash stall overhead: %0.3f %% of cycles",
             100.0 * real'(perf.hash_stall) / real'(perf.cycles));
    check(perf.cache_misses <= 3 && perf.cache_misses > 0, "at most one miss per static branch");
    check(perf.cache_hits + perf.cache_misses == perf.branches, "every branch resolved");
    check(perf.hash_stall <= 15 * perf.cache_misses, "stalls only on misses");
    check(perf.branches > 10000, "large run");
    check(perf.inverted > 0, "some branch outcomes were reversed");

    rst_n = 0;
    for (int i = 0; i < N; i++) begin
      host_dmem_req = 1; host_dmem_we = 0; host_addr = 32'(256 + 4 * i);
      @(negedge clk);
      host_dmem_req = 0;
      w = host_dmem_rdata;
      check(int'(w) == sorted[i], $sformatf("sorted[%0d] = %0d, expected %0d", i, int'(w), sorted[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
