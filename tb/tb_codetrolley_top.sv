// tb_codetrolley_top: end-to-end test of the CodeTrolley pipeline.
//
// Six cores run the same test program side by side:
//   0  baseline (no deobfuscation), plain program
//   1  stalled-hash, 16-cycle hash, program obfuscated with the key
//   2  cached-hash, 16-cycle hash (the default configuration), obfuscated
//   3  stalled-hash, 8-cycle hash, obfuscated for 8 rounds
//   4  cached-hash, 8-cycle hash, obfuscated for 8 rounds
//   5  cached-hash, 16-cycle hash, obfuscated, but loaded with a wrong key
// The program walks an array in a loop with four conditional branches of
// different kinds (BEQ, BNE, BGEU, BLT), a call and return (JAL/JALR), word
// and byte loads and stores, and leaves a running sum per element, a final
// sum, a count and a sign-extended byte in data memory. A store that would
// spoil the final sum follows the ECALL and must never execute. The expected memory
// image is computed by the testbench directly from the array, without any
// instruction semantics. Cores 0-4 must reproduce it; core 5 must not. Core
// 5 then gets the right key (which also empties its hash cache) and runs the
// program again, which must now pass.
// Cycle counts must order as the evaluation describes: baseline fastest,
// stalled-hash slowest, the cached design in between and 8-cycle no slower
// than 16-cycle. Each mechanism (hash stall, cache hit, cache miss, inverted
// branch, RAW interlock stall, redirect, halt, wrong-key misbehaviour, key
// reload) is counted and must have happened.
`timescale 1ns/1ps
module tb_codetrolley_top;
  import ct_pkg::*;
  import tb_rv_pkg::*;

  localparam int NC = 6;
  localparam int N  = 24;
  localparam deobf_mode_e MODES [NC] = '{MODE_BASELINE, MODE_STALLED, MODE_CACHED,
                                         MODE_STALLED, MODE_CACHED, MODE_CACHED};
  localparam int HC [NC] = '{16, 16, 16, 8, 8, 16};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n;
  logic [NC-1:0]    key_we;
  logic [63:0]      key_in   [NC];
  logic             host_imem_we, host_dmem_req, host_dmem_we;
  logic [31:0]      host_addr;
  logic [31:0]      host_iw  [NC];
  logic [31:0]      host_dw;
  logic [31:0]      host_rd  [NC];
  logic [NC-1:0]    halted, illegal;
  perf_t            perf     [NC];

  for (genvar g = 0; g < NC; g++) begin : g_core
    codetrolley_top #(.DEOBF_MODE(MODES[g]), .HASH_CYCLES(HC[g])) dut (
      .clk(clk), .rst_n(rst_n),
      .key_we(key_we[g]), .key_in(key_in[g]),
      .host_imem_we(host_imem_we), .host_dmem_req(host_dmem_req),
      .host_dmem_we(host_dmem_we), .host_addr(host_addr),
      .host_wdata(g_core[g].wsel), .host_dmem_rdata(host_rd[g]),
      .halted(halted[g]), .illegal_seen(illegal[g]), .perf(perf[g]));
    logic [31:0] wsel;
    assign wsel = host_imem_we ? host_iw[g] : host_dw;
  end

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- program ----------------
  localparam int PLEN = 37;
  localparam int L_LOOP = 6, L_EVEN = 11, L_SMALL = 15, L_NEXT = 16, L_BIG = 18,
                 L_CONT = 19, L_FUNC = 34;
  logic [31:0] prog [PLEN];
  initial begin
    prog[0]  = ADDI(3, 0, 256);
    prog[1]  = ADDI(2, 0, N);
    prog[2]  = ADDI(1, 0, 0);
    prog[3]  = ADDI(8, 0, 100);
    prog[4]  = ADDI(9, 0, 0);
    prog[5]  = ADDI(10, 0, 512);
    prog[6]  = LW(4, 3, 0);
    prog[7]  = ANDI(5, 4, 1);
    prog[8]  = BEQ(5, 0, (L_EVEN - 8) * 4);
    prog[9]  = ADD(1, 1, 4);
    prog[10] = JAL(0, (L_NEXT - 10) * 4);
    prog[11] = SLTI(6, 4, 50);
    prog[12] = BNE(6, 0, (L_SMALL - 12) * 4);
    prog[13] = SUB(1, 1, 4);
    prog[14] = JAL(0, (L_NEXT - 14) * 4);
    prog[15] = JAL(11, (L_FUNC - 15) * 4);
    prog[16] = BGEU(4, 8, (L_BIG - 16) * 4);
    prog[17] = JAL(0, (L_CONT - 17) * 4);
    prog[18] = ADDI(9, 9, 1);
    prog[19] = SW(1, 10, 0);
    prog[20] = SB(4, 10, 256);
    prog[21] = ADDI(3, 3, 4);
    prog[22] = ADDI(10, 10, 4);
    prog[23] = ADDI(2, 2, -1);
    prog[24] = BLT(0, 2, (L_LOOP - 24) * 4);
    prog[25] = SW(1, 0, 1024);
    prog[26] = SW(9, 0, 1028);
    prog[27] = LB(12, 0, 768);
    prog[28] = SW(12, 0, 1032);
    prog[29] = LUI(13, 20'hABCDE);
    prog[30] = ADDI(13, 13, 12'h123);
    prog[31] = SW(13, 0, 1036);
    prog[32] = ECALL();
    prog[33] = SW(0, 0, 1024);              // must never execute: follows ECALL
    prog[34] = SLLI(7, 4, 1);
    prog[35] = ADD(1, 1, 7);
    prog[36] = JALR(0, 11, 0);
  end
  localparam int BR [4] = '{8, 12, 16, 24};

  // ---------------- data and expected image ----------------
  logic [31:0] data [N];
  logic [31:0] exp_out [N];
  logic [31:0] exp_sum, exp_big, exp_b0;

  task automatic make_data();
    logic [31:0] s, v, sum, big;
    s = 32'h1234_5678;
    sum = 0; big = 0;
    for (int i = 0; i < N; i++) begin
      s = s * 32'd1103515245 + 32'd12345;
      v = {24'd0, s[23:16]};
      if (i % 5 == 0) v = -v;                 // some negative values
      data[i] = v;
      if (v[0]) sum = sum + v;
      else if ($signed(v) < 50) sum = sum + (v << 1);
      else sum = sum - v;
      if (v >= 32'd100) big = big + 1;
      exp_out[i] = sum;
    end
    exp_sum = sum;
    exp_big = big;
    exp_b0  = {{24{data[0][7]}}, data[0][7:0]};
  endtask

  // ---------------- keys ----------------
  logic [63:0] key, bad_key;
  task automatic pick_keys();
    int ones16, ones8;
    key = 64'h0F1E_2D3C_4B5A_6978;
    forever begin
      ones16 = 0; ones8 = 0;
      foreach (BR[b]) begin
        ones16 += int'(ref_hash(32'(BR[b] * 4), key, 16));
        ones8  += int'(ref_hash(32'(BR[b] * 4), key, 8));
      end
      if (ones16 inside {[1:3]} && ones8 inside {[1:3]}) break;
      key = key + 64'h9E37_79B9_7F4A_7C15;
    end
    bad_key = key ^ 64'h1;
    while (ref_hash(32'(24 * 4), bad_key, 16) == ref_hash(32'(24 * 4), key, 16))
      bad_key = bad_key + 64'h0000_0100_0000_0001;
  endtask

  // ---------------- host access ----------------
  task automatic load_all();
    rst_n = 1'b0;
    @(negedge clk);
    for (int a = 0; a < PLEN; a++) begin
      host_imem_we = 1'b1;
      host_addr    = 32'(a * 4);
      for (int c = 0; c < NC; c++)
        host_iw[c] = (MODES[c] == MODE_BASELINE) ? prog[a] : obfuscate(prog[a], 32'(a * 4), key, HC[c]);
      @(negedge clk);
    end
    host_imem_we = 1'b0;
    for (int a = 0; a < 256; a++) begin   // 0x000..0x3FC cleared, then data
      host_dmem_req = 1'b1; host_dmem_we = 1'b1;
      host_addr = 32'(a * 4);
      host_dw   = (a >= 64 && a < 64 + N) ? data[a - 64] : 32'd0;
      @(negedge clk);
    end
    host_dmem_req = 1'b0; host_dmem_we = 1'b0;
  endtask

  task automatic read_word(input int addr, output logic [31:0] w [NC]);
    host_dmem_req = 1'b1; host_dmem_we = 1'b0; host_addr = 32'(addr);
    @(negedge clk);
    host_dmem_req = 1'b0;
    w = host_rd;
  endtask

  function automatic bit image_ok(input int c, input logic [31:0] mem [N + 4]);
    for (int i = 0; i < N; i++) if (mem[i] !== exp_out[i]) return 0;
    return mem[N] === exp_sum && mem[N + 1] === exp_big && mem[N + 2] === exp_b0 &&
           mem[N + 3] === 32'hABCDE123;
  endfunction

  logic [31:0] img [NC][N + 4];
  task automatic read_images(input logic [NC-1:0] which);
    logic [31:0] w [NC];
    rst_n = 1'b0;
    for (int i = 0; i < N; i++) begin
      read_word(512 + 4 * i, w);
      for (int c = 0; c < NC; c++) img[c][i] = w[c];
    end
    for (int k = 0; k < 4; k++) begin
      read_word(1024 + 4 * k, w);
      for (int c = 0; c < NC; c++) img[c][N + k] = w[c];
    end
    // stored bytes (low byte of each word at 0x300 + 4i)
    for (int i = 0; i < N; i++) begin
      read_word(768 + 4 * i, w);
      for (int c = 0; c < NC; c++)
        if (which[c]) check(w[c] === {24'd0, data[i][7:0]}, $sformatf("core %0d byte store %0d got %h exp %h", c, i, w[c], data[i]));
    end
  endtask

  task automatic run(input logic [NC-1:0] which, output int cycles_out [NC]);
    int t0;
    @(negedge clk);
    rst_n = 1'b1;
    t0 = cyc;
    while ((halted & which) != which && cyc - t0 < 100000) @(negedge clk);
    repeat (4) @(negedge clk);
    for (int c = 0; c < NC; c++) cycles_out[c] = int'(perf[c].cycles);
  endtask

  // mechanism counters
  int n_hash_stall, n_hit, n_miss, n_inv, n_raw, n_redir, n_halt, n_wrongkey, n_reload;
  int cyc_run [NC];
  logic [NC-1:0] perf_ok;

  initial begin
    rst_n = 1'b0; key_we = '0; host_imem_we = 0; host_dmem_req = 0; host_dmem_we = 0;
    host_addr = 0; host_dw = 0;
    for (int c = 0; c < NC; c++) begin key_in[c] = '0; host_iw[c] = '0; end
    make_data();
    pick_keys();
    repeat (3) @(negedge clk);
    for (int c = 0; c < NC; c++) key_in[c] = (c == 5) ? bad_key : key;
    key_we = '1;
    @(negedge clk);
    key_we = '0;
    load_all();
    run('1, cyc_run);
    for (int c = 0; c < NC; c++) n_halt += int'(halted[c]);
    // counters must be read before the reset that the image readout needs
    for (int c = 0; c < NC; c++) begin
      $display("core %0d mode %0d H=%0d: cycles=%0d retired=%0d branches=%0d inverted=%0d hash_stall=%0d raw_stall=%0d hits=%0d misses=%0d redirects=%0d",
               c, MODES[c], HC[c], perf[c].cycles, perf[c].retired, perf[c].branches,
               perf[c].inverted, perf[c].hash_stall, perf[c].raw_stall, perf[c].cache_hits,
               perf[c].cache_misses, perf[c].redirects);
      if (c < 5) begin
        n_hash_stall += int'(perf[c].hash_stall != 0);
        n_hit        += int'(perf[c].cache_hits);
        n_miss       += int'(perf[c].cache_misses);
        n_inv        += int'(perf[c].inverted);
        n_raw        += int'(perf[c].raw_stall != 0);
        n_redir      += int'(perf[c].redirects);
      end
    end
    for (int c = 1; c < 5; c++)
      $display("normalized runtime core %0d: %0.3f", c, real'(cyc_run[c]) / real'(cyc_run[0]));
    check(perf[0].hash_stall == 0 && perf[0].inverted == 0, "baseline never waits for a hash");
    check(perf[2].cache_misses <= 4 && perf[2].cache_hits > 0,
          "cached core misses at most once per static branch");
    check(perf[1].cache_hits == 0 && perf[1].cache_misses == 0, "stalled core has no cache");
    for (int c = 0; c < 5; c++) check(!illegal[c], $sformatf("core %0d no illegal instruction", c));
    // cycle ordering from the evaluation
    check(cyc_run[0] < cyc_run[2], "cached-16 slower than baseline");
    check(cyc_run[2] < cyc_run[1], "cached-16 faster than stalled-16");
    check(cyc_run[4] < cyc_run[3], "cached-8 faster than stalled-8");
    check(cyc_run[3] < cyc_run[1], "stalled-8 faster than stalled-16");
    check(cyc_run[4] <= cyc_run[2], "cached-8 no slower than cached-16");
    // the stall cost of an uncached branch is at most H-1 cycles
    check(perf[1].hash_stall <= perf[1].branches * 15, "stalled-16 at most 15 stall cycles per branch");
    check(perf[3].hash_stall <= perf[3].branches * 7,  "stalled-8 at most 7 stall cycles per branch");
    check(perf[1].branches == perf[0].branches, "same number of branches executed");

    read_images(6'b011111);
    for (int c = 0; c < 5; c++) check(image_ok(c, img[c]), $sformatf("core %0d result image", c));
    check(!image_ok(5, img[5]), "wrong key gives wrong results");
    if (!image_ok(5, img[5])) n_wrongkey++;

    // load the right key into core 5 and run it again
    key_in[5] = key;
    key_we = 6'b100000;
    @(negedge clk);
    key_we = '0;
    load_all();
    run(6'b100000, cyc_run);
    check(perf[5].cache_misses <= 4 && perf[5].cache_misses > 0, "key reload emptied the cache");
    read_images(6'b100000);
    check(image_ok(5, img[5]), "core 5 correct after key reload");
    if (image_ok(5, img[5])) n_reload++;

    $display("mechanisms: hash_stall=%0d hit=%0d miss=%0d inverted=%0d raw=%0d redirect=%0d halt=%0d wrongkey=%0d reload=%0d",
             n_hash_stall, n_hit, n_miss, n_inv, n_raw, n_redir, n_halt, n_wrongkey, n_reload);
    check(n_hash_stall > 0, "hash stall happened");
    check(n_hit > 0,        "cache hit happened");
    check(n_miss > 0,       "cache miss happened");
    check(n_inv > 0,        "inverted branch happened");
    check(n_raw > 0,        "RAW interlock happened");
    check(n_redir > 0,      "redirect happened");
    check(n_halt == NC,     "all cores halted");
    check(n_wrongkey > 0,   "wrong key misbehaved");
    check(n_reload > 0,     "key reload worked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
