// deobf_unit: branch deobfuscation for the pipeline (hash, hash cache, XOR).
//
// Every conditional branch of an obfuscated program was reversed by the
// compiler if hash(branch address, program key) is 1. This unit recovers that
// bit at run time and XORs it with the branch condition computed in Execute,
// so the branch behaves as in the original program.
//
// Operation (MODE selects the configuration):
//  * MODE_CACHED (the proposed design): when a branch is in Decode the hash
//    cache is looked up and, on a miss, the multi-cycle hash is started. On a
//    hit the bit travels with the branch into Execute, where it is ready at
//    once. On a miss Execute waits (ex_ready low) until the hash finishes;
//    the finished bit is written into the cache in the cycle it appears.
//  * MODE_STALLED: as above without the cache.
//  * MODE_BASELINE: no hash; ex_taken equals the branch condition.
// There is a single hash unit. Its owner is the branch in Decode or the one
// in Execute; a Decode branch starts its hash when the unit is free or is
// released in the same cycle. A redirect from Execute (flush_d) aborts a
// hash owned by the flushed Decode branch. A bit that has been computed while
// the branch still waits in Decode is kept until the branch moves on.
//
// Interface timing: d_* describe the instruction in Decode this cycle and
// d_advance says it moves into Execute at the next edge; ex_* describe the
// instruction in Execute and ex_leave says it leaves Execute at the next
// edge. ex_ready, ex_taken and ex_bit are combinational for the current
// Execute branch. A branch that hits in Decode with a hash latency of H
// cycles sees no Execute stall; a miss whose hash starts in Decode and which
// enters Execute one cycle later waits H-1 cycles there.
// Hashing in Decode, stalling Execute, XOR with the branch signal, and the
// cache behaviour follow the paper; ownership, abort and fill timing are this
// design's own.
module deobf_unit
  import ct_pkg::*;
#(
  parameter deobf_mode_e MODE        = MODE_CACHED,
  parameter int unsigned HASH_CYCLES = 16,
  parameter int unsigned CACHE_LINES = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  input  logic             cache_flush,
  // Decode
  input  logic             d_valid,
  input  logic             d_is_branch,
  input  logic [31:0]      d_pc,
  input  logic             d_advance,
  input  logic             flush_d,
  // Execute
  input  logic             ex_valid,
  input  logic             ex_is_branch,
  input  logic             ex_cond,
  input  logic             ex_leave,
  output logic             ex_ready,
  output logic             ex_taken,
  output logic             ex_bit,
  output logic             ex_from_cache
);
  typedef enum logic [1:0] {OWN_NONE, OWN_D, OWN_EX} owner_e;

  localparam bit HASH_ON  = (MODE != MODE_BASELINE);
  localparam bit CACHE_ON = (MODE == MODE_CACHED);

  owner_e own;
  logic   h_start, h_clear, h_ready, h_busy, h_valid, h_result;
  logic [31:0] h_pc;
  logic   c_hit_raw, c_hit, c_bit, c_fill;
  logic   fill_pending;
  logic   ex_hit_q, ex_hitbit_q;
  logic   d_br;

  assign d_br = HASH_ON && d_valid && d_is_branch;

  // --- hash cache ---------------------------------------------------------
  hash_cache #(.LINES(CACHE_LINES)) u_cache (
    .clk      (clk),
    .rst_n    (rst_n),
    .flush    (cache_flush),
    .lookup_pc(d_pc),
    .hit      (c_hit_raw),
    .bit_out  (c_bit),
    .fill     (c_fill),
    .fill_pc  (h_pc),
    .fill_bit (h_result)
  );
  assign c_hit = CACHE_ON && c_hit_raw;

  // --- hash function ------------------------------------------------------
  // Release the unit when its Execute owner leaves, or abort it when its
  // Decode owner is flushed.
  assign h_clear = ((own == OWN_EX) && ex_leave) || ((own == OWN_D) && flush_d);
  assign h_start = d_br && !c_hit && (own != OWN_D) && h_ready && !flush_d;

  branch_hash #(.HASH_CYCLES(HASH_CYCLES)) u_hash (
    .clk   (clk),
    .rst_n (rst_n),
    .start (h_start),
    .pc    (d_pc),
    .key   (key),
    .clear (h_clear),
    .ready (h_ready),
    .busy  (h_busy),
    .valid (h_valid),
    .result(h_result),
    .res_pc(h_pc)
  );

  assign c_fill = CACHE_ON && h_valid && fill_pending && !cache_flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own          <= OWN_NONE;
      fill_pending <= 1'b0;
      ex_hit_q     <= 1'b0;
      ex_hitbit_q  <= 1'b0;
    end else begin
      // owner of the hash unit
      if (h_start)                      own <= d_advance ? OWN_EX : OWN_D;
      else if (own == OWN_D && flush_d) own <= OWN_NONE;
      else if (own == OWN_D && d_advance) own <= OWN_EX;
      else if (own == OWN_EX && ex_leave) own <= OWN_NONE;

      if (h_start)             fill_pending <= 1'b1;
      else if (c_fill || h_clear) fill_pending <= 1'b0;

      // cache result travels with the branch into Execute
      if (d_advance) begin
        ex_hit_q    <= c_hit && !(own == OWN_D);
        ex_hitbit_q <= c_bit;
      end else if (ex_leave) begin
        ex_hit_q    <= 1'b0;
      end
    end
  end

  // --- Execute: wait for the bit, XOR it with the branch condition ---------
  logic ex_br;
  assign ex_br = HASH_ON && ex_valid && ex_is_branch;

  always_comb begin
    ex_from_cache = ex_br && ex_hit_q;
    if (!ex_br) begin
      ex_ready = 1'b1;
      ex_bit   = 1'b0;
    end else if (ex_hit_q) begin
      ex_ready = 1'b1;
      ex_bit   = ex_hitbit_q;
    end else begin
      ex_ready = (own == OWN_EX) && h_valid;
      ex_bit   = h_result;
    end
    ex_taken = ex_cond ^ ex_bit;
  end

  // An Execute branch may only leave once its bit is known.
  a_leave_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                  (ex_leave && ex_valid) |-> ex_ready);
endmodule
