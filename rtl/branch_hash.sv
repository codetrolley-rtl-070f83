// branch_hash: multi-cycle keyed hash of a branch address to one bit.
//
// The obfuscator reverses a branch when a hash of the branch's identity (its
// address) and the secret program key is 1; this unit recomputes that bit in
// hardware. It is iterative: one round per cycle, HASH_CYCLES rounds, so the
// result is known HASH_CYCLES cycles after start (start sampled in cycle t,
// valid high from cycle t + HASH_CYCLES). The result and the address it
// belongs to are then held (valid high) until clear. start is accepted only
// when ready is high; clear aborts a computation in progress or releases a
// held result, and a start in the same cycle as clear begins a new one.
//
// Round function (this design's own; the paper asks for "a cryptographic hash
// with a binary output" but names none). With the key split into words k0
// (bits 31:0) and k1 (bits 63:32) and the state (v0, v1):
//   initial  v0 = pc ^ k0,            v1 = k1 ^ 32'h9E3779B9
//   round r  v0' = v0 + v1 + (r odd ? k1 : k0)
//            v1' = rotl(v1, 7) ^ v0'
//            v0''= rotl(v0', 13) ^ {4{r[7:0]}}
//   output   parity of (v0 ^ v1) after HASH_CYCLES rounds
// It is an add-rotate-xor mixer chosen for its small size, not a vetted
// cryptographic function; a real design would put its own function here with
// the same interface. The paper evaluates 8- and 16-cycle hash functions.
module branch_hash
  import ct_pkg::*;
#(
  parameter int unsigned HASH_CYCLES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [31:0]      pc,
  input  logic [KEY_W-1:0] key,
  input  logic             clear,
  output logic             ready,
  output logic             busy,
  output logic             valid,
  output logic             result,
  output logic [31:0]      res_pc
);
  localparam int unsigned CW = $clog2(HASH_CYCLES + 1);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} state_e;

  state_e          state;
  logic [CW-1:0]   rnd;       // rounds completed
  logic [31:0]     v0, v1;
  logic [31:0]     n0, n1;    // state after this cycle's round
  logic [31:0]     i0, i1;    // round input
  logic [31:0]     t0;
  logic [CW-1:0]   r_in;

  function automatic logic [31:0] rotl(input logic [31:0] x, input int unsigned s);
    return (x << s) | (x >> (32 - s));
  endfunction

  assign ready = (state == S_IDLE) || clear;
  assign busy  = (state == S_BUSY);
  assign valid = (state == S_DONE);
  assign result = ^(v0 ^ v1);

  // Round datapath: a new start rounds the initial state, otherwise the
  // held state is rounded.
  always_comb begin
    if (start && ready) begin
      i0   = pc ^ key[31:0];
      i1   = key[63:32] ^ 32'h9E3779B9;
      r_in = '0;
    end else begin
      i0   = v0;
      i1   = v1;
      r_in = rnd;
    end
    t0 = i0 + i1 + (r_in[0] ? key[63:32] : key[31:0]);
    n1 = rotl(i1, 7) ^ t0;
    n0 = rotl(t0, 13) ^ {4{8'(r_in)}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rnd    <= '0;
      v0     <= '0;
      v1     <= '0;
      res_pc <= '0;
    end else if (start && ready) begin
      v0     <= n0;
      v1     <= n1;
      rnd    <= CW'(1);
      res_pc <= pc;
      state  <= (HASH_CYCLES == 1) ? S_DONE : S_BUSY;
    end else if (clear) begin
      state <= S_IDLE;
    end else if (state == S_BUSY) begin
      v0  <= n0;
      v1  <= n1;
      rnd <= rnd + CW'(1);
      if (rnd == CW'(HASH_CYCLES - 1)) state <= S_DONE;
    end
  end

  // A start request while a computation or a held result owns the unit is a
  // protocol error of the caller.
  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
endmodule
