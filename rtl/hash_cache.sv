// hash_cache: direct-mapped cache of branch hash bits.
//
// Holds the hash bit of recently executed branches so that a branch met
// again does not wait for the multi-cycle hash. LINES lines, one branch per
// line; a line holds a valid bit, the address tag and the bit. Line index is
// pc[IDX_W+1:2] (instructions are word aligned), the tag is the remaining
// upper address bits. The lookup port is combinational: Decode presents
// lookup_pc and gets hit and bit in the same cycle, so the bit can travel
// with the branch into Execute. The fill port writes one line at the clock
// edge when the hash unit finishes; a fill replaces whatever the line held.
// flush invalidates every line (for a key change); reset does the same.
// LINES = 256 and direct mapping with one branch per line are the paper's;
// the index and tag split, the combinational lookup and the flush input are
// this design's choices.
module hash_cache #(
  parameter int unsigned LINES = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  logic [31:0] lookup_pc,
  output logic        hit,
  output logic        bit_out,
  input  logic        fill,
  input  logic [31:0] fill_pc,
  input  logic        fill_bit
);
  localparam int unsigned IDX_W = $clog2(LINES);
  localparam int unsigned TAG_W = 30 - IDX_W;

  logic             valid_q [LINES];
  logic [TAG_W-1:0] tag_q   [LINES];
  logic             bit_q   [LINES];

  logic [IDX_W-1:0] l_idx, f_idx;
  assign l_idx = lookup_pc[IDX_W+1:2];
  assign f_idx = fill_pc[IDX_W+1:2];

  assign hit     = valid_q[l_idx] && (tag_q[l_idx] == lookup_pc[31:IDX_W+2]);
  assign bit_out = bit_q[l_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LINES; i++) valid_q[i] <= 1'b0;
    end else if (flush) begin
      for (int i = 0; i < LINES; i++) valid_q[i] <= 1'b0;
    end else if (fill) begin
      valid_q[f_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill) begin
      tag_q[f_idx] <= fill_pc[31:IDX_W+2];
      bit_q[f_idx] <= fill_bit;
    end
  end
endmodule
