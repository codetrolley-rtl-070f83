// imem: instruction memory of the pipeline (Fetch 1 / Fetch 2).
//
// A word-addressed memory with one synchronous read port and one write port
// for loading the program. The program counter presents a byte address in
// Fetch 1 with rd_en high; the instruction word appears on rd_data in the next
// cycle (Fetch 2) and stays there while rd_en is low, so a stalled fetch keeps
// its instruction. The write port (wr_en, wr_addr, wr_data) stores one word per
// cycle and is used to load a program while the core is held in reset.
// The paper only names this memory and places it across Fetch 1 and Fetch 2;
// the depth, the read latency of one cycle and the load port are this
// design's choices. Addresses wrap modulo the depth.
module imem #(
  parameter int unsigned DEPTH = 1024   // words
) (
  input  logic        clk,
  input  logic        rd_en,
  input  logic [31:0] rd_addr,   // byte address
  output logic [31:0] rd_data,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,   // byte address
  input  logic [31:0] wr_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[AW+1:2]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr[AW+1:2]];
  end
endmodule
