// dmem: data memory of the pipeline (Memory 1 / Memory 2).
//
// A word-organised memory with byte write enables and one synchronous read.
// In Memory 1 the pipeline presents the byte address; a store writes the
// bytes selected by be (already shifted into their lanes) at that clock edge,
// and a read returns the whole addressed word on rd_data in Memory 2, one
// cycle later. Byte and half-word selection and sign extension of loads are
// done by the pipeline in Writeback. The paper only names the data memory
// and draws it across Memory 1 and Memory 2; depth, latency and byte enables
// are this design's choices. Addresses wrap modulo the depth.
module dmem #(
  parameter int unsigned DEPTH = 1024   // words
) (
  input  logic        clk,
  input  logic        req,       // read or write this cycle
  input  logic        we,
  input  logic [3:0]  be,
  input  logic [31:0] addr,      // byte address
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] mem [DEPTH];
  logic [AW-1:0] idx;
  assign idx = addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req && we) begin
      for (int b = 0; b < 4; b++)
        if (be[b]) mem[idx][8*b +: 8] <= wdata[8*b +: 8];
    end
    if (req && !we) rdata <= mem[idx];
  end
endmodule
