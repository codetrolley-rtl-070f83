// regfile: RV32I integer register file (read in Decode, written in Writeback).
//
// Thirty-one 32-bit registers plus x0, which always reads as zero. Two
// combinational read ports serve Decode; one write port is driven by the
// Writeback stage at the rising clock edge. A read of the register being
// written in the same cycle returns the new value (write-through), so an
// instruction in Decode sees a result retiring in that cycle. Registers reset
// to zero. The paper names the register file only; the write-through read is
// this design's choice.
module regfile (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  rs1,
  input  logic [4:0]  rs2,
  output logic [31:0] rdata1,
  output logic [31:0] rdata2,
  input  logic        we,
  input  logic [4:0]  rd,
  input  logic [31:0] wdata
);
  logic [31:0] regs [32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && rd != 5'd0) begin
      regs[rd] <= wdata;
    end
  end

  always_comb begin
    rdata1 = (rs1 == 5'd0) ? '0 : (we && rd == rs1) ? wdata : regs[rs1];
    rdata2 = (rs2 == 5'd0) ? '0 : (we && rd == rs2) ? wdata : regs[rs2];
  end
endmodule
