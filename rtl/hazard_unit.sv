// hazard_unit: read-after-write interlock for the Decode stage.
//
// The seven-stage pipeline has no forwarding paths, so an instruction in
// Decode may read a register only once every older instruction that writes
// it has reached Writeback (the register file passes a value through in the
// cycle it is written). The unit compares the source registers the Decode
// instruction actually reads with the destination of each valid instruction
// in Execute, Memory 1 and Memory 2 and raises stall when one matches; x0
// never causes a stall. Purely combinational. The paper draws no forwarding
// and no hazard logic; this interlock is the simplest one that keeps the
// pipeline of its figures correct.
module hazard_unit #(
  parameter int unsigned N_STAGES = 3   // Execute, Memory 1, Memory 2
) (
  input  logic                d_valid,
  input  logic                d_uses_rs1,
  input  logic                d_uses_rs2,
  input  logic [4:0]          d_rs1,
  input  logic [4:0]          d_rs2,
  input  logic [N_STAGES-1:0] wr_valid,   // stage holds a register-writing instruction
  input  logic [4:0]          wr_rd [N_STAGES],
  output logic                stall
);
  always_comb begin
    stall = 1'b0;
    for (int s = 0; s < N_STAGES; s++) begin
      if (d_valid && wr_valid[s] && wr_rd[s] != 5'd0) begin
        if (d_uses_rs1 && d_rs1 == wr_rd[s]) stall = 1'b1;
        if (d_uses_rs2 && d_rs2 == wr_rd[s]) stall = 1'b1;
      end
    end
  end
endmodule
