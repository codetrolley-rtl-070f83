// tb_hazard_unit: RAW interlock test. Random source and destination
// registers against a model of the rule: stall when a read source equals
// the non-zero destination of a valid writer in Execute, Memory 1 or Memory 2.
`timescale 1ns/1ps
`include "tb_common.svh"
module tb_hazard_unit;
  logic d_valid, d_uses_rs1, d_uses_rs2, stall;
  logic [4:0] d_rs1, d_rs2;
  logic [2:0] wr_valid;
  logic [4:0] wr_rd [3];
  int checks = 0, failures = 0, n_stall = 0;

  hazard_unit #(.N_STAGES(3)) dut (.*);

  initial begin #100000000; failures++; `TB_DONE end

  initial begin
    for (int k = 0; k < 5000; k++) begin
      logic e;
      d_valid = $urandom_range(3) != 0; d_uses_rs1 = 1'($urandom); d_uses_rs2 = 1'($urandom);
      d_rs1 = 5'($urandom_range(4)); d_rs2 = 5'($urandom_range(4));
      wr_valid = 3'($urandom);
      for (int s = 0; s < 3; s++) wr_rd[s] = 5'($urandom_range(4));
      #1;
      e = 0;
      for (int s = 0; s < 3; s++)
        if (d_valid && wr_valid[s] && wr_rd[s] != 0 &&
            ((d_uses_rs1 && d_rs1 == wr_rd[s]) || (d_uses_rs2 && d_rs2 == wr_rd[s]))) e = 1;
      n_stall += int'(e);
      `TB_CHECK(stall == e, $sformatf("rs1=%0d rs2=%0d", d_rs1, d_rs2))
    end
    `TB_CHECK(n_stall > 100, "stalls exercised")
    `TB_DONE
  end
endmodule
