// codetrolley_top: seven-stage RV32I pipeline with hardware branch
// deobfuscation.
//
// The compiler reverses each conditional branch of a program whose keyed
// hash bit (branch address, secret program key) is 1. This core undoes that
// while it runs: when a branch is decoded its hash bit is looked up in a
// small cache and, on a miss, computed by a multi-cycle hash unit; in
// Execute the bit is XORed with the branch condition, and Execute (with all
// stages before it) waits if the bit is not yet known. Without the right key
// the program takes wrong branches.
//
// Stages and what they hold:
//   Fetch 1   PC register, next-PC mux (PC+4, branch/JAL target, JALR
//             target), instruction memory address
//   Fetch 2   instruction word out of the instruction memory
//   Decode    control unit, register file read, RAW interlock, hash start
//             and hash-cache lookup
//   Execute   operand mux, ALU and branch compare, XOR with the hash bit,
//             branch and jump resolution (redirect), store-data alignment
//   Memory 1  data memory address and store
//   Memory 2  load word out of the data memory
//   Writeback load extraction, write-back mux, register file write
// Branches are predicted not taken; a taken branch or a jump flushes Fetch 2
// and Decode (two lost cycles plus the Fetch 1 slot). There is no forwarding:
// Decode waits until its source registers are written back. A stall of
// Execute holds Fetch 1 through Execute and sends bubbles into Memory 1, as
// the stalled-hash design prescribes. ECALL or EBREAK stops fetching once it
// leaves Execute and raises halted when it retires.
//
// Host interface: while rst_n is low the core is held in reset and the host
// ports own both memories: host_imem_we writes program words, host_dmem_req
// reads (data on host_dmem_rdata one cycle later) or writes data words. The
// program key is loaded into a key register with key_we, at any time; loading
// it also empties the hash cache. The key register has no reset, so the key
// must be loaded before a program runs. perf holds event counters.
//
// Follows the paper: seven stages and their names, memories split over two
// stages each, hash started in Decode, Execute stalled until the bit is
// known, XOR with the branch signal, 256-line direct-mapped hash cache. This
// design's own: the RV32I subset details, the interlock, not-taken
// prediction, resolution of jumps in Execute, the host ports, the key
// register and the counters.
module codetrolley_top
  import ct_pkg::*;
#(
  parameter deobf_mode_e DEOBF_MODE  = MODE_CACHED,
  parameter int unsigned HASH_CYCLES = 16,
  parameter int unsigned CACHE_LINES = 256,
  parameter int unsigned IMEM_DEPTH  = 1024,
  parameter int unsigned DMEM_DEPTH  = 1024,
  parameter logic [31:0] RESET_PC    = 32'h0
) (
  input  logic             clk,
  input  logic             rst_n,
  // program key
  input  logic             key_we,
  input  logic [KEY_W-1:0] key_in,
  // host access to the memories, used while rst_n is low
  input  logic             host_imem_we,
  input  logic             host_dmem_req,
  input  logic             host_dmem_we,
  input  logic [31:0]      host_addr,
  input  logic [31:0]      host_wdata,
  output logic [31:0]      host_dmem_rdata,
  // status
  output logic             halted,
  output logic             illegal_seen,
  output perf_t            perf
);

  // ---------------------------------------------------------------------
  // Pipeline registers
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    ctrl_t       ctrl;
    logic [31:0] imm;
    logic [31:0] rs1v;
    logic [31:0] rs2v;
    logic [4:0]  rd;
  } id_ex_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic [4:0]  rd;
    wb_sel_e     wb_sel;
    logic        mem_read;
    logic        mem_write;
    logic [2:0]  funct3;
    logic [31:0] result;    // ALU result, link address or memory address
    logic [31:0] wdata;     // store data, byte lanes aligned
    logic [3:0]  be;
    logic        halt;
  } mem_t;

  logic [KEY_W-1:0] key_q;

  logic [31:0] pc_q;          // Fetch 1
  logic        fetch_on;      // cleared by a halt leaving Execute
  logic        f2_valid;      // Fetch 2
  logic [31:0] f2_pc;
  logic [31:0] f2_instr;
  logic        d_valid;       // Decode
  logic [31:0] d_pc;
  logic [31:0] d_instr;
  id_ex_t      ex;            // Execute
  mem_t        m1, m2, wb;    // Memory 1, Memory 2, Writeback
  logic [31:0] wb_mdata;

  // ---------------------------------------------------------------------
  // Key register
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (key_we) key_q <= key_in;
  end

  // ---------------------------------------------------------------------
  // Decode
  // ---------------------------------------------------------------------
  ctrl_t       d_ctrl;
  logic [31:0] d_imm, d_rs1v, d_rs2v;
  logic [4:0]  d_rs1, d_rs2, d_rd;
  logic        d_raw;
  logic        wb_we;
  logic [31:0] wb_value;

  control_unit u_ctrl (
    .instr(d_instr),
    .ctrl (d_ctrl),
    .imm  (d_imm),
    .rs1  (d_rs1),
    .rs2  (d_rs2),
    .rd   (d_rd)
  );

  regfile u_rf (
    .clk   (clk),
    .rst_n (rst_n),
    .rs1   (d_rs1),
    .rs2   (d_rs2),
    .rdata1(d_rs1v),
    .rdata2(d_rs2v),
    .we    (wb_we),
    .rd    (wb.rd),
    .wdata (wb_value)
  );

  logic [2:0] hz_valid;
  logic [4:0] hz_rd [3];
  assign hz_valid = {m2.valid && m2.reg_write, m1.valid && m1.reg_write,
                     ex.valid && ex.ctrl.reg_write};
  assign hz_rd[0] = ex.rd;
  assign hz_rd[1] = m1.rd;
  assign hz_rd[2] = m2.rd;

  hazard_unit #(.N_STAGES(3)) u_hz (
    .d_valid   (d_valid),
    .d_uses_rs1(d_ctrl.uses_rs1),
    .d_uses_rs2(d_ctrl.uses_rs2),
    .d_rs1     (d_rs1),
    .d_rs2     (d_rs2),
    .wr_valid  (hz_valid),
    .wr_rd     (hz_rd),
    .stall     (d_raw)
  );

  // ---------------------------------------------------------------------
  // Execute
  // ---------------------------------------------------------------------
  logic [31:0] ex_a, ex_b, ex_y, ex_link, ex_btarget, ex_target;
  logic        ex_cond, ex_ready, ex_taken, ex_bit, ex_from_cache;
  logic        ex_stall, ex_leave, redirect, kill_d, halt_leaving;
  logic        d_stall, d_advance;
  logic [31:0] ex_wdata;
  logic [3:0]  ex_be;

  always_comb begin
    unique case (ex.ctrl.a_sel)
      ASEL_PC:   ex_a = ex.pc;
      ASEL_ZERO: ex_a = '0;
      default:   ex_a = ex.rs1v;
    endcase
    ex_b = (ex.ctrl.b_sel == BSEL_RS2) ? ex.rs2v : ex.imm;
  end

  alu u_alu (
    .op       (ex.ctrl.alu_op),
    .a        (ex_a),
    .b        (ex_b),
    .y        (ex_y),
    .br_funct3(ex.ctrl.funct3),
    .cmp_a    (ex.rs1v),
    .cmp_b    (ex.rs2v),
    .cond     (ex_cond)
  );

  deobf_unit #(
    .MODE       (DEOBF_MODE),
    .HASH_CYCLES(HASH_CYCLES),
    .CACHE_LINES(CACHE_LINES)
  ) u_deobf (
    .clk          (clk),
    .rst_n        (rst_n),
    .key          (key_q),
    .cache_flush  (key_we),
    .d_valid      (d_valid),
    .d_is_branch  (d_ctrl.is_branch),
    .d_pc         (d_pc),
    .d_advance    (d_advance),
    .flush_d      (kill_d),
    .ex_valid     (ex.valid),
    .ex_is_branch (ex.ctrl.is_branch),
    .ex_cond      (ex_cond),
    .ex_leave     (ex_leave),
    .ex_ready     (ex_ready),
    .ex_taken     (ex_taken),
    .ex_bit       (ex_bit),
    .ex_from_cache(ex_from_cache)
  );

  assign ex_stall  = ex.valid && !ex_ready;
  assign ex_leave  = ex.valid && ex_ready;
  assign ex_link   = ex.pc + 32'd4;
  assign ex_btarget = ex.pc + ex.imm;
  assign ex_target = ex.ctrl.is_jalr ? {ex_y[31:1], 1'b0} : ex_btarget;
  assign halt_leaving = ex_leave && ex.ctrl.halt;
  assign redirect  = ex_leave && (ex.ctrl.is_jal || ex.ctrl.is_jalr ||
                                  (ex.ctrl.is_branch && ex_taken));
  assign d_stall   = d_raw || ex_stall;
  assign kill_d    = redirect || halt_leaving;
  assign d_advance = d_valid && !d_stall && !kill_d;

  // Store data placed in its byte lanes.
  always_comb begin
    unique case (ex.ctrl.funct3[1:0])
      2'b00:   begin ex_wdata = {4{ex.rs2v[7:0]}};  ex_be = 4'b0001 << ex_y[1:0]; end
      2'b01:   begin ex_wdata = {2{ex.rs2v[15:0]}}; ex_be = ex_y[1] ? 4'b1100 : 4'b0011; end
      default: begin ex_wdata = ex.rs2v;            ex_be = 4'b1111; end
    endcase
  end

  // ---------------------------------------------------------------------
  // Fetch 1 / Fetch 2 and the Decode and Execute registers
  // ---------------------------------------------------------------------
  logic        f_hold;
  logic        imem_en;
  logic [31:0] imem_rdata;

  assign f_hold       = d_stall && !kill_d;
  assign imem_en      = !f_hold;
  assign f2_instr     = imem_rdata;

  imem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk    (clk),
    .rd_en  (imem_en),
    .rd_addr(pc_q),
    .rd_data(imem_rdata),
    .wr_en  (host_imem_we && !rst_n),
    .wr_addr(host_addr),
    .wr_data(host_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q     <= RESET_PC;
      fetch_on <= 1'b1;
      f2_valid <= 1'b0;
      f2_pc    <= '0;
      d_valid  <= 1'b0;
      d_pc     <= '0;
      d_instr  <= '0;
      ex       <= '0;
    end else begin
      // Fetch 1 -> Fetch 2 -> Decode
      if (redirect || halt_leaving) begin
        pc_q     <= ex_target;
        f2_valid <= 1'b0;
        d_valid  <= 1'b0;
        if (halt_leaving) fetch_on <= 1'b0;
      end else if (!f_hold) begin
        pc_q     <= pc_q + 32'd4;
        f2_valid <= fetch_on;
        f2_pc    <= pc_q;
        d_valid  <= f2_valid;
        d_pc     <= f2_pc;
        d_instr  <= f2_instr;
      end

      // Decode -> Execute
      if (ex_stall) begin
        ex <= ex;
      end else if (d_advance) begin
        ex.valid <= 1'b1;
        ex.pc    <= d_pc;
        ex.ctrl  <= d_ctrl;
        ex.imm   <= d_imm;
        ex.rs1v  <= d_rs1v;
        ex.rs2v  <= d_rs2v;
        ex.rd    <= d_rd;
      end else begin
        ex.valid <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------------
  // Execute -> Memory 1 -> Memory 2 -> Writeback
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m1 <= '0;
      m2 <= '0;
      wb <= '0;
    end else begin
      m1.valid     <= ex_leave;
      m1.reg_write <= ex.ctrl.reg_write;
      m1.rd        <= ex.rd;
      m1.wb_sel    <= ex.ctrl.wb_sel;
      m1.mem_read  <= ex.ctrl.mem_read;
      m1.mem_write <= ex.ctrl.mem_write;
      m1.funct3    <= ex.ctrl.funct3;
      m1.result    <= (ex.ctrl.wb_sel == WB_LINK) ? ex_link : ex_y;
      m1.wdata     <= ex_wdata;
      m1.be        <= ex_be;
      m1.halt      <= ex.ctrl.halt;
      m2 <= m1;
      wb <= m2;
    end
  end

  // Data memory: core in Memory 1, host while in reset.
  logic        dm_req, dm_we;
  logic [3:0]  dm_be;
  logic [31:0] dm_addr, dm_wdata, dm_rdata;

  always_comb begin
    if (!rst_n) begin
      dm_req   = host_dmem_req;
      dm_we    = host_dmem_we;
      dm_be    = 4'b1111;
      dm_addr  = host_addr;
      dm_wdata = host_wdata;
    end else begin
      dm_req   = m1.valid && (m1.mem_read || m1.mem_write);
      dm_we    = m1.mem_write;
      dm_be    = m1.be;
      dm_addr  = m1.result;
      dm_wdata = m1.wdata;
    end
  end

  dmem #(.DEPTH(DMEM_DEPTH)) u_dmem (
    .clk  (clk),
    .req  (dm_req),
    .we   (dm_we),
    .be   (dm_be),
    .addr (dm_addr),
    .wdata(dm_wdata),
    .rdata(dm_rdata)
  );
  assign host_dmem_rdata = dm_rdata;

  // The load word leaves the memory in Memory 2 and is registered with it.
  always_ff @(posedge clk) begin
    wb_mdata <= dm_rdata;
  end

  // Writeback: load extraction and write-back mux.
  logic [31:0] wb_load;
  always_comb begin
    logic [31:0] sh;
    sh = wb_mdata >> {wb.result[1:0], 3'b000};
    unique case (wb.funct3)
      3'b000:  wb_load = {{24{sh[7]}}, sh[7:0]};
      3'b001:  wb_load = {{16{sh[15]}}, sh[15:0]};
      3'b100:  wb_load = {24'd0, sh[7:0]};
      3'b101:  wb_load = {16'd0, sh[15:0]};
      default: wb_load = wb_mdata;
    endcase
    wb_value = (wb.wb_sel == WB_MEM) ? wb_load : wb.result;
  end
  assign wb_we = wb.valid && wb.reg_write;

  // ---------------------------------------------------------------------
  // Status and counters
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      halted       <= 1'b0;
      illegal_seen <= 1'b0;
      perf         <= '0;
    end else if (!halted) begin
      if (wb.valid && wb.halt) halted <= 1'b1;
      if (ex_leave && ex.ctrl.illegal) illegal_seen <= 1'b1;
      perf.cycles <= perf.cycles + 32'd1;
      if (wb.valid) perf.retired <= perf.retired + 32'd1;
      if (ex_leave && ex.ctrl.is_branch) begin
        perf.branches <= perf.branches + 32'd1;
        if (ex_bit) perf.inverted <= perf.inverted + 32'd1;
        if (DEOBF_MODE == MODE_CACHED) begin
          if (ex_from_cache) perf.cache_hits   <= perf.cache_hits + 32'd1;
          else               perf.cache_misses <= perf.cache_misses + 32'd1;
        end
      end
      if (ex_stall) perf.hash_stall <= perf.hash_stall + 32'd1;
      if (d_valid && d_raw && !ex_stall && !kill_d) perf.raw_stall <= perf.raw_stall + 32'd1;
      if (redirect) perf.redirects <= perf.redirects + 32'd1;
    end
  end

endmodule
