// wiscv_single_cycle_core: RV32I + Zicsr core that runs one instruction at a
// time, from fetch to register write, with no pipeline.
//
// It is built from the same parts as the pipelined core (decoder, immediate
// generator, ALU, register file, CSR/exception unit) and has the same ports,
// so either core can sit in the SoC. Each instruction:
//   1. fetches at pc through imem;
//   2. is decoded, reads its operands, computes its result, branch outcome
//      and address, and checks for exceptions;
//   3. for a load or store, accesses dmem;
//   4. commits: writes rd (or takes a trap, or returns with MRET) and moves
//      pc to the next instruction.
// With memories that answer in the cycle of the request (main memory with
// LATENCY=1, or cache hits) all four steps happen in one clock cycle, which
// is the textbook single-cycle processor. A slower memory simply stretches
// the instruction: the fetched word is held in instr_q while the data access
// waits, so both requests stay stable until answered (valid/ready protocol
// of wiscv_pkg).
// The fetch port only reads, so imem_req.we, .be and .wdata are constant
// (read, whole word, no data); they stay to keep one request type.
// The register file runs without its write-through bypass here: the value
// written at the end of the cycle is computed from the operands read in it.
// Exceptions, their priority and the trace format are the same as in the
// pipelined core; the trace reports each instruction the cycle after it
// commits.
// What follows the paper: a single-cycle reference design next to the
// five-stage one, running the same programs and checked the same way (it
// is the "nopipe" alternative). How it handles slow memories is this
// design's own choice.
module wiscv_single_cycle_core
  import wiscv_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100
) (
  input  logic     clk,
  input  logic     rst_n,
  output mem_req_t imem_req,
  input  mem_rsp_t imem_rsp,
  output mem_req_t dmem_req,
  input  mem_rsp_t dmem_rsp,
  output trace_t   trace
);
  logic [31:0] pc, instr_q, instr;
  logic        running, have_instr, instr_ok, commit;

  // ---------------------------------------------------------------- fetch
  assign imem_req.valid = running && !have_instr;
  assign imem_req.we    = 1'b0;
  assign imem_req.be    = 4'hF;
  assign imem_req.addr  = pc;
  assign imem_req.wdata = '0;

  assign instr_ok = have_instr || (running && imem_rsp.ready);
  assign instr    = have_instr ? instr_q : imem_rsp.rdata;

  // --------------------------------------------------------------- decode
  ctrl_t       ctrl;
  logic [31:0] imm, rs1_val, rs2_val, rd_data;
  logic        rd_we;

  wiscv_decoder u_dec (.instr(instr), .ctrl(ctrl));
  wiscv_imm_gen u_imm (.instr(instr), .imm(imm));

  wiscv_regfile #(.BYPASS(1'b0)) u_rf (
    .clk, .rst_n,
    .rs1_addr(instr[19:15]), .rs2_addr(instr[24:20]),
    .rs1_data(rs1_val), .rs2_data(rs2_val),
    .we(rd_we), .rd_addr(instr[11:7]), .rd_data(rd_data)
  );

  // -------------------------------------------------------------- execute
  logic [31:0] alu_a, alu_b, alu_y, pc4, target, next_pc;
  logic        cond, taken;

  always_comb begin
    unique case (ctrl.a_sel)
      ASEL_PC:   alu_a = pc;
      ASEL_ZERO: alu_a = '0;
      default:   alu_a = rs1_val;
    endcase
    alu_b = ctrl.b_imm ? imm : rs2_val;
  end

  wiscv_alu u_alu (.op(ctrl.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  always_comb begin
    unique case (ctrl.funct3)
      3'b000:  cond = rs1_val == rs2_val;
      3'b001:  cond = rs1_val != rs2_val;
      3'b100:  cond = $signed(rs1_val) < $signed(rs2_val);
      3'b101:  cond = $signed(rs1_val) >= $signed(rs2_val);
      3'b110:  cond = rs1_val < rs2_val;
      default: cond = rs1_val >= rs2_val;
    endcase
    pc4    = pc + 32'd4;
    taken  = ctrl.jal || ctrl.jalr || (ctrl.branch && cond);
    target = ctrl.jalr ? ((rs1_val + imm) & ~32'd1) : (pc + imm);
  end

  // Exceptions in the same priority order as the pipelined core.
  logic        exc;
  logic [31:0] cause, tval;
  always_comb begin
    exc = 1'b1; cause = '0; tval = '0;
    if (ctrl.illegal) begin
      cause = EXC_ILLEGAL; tval = instr;
    end else if (taken && target[1]) begin
      cause = EXC_INSTR_MISALIGNED; tval = target;
    end else if (ctrl.ecall) begin
      cause = EXC_ECALL_M;
    end else if (ctrl.ebreak) begin
      cause = EXC_BREAKPOINT; tval = pc;
    end else if (ctrl.mem_read && misaligned(alu_y[1:0], ctrl.funct3)) begin
      cause = EXC_LOAD_MISALIGNED; tval = alu_y;
    end else if (ctrl.mem_write && misaligned(alu_y[1:0], ctrl.funct3)) begin
      cause = EXC_STORE_MISALIGNED; tval = alu_y;
    end else begin
      exc = 1'b0;
    end
  end

  // --------------------------------------------------------------- memory
  logic mem_access;
  assign mem_access     = instr_ok && !exc && (ctrl.mem_read || ctrl.mem_write);
  assign dmem_req.valid = mem_access;
  assign dmem_req.we    = ctrl.mem_write;
  assign dmem_req.be    = store_be(alu_y[1:0], ctrl.funct3);
  assign dmem_req.addr  = alu_y;
  assign dmem_req.wdata = store_data(rs2_val, ctrl.funct3);

  // --------------------------------------------------------------- commit
  logic        csr_en, csr_illegal, trap, do_mret;
  logic [31:0] csr_rdata, mtvec, mepc, trap_cause, trap_tval;

  assign commit     = instr_ok && (!mem_access || dmem_rsp.ready);
  assign csr_en     = commit && !exc && ctrl.csr_op != CSR_NONE;
  assign trap       = commit && (exc || csr_illegal);
  assign do_mret    = commit && !exc && ctrl.mret;
  assign trap_cause = exc ? cause : EXC_ILLEGAL;
  assign trap_tval  = exc ? tval  : instr;

  wiscv_csr #(.MTVEC_RESET(MTVEC_RESET)) u_csr (
    .clk, .rst_n,
    .csr_en(csr_en), .csr_op(ctrl.csr_op), .csr_addr(instr[31:20]),
    .csr_wdata(ctrl.csr_imm ? {27'd0, instr[19:15]} : rs1_val),
    .csr_wr((ctrl.csr_op == CSR_RW) || (instr[19:15] != 5'd0)),
    .csr_rdata(csr_rdata), .csr_illegal(csr_illegal),
    .trap(trap), .trap_cause(trap_cause), .trap_epc(pc), .trap_tval(trap_tval),
    .mret(do_mret), .retire(commit && !trap),
    .mtvec(mtvec), .mepc(mepc)
  );

  assign rd_we = commit && ctrl.reg_write && !trap && instr[11:7] != 5'd0;

  always_comb begin
    if (ctrl.mem_read)                 rd_data = load_extract(dmem_rsp.rdata, alu_y[1:0], ctrl.funct3);
    else if (ctrl.csr_op != CSR_NONE)  rd_data = csr_rdata;
    else if (ctrl.jal || ctrl.jalr)    rd_data = pc4;
    else                               rd_data = alu_y;
    if (trap)         next_pc = mtvec;
    else if (do_mret) next_pc = mepc;
    else              next_pc = taken ? target : pc4;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc         <= RESET_PC;
      running    <= 1'b0;
      have_instr <= 1'b0;
      instr_q    <= '0;
      trace      <= '0;
    end else begin
      running <= 1'b1;
      trace   <= '0;
      if (commit) begin
        pc         <= next_pc;
        have_instr <= 1'b0;
        trace      <= '{valid: 1'b1, pc: pc, instr: instr,
                        rd_we: rd_we, rd: rd_we ? instr[11:7] : 5'd0,
                        rd_wdata: rd_we ? rd_data : '0,
                        trap: trap, cause: trap ? trap_cause : '0};
      end else if (instr_ok) begin
        have_instr <= 1'b1;     // data access still waiting: keep the word
        instr_q    <= instr;
      end
    end
  end

  // A request left unanswered must stay put.
  a_dmem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (dmem_req.valid && !dmem_rsp.ready) |=>
      (dmem_req.valid && $stable(dmem_req.addr) && $stable(dmem_req.we)));
endmodule
