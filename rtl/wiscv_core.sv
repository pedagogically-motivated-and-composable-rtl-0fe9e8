// wiscv_core: in-order 5-stage RV32I pipeline (IF, ID, EX, MEM, WB).
//
// IF  fetches at pc through imem (normally the I-cache) and asks the branch
//     predictor for the next pc; the prediction travels with the
//     instruction.
// ID  decodes, reads the register file (which bypasses the WB write) and
//     builds the immediate.
// EX  runs the ALU with operands forwarded from MEM or WB, resolves
//     branches and jumps, and on a wrong next-pc prediction redirects fetch
//     and squashes the two younger instructions (two-cycle penalty). It also
//     updates the predictor and detects misaligned loads, stores and jump
//     targets.
// MEM accesses dmem (normally the D-cache), executes CSR instructions and
//     takes exceptions: a trapping instruction writes nothing, everything
//     younger is squashed and fetch restarts at mtvec; MRET restarts at mepc.
// WB  writes the register file and reports the instruction on the trace
//     port.
// Stalls: a load or CSR read followed by a dependent instruction costs one
// bubble (load-use). A data access that memory has not answered (dmem_rsp
// not ready) freezes IF..MEM and sends bubbles into WB; while frozen, the EX
// operands keep capturing forwarded values so none is lost when its
// producer leaves WB. A fetch that is not answered sends bubbles into ID.
// Memory ports follow the valid/ready protocol of wiscv_pkg; requests are
// held stable until answered.
// The fetch port only reads, so imem_req.we, .be and .wdata are constant
// (read, whole word, no data); they stay to keep one request type.
// What follows the paper: a classic 5-stage RISC-V pipeline with a separate
// memory stage, branch prediction, exceptions, support for variable-latency
// memory and a per-instruction trace for checking against a reference
// model. Where branches resolve, what is forwarded, where traps are taken
// and the trace format are this design's own choices.
module wiscv_core
  import wiscv_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100,
  parameter int          BP_ENTRIES  = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  output mem_req_t imem_req,
  input  mem_rsp_t imem_rsp,
  output mem_req_t dmem_req,
  input  mem_rsp_t dmem_rsp,
  output trace_t   trace
);
  // ---------------------------------------------------------------- state
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    logic        pred_taken;
    logic [31:0] pred_target;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    ctrl_t       ctrl;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [31:0] rs1_val;
    logic [31:0] rs2_val;
    logic [31:0] imm;
    logic        pred_taken;
    logic [31:0] pred_target;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    ctrl_t       ctrl;
    logic [4:0]  rd;
    logic [31:0] result;     // ALU result, link address or memory address
    logic [31:0] store_val;
    logic [31:0] csr_wdata;
    logic        csr_wr;
    logic        exc;
    logic [31:0] cause;
    logic [31:0] tval;
  } exmem_t;

  ifid_t  ifid;
  idex_t  idex;
  exmem_t exmem;
  trace_t memwb;

  logic [31:0] pc;
  logic        running;

  // ------------------------------------------------------ control signals
  logic        dstall, load_use;
  logic        ex_redirect, mem_redirect;
  logic [31:0] ex_target, mem_target;

  // ------------------------------------------------------------------ IF
  logic        bp_taken;
  logic [31:0] bp_target;
  logic        fetch_ok;

  assign imem_req.valid = running;
  assign imem_req.we    = 1'b0;
  assign imem_req.be    = 4'hF;
  assign imem_req.addr  = pc;
  assign imem_req.wdata = '0;
  assign fetch_ok       = running && imem_rsp.ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc      <= RESET_PC;
      running <= 1'b0;
    end else begin
      running <= 1'b1;
      if (mem_redirect)                 pc <= mem_target;
      else if (ex_redirect)             pc <= ex_target;
      else if (dstall || load_use)      pc <= pc;
      else if (fetch_ok)                pc <= bp_taken ? bp_target : pc + 32'd4;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ifid <= '0;
    end else if (mem_redirect || ex_redirect) begin
      ifid.valid <= 1'b0;
    end else if (dstall || load_use) begin
      ifid <= ifid;
    end else if (fetch_ok) begin
      ifid <= '{valid: 1'b1, pc: pc, instr: imem_rsp.rdata,
                pred_taken: bp_taken, pred_target: bp_target};
    end else begin
      ifid.valid <= 1'b0;
    end
  end

  // ------------------------------------------------------------------ ID
  ctrl_t       id_ctrl;
  logic [31:0] id_imm, id_rs1_val, id_rs2_val;
  logic [4:0]  id_rs1, id_rs2, id_rd;

  assign id_rs1 = ifid.instr[19:15];
  assign id_rs2 = ifid.instr[24:20];
  assign id_rd  = ifid.instr[11:7];

  wiscv_decoder u_dec (.instr(ifid.instr), .ctrl(id_ctrl));
  wiscv_imm_gen u_imm (.instr(ifid.instr), .imm(id_imm));

  wiscv_regfile u_rf (
    .clk, .rst_n,
    .rs1_addr(id_rs1), .rs2_addr(id_rs2),
    .rs1_data(id_rs1_val), .rs2_data(id_rs2_val),
    .we(memwb.valid && memwb.rd_we), .rd_addr(memwb.rd), .rd_data(memwb.rd_wdata)
  );

  // ------------------------------------------------------------------ EX
  fwd_e        fwd_a, fwd_b;
  logic [31:0] ex_rs1, ex_rs2, alu_a, alu_b, alu_y, ex_pc4;
  logic        ex_cond, ex_taken, ex_is_cti;
  logic [31:0] ex_next, pred_next;
  logic        ex_late;

  assign ex_late = idex.ctrl.mem_read || (idex.ctrl.csr_op != CSR_NONE);

  wiscv_hazard_unit u_hz (
    .id_rs1(id_rs1), .id_rs2(id_rs2),
    .id_use_rs1(ifid.valid && id_ctrl.use_rs1), .id_use_rs2(ifid.valid && id_ctrl.use_rs2),
    .ex_rs1(idex.rs1), .ex_rs2(idex.rs2),
    .ex_valid(idex.valid), .ex_we(idex.ctrl.reg_write), .ex_late(ex_late), .ex_rd(idex.rd),
    .mem_valid(exmem.valid), .mem_we(exmem.ctrl.reg_write && !exmem.exc),
    .mem_late(exmem.ctrl.mem_read || (exmem.ctrl.csr_op != CSR_NONE)), .mem_rd(exmem.rd),
    .wb_valid(memwb.valid), .wb_we(memwb.rd_we), .wb_rd(memwb.rd),
    .fwd_a(fwd_a), .fwd_b(fwd_b), .load_use(load_use)
  );

  always_comb begin
    unique case (fwd_a)
      FWD_MEM: ex_rs1 = exmem.result;
      FWD_WB:  ex_rs1 = memwb.rd_wdata;
      default: ex_rs1 = idex.rs1_val;
    endcase
    unique case (fwd_b)
      FWD_MEM: ex_rs2 = exmem.result;
      FWD_WB:  ex_rs2 = memwb.rd_wdata;
      default: ex_rs2 = idex.rs2_val;
    endcase
    unique case (idex.ctrl.a_sel)
      ASEL_PC:   alu_a = idex.pc;
      ASEL_ZERO: alu_a = '0;
      default:   alu_a = ex_rs1;
    endcase
    alu_b = idex.ctrl.b_imm ? idex.imm : ex_rs2;
  end

  wiscv_alu u_alu (.op(idex.ctrl.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  always_comb begin
    unique case (idex.ctrl.funct3)
      3'b000:  ex_cond = ex_rs1 == ex_rs2;
      3'b001:  ex_cond = ex_rs1 != ex_rs2;
      3'b100:  ex_cond = $signed(ex_rs1) < $signed(ex_rs2);
      3'b101:  ex_cond = $signed(ex_rs1) >= $signed(ex_rs2);
      3'b110:  ex_cond = ex_rs1 < ex_rs2;
      default: ex_cond = ex_rs1 >= ex_rs2;
    endcase
    ex_pc4    = idex.pc + 32'd4;
    ex_is_cti = idex.ctrl.branch || idex.ctrl.jal || idex.ctrl.jalr;
    ex_taken  = idex.ctrl.jal || idex.ctrl.jalr || (idex.ctrl.branch && ex_cond);
    ex_target = idex.ctrl.jalr ? ((ex_rs1 + idex.imm) & ~32'd1) : (idex.pc + idex.imm);
    ex_next   = ex_taken ? ex_target : ex_pc4;
    pred_next = idex.pred_taken ? idex.pred_target : ex_pc4;
    ex_redirect = idex.valid && (ex_next != pred_next) && !dstall && !mem_redirect;
    if (!ex_taken) ex_target = ex_pc4;
  end

  wiscv_branch_predictor #(.ENTRIES(BP_ENTRIES)) u_bp (
    .clk, .rst_n,
    .if_pc(pc), .pred_taken(bp_taken), .pred_target(bp_target),
    .upd_valid(idex.valid && ex_is_cti && !dstall && !mem_redirect),
    .upd_pc(idex.pc), .upd_taken(ex_taken), .upd_target(ex_target),
    .upd_is_jump(idex.ctrl.jal || idex.ctrl.jalr)
  );

  // Exceptions detected up to EX, in priority order.
  logic        ex_exc;
  logic [31:0] ex_cause, ex_tval;
  always_comb begin
    ex_exc = 1'b1; ex_cause = '0; ex_tval = '0;
    if (idex.ctrl.illegal) begin
      ex_cause = EXC_ILLEGAL; ex_tval = idex.instr;
    end else if (ex_taken && ex_target[1]) begin
      ex_cause = EXC_INSTR_MISALIGNED; ex_tval = ex_target;
    end else if (idex.ctrl.ecall) begin
      ex_cause = EXC_ECALL_M;
    end else if (idex.ctrl.ebreak) begin
      ex_cause = EXC_BREAKPOINT; ex_tval = idex.pc;
    end else if (idex.ctrl.mem_read && misaligned(alu_y[1:0], idex.ctrl.funct3)) begin
      ex_cause = EXC_LOAD_MISALIGNED; ex_tval = alu_y;
    end else if (idex.ctrl.mem_write && misaligned(alu_y[1:0], idex.ctrl.funct3)) begin
      ex_cause = EXC_STORE_MISALIGNED; ex_tval = alu_y;
    end else begin
      ex_exc = 1'b0;
    end
  end

  // ID/EX register
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idex <= '0;
    end else if (mem_redirect || ex_redirect) begin
      idex.valid <= 1'b0;
    end else if (dstall) begin
      idex.rs1_val <= ex_rs1;   // keep forwarded operands while frozen
      idex.rs2_val <= ex_rs2;
    end else if (load_use) begin
      idex.valid <= 1'b0;
    end else begin
      idex <= '{valid: ifid.valid, pc: ifid.pc, instr: ifid.instr, ctrl: id_ctrl,
                rs1: id_ctrl.use_rs1 ? id_rs1 : 5'd0, rs2: id_ctrl.use_rs2 ? id_rs2 : 5'd0,
                rd: id_rd, rs1_val: id_rs1_val, rs2_val: id_rs2_val, imm: id_imm,
                pred_taken: ifid.pred_taken, pred_target: ifid.pred_target};
    end
  end

  // EX/MEM register
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      exmem <= '0;
    end else if (mem_redirect) begin
      exmem.valid <= 1'b0;
    end else if (!dstall) begin
      exmem <= '{valid: idex.valid, pc: idex.pc, instr: idex.instr, ctrl: idex.ctrl,
                 rd: idex.rd,
                 result: (idex.ctrl.jal || idex.ctrl.jalr) ? ex_pc4 : alu_y,
                 store_val: ex_rs2,
                 csr_wdata: idex.ctrl.csr_imm ? {27'd0, idex.instr[19:15]} : ex_rs1,
                 csr_wr: (idex.ctrl.csr_op == CSR_RW) || (idex.instr[19:15] != 5'd0),
                 exc: ex_exc, cause: ex_cause, tval: ex_tval};
    end
  end

  // ----------------------------------------------------------------- MEM
  logic        mem_access, csr_en, csr_illegal, mem_trap, wb_retire;
  logic [31:0] csr_rdata, mtvec, mepc, mem_result;
  logic [31:0] trap_cause, trap_tval;

  assign mem_access = exmem.valid && !exmem.exc && (exmem.ctrl.mem_read || exmem.ctrl.mem_write);
  assign dmem_req.valid = mem_access;
  assign dmem_req.we    = exmem.ctrl.mem_write;
  assign dmem_req.be    = store_be(exmem.result[1:0], exmem.ctrl.funct3);
  assign dmem_req.addr  = exmem.result;
  assign dmem_req.wdata = store_data(exmem.store_val, exmem.ctrl.funct3);
  assign dstall = mem_access && !dmem_rsp.ready;

  assign csr_en   = exmem.valid && !exmem.exc && exmem.ctrl.csr_op != CSR_NONE;
  assign mem_trap = exmem.valid && (exmem.exc || csr_illegal);
  assign trap_cause = exmem.exc ? exmem.cause : EXC_ILLEGAL;
  assign trap_tval  = exmem.exc ? exmem.tval  : exmem.instr;
  assign wb_retire  = memwb.valid && !memwb.trap;

  wiscv_csr #(.MTVEC_RESET(MTVEC_RESET)) u_csr (
    .clk, .rst_n,
    .csr_en(csr_en), .csr_op(exmem.ctrl.csr_op), .csr_addr(exmem.instr[31:20]),
    .csr_wdata(exmem.csr_wdata), .csr_wr(exmem.csr_wr),
    .csr_rdata(csr_rdata), .csr_illegal(csr_illegal),
    .trap(mem_trap), .trap_cause(trap_cause), .trap_epc(exmem.pc), .trap_tval(trap_tval),
    .mret(exmem.valid && !exmem.exc && exmem.ctrl.mret), .retire(wb_retire),
    .mtvec(mtvec), .mepc(mepc)
  );

  assign mem_redirect = mem_trap || (exmem.valid && !exmem.exc && exmem.ctrl.mret);
  assign mem_target   = mem_trap ? mtvec : mepc;

  always_comb begin
    if (exmem.ctrl.mem_read)
      mem_result = load_extract(dmem_rsp.rdata, exmem.result[1:0], exmem.ctrl.funct3);
    else if (exmem.ctrl.csr_op != CSR_NONE)
      mem_result = csr_rdata;
    else
      mem_result = exmem.result;
  end

  // MEM/WB register (fields not in use are zero, so the trace is clean)
  logic wb_we;
  assign wb_we = exmem.valid && exmem.ctrl.reg_write && !mem_trap && exmem.rd != 5'd0;
  always_ff @(posedge clk) begin
    if (!rst_n || dstall) begin
      memwb <= '0;
    end else begin
      memwb <= '{valid: exmem.valid, pc: exmem.pc, instr: exmem.instr,
                 rd_we: wb_we, rd: wb_we ? exmem.rd : 5'd0, rd_wdata: wb_we ? mem_result : '0,
                 trap: mem_trap, cause: mem_trap ? trap_cause : '0};
    end
  end

  // ------------------------------------------------------------------ WB
  assign trace = memwb;

  // A request left unanswered must stay put.
  a_dmem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dstall |=> (dmem_req.valid && $stable(dmem_req.addr) && $stable(dmem_req.we)));
endmodule
