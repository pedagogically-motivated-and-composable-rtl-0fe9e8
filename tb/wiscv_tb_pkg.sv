// wiscv_tb_pkg: verification helpers shared by the core and system tests.
//
//  * enc_*: RV32I instruction encoders (a tiny assembler).
//  * rv_iss: an instruction-set reference model of RV32I + Zicsr + MRET with
//    the same exception rules and CSR set as the pipeline. step() executes
//    one instruction and returns the record the pipeline's trace port should
//    show for it, so the two can be compared instruction by instruction.
//  * gen_program: a random test generator. It writes a program into a word
//    array: a reset jump, a trap handler at 0x100 that skips the faulting
//    instruction (mepc += 4; mret), and a body of random blocks - ALU
//    operations, loads and stores around a data pointer, forward branches,
//    counted loops, JAL/JALR, CSR accesses and deliberate exceptions - ending
//    in a self-loop at the returned address.
// Register use in generated code: x1..x26 random, x27 loop counter, x28/x29
// trap handler, x30 data pointer (DATA_PTR), x31 unused.
// The paper's platform has a reference mode ("no core") and a test
// generator; this reference model and generator are this design's own
// versions of both.
package wiscv_tb_pkg;
  import wiscv_pkg::*;

  localparam logic [31:0] HANDLER   = 32'h0000_0100;
  localparam logic [31:0] BODY      = 32'h0000_0200;
  localparam logic [31:0] DATA_PTR  = 32'h0000_9000;   // x30; accesses reach +-2 KiB
  localparam logic [31:0] DATA_BASE = DATA_PTR - 32'h800;
  localparam int          DATA_BYTES = 4096;

  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                        logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], OP_STORE};
  endfunction
  function automatic logic [31:0] enc_b(logic [12:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], OP_BRANCH};
  endfunction
  function automatic logic [31:0] enc_u(logic [19:0] imm, logic [4:0] rd, logic [6:0] opc);
    return {imm, rd, opc};
  endfunction
  function automatic logic [31:0] enc_j(logic [20:0] imm, logic [4:0] rd);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd, OP_JAL};
  endfunction
  function automatic logic [31:0] addi(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return enc_i(imm, rs1, 3'b000, rd, OP_IMM);
  endfunction
  function automatic logic [31:0] csr(logic [11:0] a, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd);
    return enc_i(a, rs1, f3, rd, OP_SYSTEM);
  endfunction
  localparam logic [31:0] ECALL  = 32'h0000_0073;
  localparam logic [31:0] EBREAK = 32'h0010_0073;
  localparam logic [31:0] MRET   = 32'h3020_0073;

  class rv_iss;
    int unsigned words;
    logic [31:0] mem [];
    logic [31:0] x [32];
    logic [31:0] pc;
    logic [31:0] mtvec, mepc, mcause, mtval, mscratch;
    logic        mie, mpie;

    function new(int unsigned nwords);
      words = nwords;
      mem = new[nwords];
      foreach (x[i]) x[i] = '0;
      pc = '0; mtvec = HANDLER; mepc = '0; mcause = '0; mtval = '0; mscratch = '0;
      mie = 0; mpie = 0;
    endfunction

    function logic [31:0] rd_word(logic [31:0] a);
      return mem[(a >> 2) % words];
    endfunction

    function void wr(logic [31:0] a, logic [31:0] d, logic [3:0] be);
      int unsigned i = (a >> 2) % words;
      for (int b = 0; b < 4; b++) if (be[b]) mem[i][8*b +: 8] = d[8*b +: 8];
    endfunction

    // Returns 0 and the value for a known CSR, 1 for an unknown one.
    function bit csr_read(logic [11:0] a, output logic [31:0] v);
      v = '0;
      case (a)
        CSR_MSTATUS:  v = {19'd0, 2'b11, 3'd0, mpie, 3'd0, mie, 3'd0};
        CSR_MISA:     v = 32'h4000_0100;
        CSR_MTVEC:    v = mtvec;
        CSR_MSCRATCH: v = mscratch;
        CSR_MEPC:     v = mepc;
        CSR_MCAUSE:   v = mcause;
        CSR_MTVAL:    v = mtval;
        CSR_MHARTID:  v = '0;
        default:      return 1;
      endcase
      return 0;
    endfunction

    function void csr_write(logic [11:0] a, logic [31:0] v);
      case (a)
        CSR_MSTATUS:  begin mie = v[3]; mpie = v[7]; end
        CSR_MTVEC:    mtvec = {v[31:2], 2'b00};
        CSR_MSCRATCH: mscratch = v;
        CSR_MEPC:     mepc = {v[31:2], 2'b00};
        CSR_MCAUSE:   mcause = v;
        CSR_MTVAL:    mtval = v;
        default: ;
      endcase
    endfunction

    function trace_t step();
      trace_t t;
      logic [31:0] in, a, b, imm_i, imm_s, imm_b, imm_j, res, nxt, ea, v;
      logic [6:0] opc; logic [2:0] f3; logic [6:0] f7; logic [4:0] rd, rs1, rs2;
      bit wr_rd, exc; logic [31:0] cause, tval;
      in = rd_word(pc);
      opc = in[6:0]; f3 = in[14:12]; f7 = in[31:25]; rd = in[11:7]; rs1 = in[19:15]; rs2 = in[24:20];
      a = x[rs1]; b = x[rs2];
      imm_i = {{20{in[31]}}, in[31:20]};
      imm_s = {{20{in[31]}}, in[31:25], in[11:7]};
      imm_b = {{19{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
      imm_j = {{11{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
      nxt = pc + 4; wr_rd = 0; res = '0; exc = 0; cause = '0; tval = '0;
      case (opc)
        OP_LUI:   begin wr_rd = 1; res = {in[31:12], 12'd0}; end
        OP_AUIPC: begin wr_rd = 1; res = pc + {in[31:12], 12'd0}; end
        OP_JAL:   begin wr_rd = 1; res = pc + 4; nxt = pc + imm_j; end
        OP_JALR:  if (f3 != 0) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
                  else begin wr_rd = 1; res = pc + 4; nxt = (a + imm_i) & ~32'd1; end
        OP_BRANCH: begin
          bit c;
          case (f3)
            3'b000: c = a == b;
            3'b001: c = a != b;
            3'b100: c = $signed(a) <  $signed(b);
            3'b101: c = $signed(a) >= $signed(b);
            3'b110: c = a < b;
            3'b111: c = a >= b;
            default: begin c = 0; exc = 1; cause = EXC_ILLEGAL; tval = in; end
          endcase
          if (c) nxt = pc + imm_b;
        end
        OP_LOAD: begin
          ea = a + imm_i;
          if (f3 == 3 || f3 == 6 || f3 == 7) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
          else if (misaligned(ea[1:0], f3)) begin exc = 1; cause = EXC_LOAD_MISALIGNED; tval = ea; end
          else begin wr_rd = 1; res = load_extract(rd_word(ea), ea[1:0], f3); end
        end
        OP_STORE: begin
          ea = a + imm_s;
          if (f3 > 2) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
          else if (misaligned(ea[1:0], f3)) begin exc = 1; cause = EXC_STORE_MISALIGNED; tval = ea; end
          else wr(ea, store_data(b, f3), store_be(ea[1:0], f3));
        end
        OP_IMM, OP_REG: begin
          logic [31:0] o2; bit alt, bad;
          o2 = (opc == OP_IMM) ? imm_i : b;
          alt = f7[5] && (opc == OP_REG || f3 == 3'b101);
          bad = (opc == OP_REG) ? !(f7 == 0 || (f7 == 7'h20 && (f3 == 0 || f3 == 5)))
                                : ((f3 == 1 && f7 != 0) || (f3 == 5 && f7 != 0 && f7 != 7'h20));
          case (f3)
            3'b000: res = alt ? a - o2 : a + o2;
            3'b001: res = a << o2[4:0];
            3'b010: res = {31'd0, $signed(a) < $signed(o2)};
            3'b011: res = {31'd0, a < o2};
            3'b100: res = a ^ o2;
            3'b101: res = alt ? 32'($signed(a) >>> o2[4:0]) : a >> o2[4:0];
            3'b110: res = a | o2;
            default: res = a & o2;
          endcase
          if (bad) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end else wr_rd = 1;
        end
        OP_FENCE: if (f3 > 1) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
        OP_SYSTEM: begin
          if (in == ECALL) begin exc = 1; cause = EXC_ECALL_M; end
          else if (in == EBREAK) begin exc = 1; cause = EXC_BREAKPOINT; tval = pc; end
          else if (in == MRET) begin nxt = mepc; mie = mpie; mpie = 1; end
          else if (f3 == 0 || f3 == 4) begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
          else begin
            logic [31:0] src, nv; bit w;
            src = f3[2] ? {27'd0, rs1} : a;
            w = (f3[1:0] == 2'b01) || rs1 != 0;
            if (csr_read(in[31:20], v) || (in[31:30] == 2'b11 && w)) begin
              exc = 1; cause = EXC_ILLEGAL; tval = in;
            end else begin
              case (f3[1:0])
                2'b01: nv = src;
                2'b10: nv = v | src;
                default: nv = v & ~src;
              endcase
              if (w) csr_write(in[31:20], nv);
              wr_rd = 1; res = v;
            end
          end
        end
        default: begin exc = 1; cause = EXC_ILLEGAL; tval = in; end
      endcase
      // Jump to a misaligned target (only reachable when no other cause).
      if (!exc && nxt[1] && (opc == OP_JAL || opc == OP_JALR || opc == OP_BRANCH)) begin
        exc = 1; cause = EXC_INSTR_MISALIGNED; tval = nxt; wr_rd = 0;
      end
      t = '0;
      t.valid = 1; t.pc = pc; t.instr = in;
      if (exc) begin
        t.trap = 1; t.cause = cause;
        mepc = pc; mcause = cause; mtval = tval; mpie = mie; mie = 0;
        pc = mtvec;
      end else begin
        t.rd_we = wr_rd && rd != 0; t.rd = rd; t.rd_wdata = res;
        if (t.rd_we) x[rd] = res;
        pc = nxt;
      end
      if (!t.rd_we) begin t.rd = '0; t.rd_wdata = '0; end
      return t;
    endfunction
  endclass

  function automatic logic [4:0] rreg();
    return 5'($urandom_range(1, 26));
  endfunction
  function automatic logic [4:0] sreg();   // any readable register
    return 5'($urandom_range(0, 31));
  endfunction

  function automatic logic [31:0] rand_alu();
    logic [2:0] f3 = 3'($urandom);
    if ($urandom_range(0, 9) == 0)
      return enc_u(20'($urandom), rreg(), ($urandom_range(0, 1) != 0) ? OP_LUI : OP_AUIPC);
    if ($urandom_range(0, 1) != 0) begin
      logic [6:0] f7 = 7'b0;
      if (f3 == 3'b000 || f3 == 3'b101) f7 = ($urandom_range(0, 1) != 0) ? 7'h20 : 7'h00;
      return enc_r(f7, sreg(), sreg(), f3, rreg(), OP_REG);
    end else begin
      logic [11:0] imm = 12'($urandom);
      if (f3 == 3'b001) imm[11:5] = 7'h00;
      if (f3 == 3'b101) imm[11:5] = ($urandom_range(0, 1) != 0) ? 7'h20 : 7'h00;
      return enc_i(imm, sreg(), f3, rreg(), OP_IMM);
    end
  endfunction

  function automatic logic [31:0] rand_mem(bit allow_misaligned);
    logic [2:0] f3;
    logic [11:0] off = 12'($urandom);
    bit st = $urandom_range(0, 2) == 0;
    f3 = st ? 3'($urandom_range(0, 2)) : 3'(($urandom_range(0, 4) == 4) ? 5 : $urandom_range(0, 4));
    if (f3 == 3'b011) f3 = 3'b010;
    if (!(allow_misaligned && $urandom_range(0, 15) == 0)) begin
      if (f3[1:0] == 2'b01) off[0] = 1'b0;
      if (f3[1:0] == 2'b10) off[1:0] = 2'b00;
    end
    return st ? enc_s(off, sreg(), 5'd30, f3) : enc_i(off, 5'd30, f3, rreg(), OP_LOAD);
  endfunction

  // Fills prog (word array, index = address/4) and returns the address of
  // the final self-loop. nblocks (at most 1000) random blocks; with_traps
  // enables deliberate exceptions and misaligned accesses.
  function automatic logic [31:0] gen_program(ref logic [31:0] prog [], input int nblocks,
                                              input bit with_traps);
    int p;
    foreach (prog[i]) prog[i] = NOP;
    prog[0] = enc_j(21'(BODY), 5'd0);
    p = HANDLER / 4;
    prog[p++] = csr(CSR_MEPC, 5'd0, 3'b010, 5'd29);
    prog[p++] = addi(5'd29, 5'd29, 12'd4);
    prog[p++] = csr(CSR_MEPC, 5'd29, 3'b001, 5'd0);
    prog[p++] = csr(CSR_MCAUSE, 5'd0, 3'b010, 5'd28);
    prog[p++] = MRET;
    p = BODY / 4;
    prog[p++] = enc_u(20'(DATA_PTR >> 12), 5'd30, OP_LUI);
    for (int k = 0; k < nblocks; k++) begin
      int kind = $urandom_range(0, 99);
      if (kind < 35) begin
        prog[p++] = rand_alu();
      end else if (kind < 60) begin
        prog[p++] = rand_mem(with_traps);
        if ($urandom_range(0, 2) == 0) prog[p++] = rand_alu();   // often a load-use pair
      end else if (kind < 72) begin                // forward conditional branch
        int skip = $urandom_range(0, 3);
        logic [2:0] f3 = 3'($urandom_range(0, 5)); if (f3 >= 2) f3 = f3 + 2;
        prog[p++] = enc_b(13'((skip + 1) * 4), sreg(), sreg(), f3);
        for (int s = 0; s < skip; s++) prog[p++] = rand_alu();
      end else if (kind < 80) begin                // counted loop
        int n = $urandom_range(1, 4);
        prog[p++] = addi(5'd27, 5'd0, 12'($urandom_range(2, 6)));
        for (int s = 0; s < n; s++) prog[p++] = ($urandom_range(0, 1) != 0) ? rand_alu() : rand_mem(0);
        prog[p++] = addi(5'd27, 5'd27, 12'hFFF);
        prog[p++] = enc_b(13'(-(n + 1) * 4), 5'd0, 5'd27, 3'b001);
      end else if (kind < 86) begin                // JAL forward / JALR over one word
        if ($urandom_range(0, 1) != 0) begin
          int skip = $urandom_range(0, 2);
          prog[p++] = enc_j(21'((skip + 1) * 4), rreg());
          for (int s = 0; s < skip; s++) prog[p++] = rand_alu();
        end else begin
          prog[p++] = enc_u(20'd0, 5'd26, OP_AUIPC);
          prog[p++] = enc_i(12'd12, 5'd26, 3'b000, rreg(), OP_JALR);
          prog[p++] = rand_alu();
        end
      end else if (kind < 94) begin                // CSR access
        logic [2:0] f3 = 3'($urandom_range(1, 7)); if (f3 == 3'b100) f3 = 3'b001;
        prog[p++] = csr(($urandom_range(0, 3) == 0) ? CSR_MSTATUS : CSR_MSCRATCH, sreg(), f3, rreg());
        if ($urandom_range(0, 1) != 0) prog[p++] = rand_alu();
      end else if (with_traps) begin               // deliberate exception
        case ($urandom_range(0, 4))
          0: prog[p++] = ECALL;
          1: prog[p++] = EBREAK;
          2: prog[p++] = 32'hFFFF_FFFF;                       // illegal opcode
          3: prog[p++] = csr(12'h7C0, 5'd1, 3'b001, 5'd2);    // unknown CSR
          default: prog[p++] = csr(CSR_CYCLE, 5'd1, 3'b001, 5'd2);  // write to read-only
        endcase
      end else begin
        prog[p++] = rand_alu();
      end
    end
    prog[p] = enc_j(21'd0, 5'd0);
    return 32'(p * 4);
  endfunction
endpackage
