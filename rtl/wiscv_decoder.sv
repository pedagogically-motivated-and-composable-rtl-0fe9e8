// wiscv_decoder: instruction decoder of the ID stage (combinational).
//
// Turns a 32-bit instruction into the ctrl_t bundle that travels down the
// pipe: register use, ALU operation and operand sources, branch/jump kind,
// memory access, CSR operation and the SYSTEM instructions ECALL, EBREAK and
// MRET. It covers RV32I plus Zicsr and MRET, which is what the RISC-V
// compiler emits for bare-metal C programs. FENCE and FENCE.I decode as
// no-ops (the pipeline is in order and has a single hart). Anything else sets
// ctrl.illegal, which the pipeline turns into an illegal-instruction trap.
// ctrl.funct3 is instr[14:12] passed on unchanged, for the branch compare
// and the load/store width later in the pipe.
// The choice of ISA subset is this design's; the paper only names RISC-V.
module wiscv_decoder
  import wiscv_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];

  function automatic alu_op_e alu_from_f3(logic [2:0] fn3, logic alt);
    unique case (fn3)
      3'b000:  return alt ? ALU_SUB : ALU_ADD;
      3'b001:  return ALU_SLL;
      3'b010:  return ALU_SLT;
      3'b011:  return ALU_SLTU;
      3'b100:  return ALU_XOR;
      3'b101:  return alt ? ALU_SRA : ALU_SRL;
      3'b110:  return ALU_OR;
      default: return ALU_AND;
    endcase
  endfunction

  always_comb begin
    ctrl = '0;
    ctrl.a_sel  = ASEL_RS1;
    ctrl.alu_op = ALU_ADD;
    ctrl.funct3 = f3;
    ctrl.csr_op = CSR_NONE;
    unique case (opc)
      OP_LUI: begin
        ctrl.reg_write = 1'b1; ctrl.a_sel = ASEL_ZERO; ctrl.b_imm = 1'b1;
      end
      OP_AUIPC: begin
        ctrl.reg_write = 1'b1; ctrl.a_sel = ASEL_PC; ctrl.b_imm = 1'b1;
      end
      OP_JAL: begin
        ctrl.reg_write = 1'b1; ctrl.jal = 1'b1;
      end
      OP_JALR: begin
        ctrl.reg_write = 1'b1; ctrl.jalr = 1'b1; ctrl.use_rs1 = 1'b1;
        ctrl.illegal = (f3 != 3'b000);
      end
      OP_BRANCH: begin
        ctrl.branch = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.illegal = (f3 == 3'b010) || (f3 == 3'b011);
      end
      OP_LOAD: begin
        ctrl.reg_write = 1'b1; ctrl.mem_read = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.b_imm = 1'b1;
        ctrl.illegal = (f3 == 3'b011) || (f3 == 3'b110) || (f3 == 3'b111);
      end
      OP_STORE: begin
        ctrl.mem_write = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.b_imm = 1'b1;
        ctrl.illegal = (f3 > 3'b010);
      end
      OP_IMM: begin
        ctrl.reg_write = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.b_imm = 1'b1;
        ctrl.alu_op = alu_from_f3(f3, (f3 == 3'b101) && f7[5]);
        if (f3 == 3'b001) ctrl.illegal = (f7 != 7'b0000000);
        if (f3 == 3'b101) ctrl.illegal = (f7 != 7'b0000000) && (f7 != 7'b0100000);
      end
      OP_REG: begin
        ctrl.reg_write = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.alu_op = alu_from_f3(f3, f7[5]);
        ctrl.illegal = !((f7 == 7'b0000000) ||
                         (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101)));
      end
      OP_FENCE: begin
        ctrl.illegal = (f3 > 3'b001);
      end
      OP_SYSTEM: begin
        if (f3 == 3'b000) begin
          if      (instr == 32'h0000_0073) ctrl.ecall  = 1'b1;
          else if (instr == 32'h0010_0073) ctrl.ebreak = 1'b1;
          else if (instr == 32'h3020_0073) ctrl.mret   = 1'b1;
          else                             ctrl.illegal = 1'b1;
        end else if (f3 == 3'b100) begin
          ctrl.illegal = 1'b1;
        end else begin
          ctrl.reg_write = 1'b1;
          ctrl.csr_imm   = f3[2];
          ctrl.use_rs1   = !f3[2];
          unique case (f3[1:0])
            2'b01:   ctrl.csr_op = CSR_RW;
            2'b10:   ctrl.csr_op = CSR_RS;
            default: ctrl.csr_op = CSR_RC;
          endcase
        end
      end
      default: ctrl.illegal = 1'b1;
    endcase
    if (ctrl.illegal) begin
      ctrl.reg_write = 1'b0; ctrl.mem_read = 1'b0; ctrl.mem_write = 1'b0;
      ctrl.branch = 1'b0; ctrl.jal = 1'b0; ctrl.jalr = 1'b0; ctrl.csr_op = CSR_NONE;
    end
  end
endmodule
