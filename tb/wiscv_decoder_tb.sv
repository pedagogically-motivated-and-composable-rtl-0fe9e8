// wiscv_decoder_tb: directed decode of one instruction of every class,
// and of illegal encodings, checking the control fields that matter for
// each.
// The expected decodings follow the RISC-V specification; the paper gives
// no decoder details.
module wiscv_decoder_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;
  logic [31:0] instr;
  ctrl_t c;
  int checks = 0, failures = 0;
  wiscv_decoder dut (.instr, .ctrl(c));

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  initial begin
    instr = enc_r(7'h20, 5'd2, 5'd1, 3'b000, 5'd3, OP_REG); #1;      // sub
    chk("sub", !c.illegal && c.reg_write && c.use_rs1 && c.use_rs2 && !c.b_imm && c.alu_op == ALU_SUB);
    instr = enc_r(7'h20, 5'd2, 5'd1, 3'b101, 5'd3, OP_REG); #1;      // sra
    chk("sra", c.alu_op == ALU_SRA && !c.illegal);
    instr = enc_r(7'h20, 5'd2, 5'd1, 3'b111, 5'd3, OP_REG); #1;      // bad funct7
    chk("illegal R", c.illegal && !c.reg_write);
    instr = enc_i(12'h405, 5'd1, 3'b101, 5'd3, OP_IMM); #1;           // srai
    chk("srai", c.alu_op == ALU_SRA && c.b_imm && !c.illegal);
    instr = enc_i(12'hFFF, 5'd1, 3'b011, 5'd3, OP_IMM); #1;           // sltiu
    chk("sltiu", c.alu_op == ALU_SLTU && c.b_imm && !c.use_rs2);
    instr = enc_u(20'h12345, 5'd4, OP_LUI); #1;
    chk("lui", c.reg_write && c.a_sel == ASEL_ZERO && c.b_imm && !c.use_rs1);
    instr = enc_u(20'h12345, 5'd4, OP_AUIPC); #1;
    chk("auipc", c.reg_write && c.a_sel == ASEL_PC && c.b_imm);
    instr = enc_j(21'h100, 5'd1); #1;
    chk("jal", c.jal && c.reg_write && !c.branch);
    instr = enc_i(12'h0, 5'd1, 3'b000, 5'd1, OP_JALR); #1;
    chk("jalr", c.jalr && c.use_rs1 && c.reg_write);
    instr = enc_b(13'h10, 5'd2, 5'd1, 3'b101); #1;
    chk("bge", c.branch && c.funct3 == 3'b101 && c.use_rs1 && c.use_rs2 && !c.reg_write);
    instr = enc_b(13'h10, 5'd2, 5'd1, 3'b010); #1;
    chk("illegal branch", c.illegal && !c.branch);
    instr = enc_i(12'h4, 5'd1, 3'b100, 5'd5, OP_LOAD); #1;
    chk("lbu", c.mem_read && !c.mem_write && c.reg_write && c.funct3 == 3'b100 && c.alu_op == ALU_ADD);
    instr = enc_i(12'h4, 5'd1, 3'b011, 5'd5, OP_LOAD); #1;
    chk("illegal load", c.illegal && !c.mem_read);
    instr = enc_s(12'h8, 5'd2, 5'd1, 3'b001); #1;
    chk("sh", c.mem_write && !c.reg_write && c.use_rs2 && c.b_imm);
    instr = csr(CSR_MSCRATCH, 5'd1, 3'b001, 5'd2); #1;
    chk("csrrw", c.csr_op == CSR_RW && c.use_rs1 && !c.csr_imm && c.reg_write);
    instr = csr(CSR_MSCRATCH, 5'd7, 3'b111, 5'd2); #1;
    chk("csrrci", c.csr_op == CSR_RC && c.csr_imm && !c.use_rs1);
    instr = ECALL; #1;  chk("ecall", c.ecall && !c.illegal && !c.reg_write);
    instr = EBREAK; #1; chk("ebreak", c.ebreak && !c.illegal);
    instr = MRET; #1;   chk("mret", c.mret && !c.illegal);
    instr = 32'h1050_0073; #1; chk("wfi not supported", c.illegal);
    instr = 32'h0000_000F; #1; chk("fence", !c.illegal && !c.reg_write && !c.mem_read && !c.mem_write);
    instr = 32'hFFFF_FFFF; #1; chk("illegal opcode", c.illegal);
    instr = 32'h0000_0000; #1; chk("zero word", c.illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
