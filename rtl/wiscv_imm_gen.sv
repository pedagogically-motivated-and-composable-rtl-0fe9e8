// wiscv_imm_gen: RISC-V immediate generator (combinational, ID stage).
//
// Selects the immediate format from the major opcode and returns the
// sign-extended I, S, B, U or J immediate exactly as the RISC-V
// unprivileged specification lays out the bits. For SYSTEM instructions it
// returns the I-type value (the CSR number sits in the same field). Opcodes
// without an immediate return zero.
// The paper only names RISC-V as the ISA; this block follows the RISC-V
// specification, and splitting it out as its own module is this design's
// choice.
module wiscv_imm_gen
  import wiscv_pkg::*;
(
  input  logic [31:0] instr,
  output logic [31:0] imm
);
  always_comb begin
    unique case (instr[6:0])
      OP_IMM, OP_LOAD, OP_JALR, OP_SYSTEM:
        imm = {{20{instr[31]}}, instr[31:20]};
      OP_STORE:
        imm = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      OP_BRANCH:
        imm = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
      OP_LUI, OP_AUIPC:
        imm = {instr[31:12], 12'd0};
      OP_JAL:
        imm = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};
      default:
        imm = '0;
    endcase
  end
endmodule
