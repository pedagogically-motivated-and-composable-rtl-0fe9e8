// wiscv_alu: RV32I integer ALU (combinational).
//
// Computes add, subtract, shifts (shift amount = b[4:0]), signed and
// unsigned set-less-than, and the bitwise operations, plus a pass-through of
// operand B used for LUI. The operation set follows the RISC-V base ISA; its
// encoding (alu_op_e in wiscv_pkg) is this design's own. No latency: the
// result is valid in the same cycle as the operands (EX stage).
// The paper names the ALU only as part of the five-stage pipeline; its
// insides here are the textbook ones.
module wiscv_alu
  import wiscv_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = a + b;
    endcase
  end
endmodule
