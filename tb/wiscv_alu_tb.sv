// wiscv_alu_tb: every ALU operation on random and corner-case operands,
// compared with values computed here from the RISC-V definitions.
// The expected values come from the RISC-V definitions of the operations;
// the paper gives no ALU details.
module wiscv_alu_tb;
  import wiscv_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  wiscv_alu dut (.op, .a, .b, .y);

  function automatic logic [31:0] ref_alu(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx = longint'($signed(x));
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x + ~z + 1;
      ALU_SLL:  return 32'({32'd0, x} << z[4:0]);
      ALU_SLT:  return (sx < longint'($signed(z))) ? 1 : 0;
      ALU_SLTU: return (longint'(x) < longint'(z)) ? 1 : 0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return x / (32'd1 << z[4:0]);
      ALU_SRA:  return 32'(sx >>> z[4:0]);
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      default:  return z;
    endcase
  endfunction

  initial begin
    automatic logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1F};
    for (int i = 0; i < 4000; i++) begin
      op = alu_op_e'($urandom_range(0, 10));
      a = ($urandom_range(0, 3) == 0) ? corner[$urandom_range(0, 5)] : $urandom;
      b = ($urandom_range(0, 3) == 0) ? corner[$urandom_range(0, 5)] : $urandom;
      #1;
      e = ref_alu(op, a, b);
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 5) $display("op=%s a=%h b=%h y=%h expected %h", op.name(), a, b, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
