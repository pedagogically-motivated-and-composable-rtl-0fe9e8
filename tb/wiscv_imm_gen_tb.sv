// wiscv_imm_gen_tb: encodes random immediates into I, S, B, U and J
// instructions with the test package's assembler and checks that the
// generator recovers the sign-extended value.
// The immediate formats follow the RISC-V specification; the paper gives
// no details.
module wiscv_imm_gen_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;
  logic [31:0] instr, imm, e;
  int checks = 0, failures = 0;
  wiscv_imm_gen dut (.instr, .imm);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      automatic int f = $urandom_range(0, 5);
      automatic logic [31:0] r = $urandom;
      case (f)
        0: begin instr = enc_i(r[11:0], 5'($urandom), 3'($urandom), 5'($urandom), OP_IMM);
                 e = 32'($signed(r[11:0])); end
        1: begin instr = enc_s(r[11:0], 5'($urandom), 5'($urandom), 3'd2);
                 e = 32'($signed(r[11:0])); end
        2: begin instr = enc_b({r[12:1], 1'b0}, 5'($urandom), 5'($urandom), 3'd0);
                 e = 32'($signed({r[12:1], 1'b0})); end
        3: begin instr = enc_u(r[19:0], 5'($urandom), OP_LUI); e = {r[19:0], 12'd0}; end
        4: begin instr = enc_j({r[20:1], 1'b0}, 5'($urandom));
                 e = 32'($signed({r[20:1], 1'b0})); end
        default: begin instr = enc_r(7'($urandom), 5'($urandom), 5'($urandom), 3'($urandom), 5'($urandom), OP_REG);
                 e = 0; end
      endcase
      #1;
      checks++;
      if (imm !== e) begin failures++; if (failures < 5) $display("fmt %0d instr=%h imm=%h exp=%h", f, instr, imm, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
