// wiscv_regfile_tb: random writes and reads against a reference array.
// Checks that x0 stays zero, that written values read back on both ports,
// and that a read in the cycle of a write to the same register returns the
// value being written (the write-through bypass). A second instance with
// BYPASS=0 sees the same traffic and must return the old value instead.
// The paper gives no register-file details; the bypass checked here is
// this design's choice.
module wiscv_regfile_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd, nb1, nb2;
  logic we;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  wiscv_regfile dut (.clk, .rst_n, .rs1_addr(ra1), .rs2_addr(ra2), .rs1_data(rd1), .rs2_data(rd2),
                     .we, .rd_addr(wa), .rd_data(wd));
  wiscv_regfile #(.BYPASS(1'b0)) dut_nb (.clk, .rst_n, .rs1_addr(ra1), .rs2_addr(ra2),
                     .rs1_data(nb1), .rs2_data(nb2), .we, .rd_addr(wa), .rd_data(wd));

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] expect_rd(logic [4:0] a);
    if (a == 0) return 0;
    if (we && wa == a) return wd;
    return model[a];
  endfunction

  initial begin
    foreach (model[i]) model[i] = 0;
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = ($urandom_range(0, 3) == 0) ? wa : 5'($urandom);
      ra2 = 5'($urandom);
      #1;
      checks += 2;
      if (rd1 !== expect_rd(ra1)) begin failures++; if (failures < 5) $display("rs1 x%0d=%h", ra1, rd1); end
      if (rd2 !== expect_rd(ra2)) failures++;
      checks += 2;
      if (nb1 !== (ra1 == 0 ? 32'd0 : model[ra1])) failures++;
      if (nb2 !== (ra2 == 0 ? 32'd0 : model[ra2])) failures++;
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
