// wiscv_regfile: the RV32I integer register file, x0..x31.
//
// Two asynchronous read ports (used in ID) and one synchronous write port
// (driven by WB). x0 always reads zero and ignores writes, as the ISA
// requires. A write and a read of the same register in the same cycle
// return the new value (write-through bypass), so the pipeline needs no
// separate WB->ID forwarding path; that bypass and the reset-to-zero of all
// registers are this design's choices, not taken from the paper.
// BYPASS=0 removes the bypass; the single-cycle core needs that, since there
// the value being written is computed from the operands being read.
module wiscv_regfile #(
  parameter int NREGS  = 32,
  parameter bit BYPASS = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  rs1_addr,
  input  logic [4:0]  rs2_addr,
  output logic [31:0] rs1_data,
  output logic [31:0] rs2_data,
  input  logic        we,
  input  logic [4:0]  rd_addr,
  input  logic [31:0] rd_data
);
  logic [31:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && rd_addr != 5'd0) begin
      regs[rd_addr] <= rd_data;
    end
  end

  always_comb begin
    if (rs1_addr == 5'd0)                rs1_data = '0;
    else if (BYPASS && we && rd_addr == rs1_addr)  rs1_data = rd_data;
    else                                 rs1_data = regs[rs1_addr];
    if (rs2_addr == 5'd0)                rs2_data = '0;
    else if (BYPASS && we && rd_addr == rs2_addr)  rs2_data = rd_data;
    else                                 rs2_data = regs[rs2_addr];
  end
endmodule
