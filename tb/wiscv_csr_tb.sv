// wiscv_csr_tb: directed test of the machine-mode CSR file: read/write/
// set/clear on mscratch, mtvec alignment, illegal accesses (unknown CSR,
// write to a read-only counter), trap entry (mepc, mcause, mtval, MIE ->
// MPIE), MRET (MPIE -> MIE), and the cycle and instret counters.
// The paper names exceptions only; the expected behaviour follows the
// RISC-V privileged specification.
module wiscv_csr_tb;
  import wiscv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, wr = 0, trap = 0, mret = 0, retire = 0, ill;
  csr_op_e op = CSR_NONE;
  logic [11:0] addr = '0;
  logic [31:0] wd = '0, cause = '0, epc = '0, tval = '0;
  logic [31:0] rd, mtvec, mepc;
  int checks = 0, failures = 0;

  wiscv_csr #(.MTVEC_RESET(32'h100)) dut (.clk, .rst_n, .csr_en(en), .csr_op(op), .csr_addr(addr),
    .csr_wdata(wd), .csr_wr(wr), .csr_rdata(rd), .csr_illegal(ill), .trap, .trap_cause(cause),
    .trap_epc(epc), .trap_tval(tval), .mret, .retire, .mtvec, .mepc);

  initial begin
    #100_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string s, bit c);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // One CSR instruction: returns the old value and the illegal flag.
  task automatic access(csr_op_e o, logic [11:0] a, logic [31:0] d, bit w,
                        output logic [31:0] old, output logic bad);
    @(negedge clk);
    en = 1; op = o; addr = a; wd = d; wr = w;
    #1 old = rd; bad = ill;
    @(posedge clk); #1 en = 0; op = CSR_NONE;
  endtask

  initial begin
    logic [31:0] v, c0, c1;
    logic b;
    repeat (2) @(posedge clk); rst_n = 1;
    chk("mtvec reset", mtvec == 32'h100);
    access(CSR_RW, CSR_MSCRATCH, 32'hDEAD_BEEF, 1, v, b);
    access(CSR_RS, CSR_MSCRATCH, 32'h0000_00F0, 1, v, b); chk("rw then rs old", v == 32'hDEAD_BEEF && !b);
    access(CSR_RC, CSR_MSCRATCH, 32'hFFFF_0000, 1, v, b); chk("rs result", v == 32'hDEAD_BEFF);
    access(CSR_RS, CSR_MSCRATCH, 32'h0, 0, v, b);         chk("rc result", v == 32'h0000_BEFF);
    access(CSR_RW, CSR_MTVEC, 32'h0000_0203, 1, v, b);    chk("mtvec aligned", mtvec == 32'h200);
    access(CSR_RS, 12'h7C0, 32'h1, 1, v, b);              chk("unknown csr illegal", b);
    access(CSR_RS, CSR_CYCLE, 32'h0, 0, c0, b);           chk("cycle read legal", !b);
    access(CSR_RS, CSR_CYCLE, 32'h1, 1, v, b);            chk("cycle write illegal", b);
    access(CSR_RS, CSR_CYCLE, 32'h0, 0, c1, b);           chk("cycle counts", c1 - c0 == 2);
    access(CSR_RS, CSR_MSTATUS, 32'h8, 1, v, b);          // MIE = 1
    // trap
    @(negedge clk); trap = 1; cause = EXC_ECALL_M; epc = 32'h1234; tval = 32'h55;
    @(posedge clk); #1 trap = 0;
    chk("mepc", mepc == 32'h1234);
    access(CSR_RS, CSR_MCAUSE, 0, 0, v, b);   chk("mcause", v == 11);
    access(CSR_RS, CSR_MTVAL, 0, 0, v, b);    chk("mtval", v == 32'h55);
    access(CSR_RS, CSR_MSTATUS, 0, 0, v, b);  chk("MIE cleared, MPIE set", v[3] == 0 && v[7] == 1);
    @(negedge clk); mret = 1; @(posedge clk); #1 mret = 0;
    access(CSR_RS, CSR_MSTATUS, 0, 0, v, b);  chk("MRET restores MIE", v[3] == 1);
    // a CSR write in the cycle of a trap is dropped
    @(negedge clk); en = 1; op = CSR_RW; addr = CSR_MSCRATCH; wd = 32'h1; wr = 1; trap = 1;
    @(posedge clk); #1 en = 0; trap = 0;
    access(CSR_RS, CSR_MSCRATCH, 0, 0, v, b); chk("write suppressed by trap", v == 32'h0000_BEFF);
    // instret
    access(CSR_RS, CSR_INSTRET, 0, 0, c0, b);
    @(negedge clk); retire = 1; repeat (5) @(negedge clk); retire = 0;
    access(CSR_RS, CSR_INSTRET, 0, 0, c1, b); chk("instret +5", c1 - c0 == 5);
    access(CSR_RS, CSR_MISA, 0, 0, v, b);     chk("misa RV32I", v == 32'h4000_0100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
