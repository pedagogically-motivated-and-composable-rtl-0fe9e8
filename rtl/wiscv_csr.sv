// wiscv_csr: machine-mode control/status registers and exception state.
//
// Implements the CSRs a bare-metal RISC-V program needs to handle
// exceptions and to measure itself: mstatus (MIE, MPIE; MPP reads as
// machine mode), misa, mtvec (direct mode only), mscratch, mepc, mcause,
// mtval, mhartid (0) and the 64-bit mcycle/minstret counters with their
// user read-only aliases cycle/instret.
// The pipeline performs CSR instructions in the MEM stage: csr_en with
// csr_op/csr_addr/csr_wdata reads the old value on csr_rdata in the same
// cycle and writes the new value (write, set or clear) at the clock edge.
// csr_illegal flags an unknown CSR or a write to a read-only one; the
// pipeline then raises an illegal-instruction trap instead.
// trap saves epc/cause/tval, clears MIE into MPIE and the pipeline redirects
// fetch to mtvec; mret restores MIE from MPIE and the pipeline redirects to
// mepc. mtvec and mepc are word aligned, so their two low bits are always
// zero. The paper names "Exceptions" as part of the core; which CSRs and
// causes exist, and that there are no interrupts, is this design's choice,
// following the RISC-V privileged specification.
module wiscv_csr
  import wiscv_pkg::*;
#(
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_en,
  input  csr_op_e     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  input  logic        csr_wr,      // rs1/zimm field non-zero (or CSRRW)
  output logic [31:0] csr_rdata,
  output logic        csr_illegal,
  input  logic        trap,
  input  logic [31:0] trap_cause,
  input  logic [31:0] trap_epc,
  input  logic [31:0] trap_tval,
  input  logic        mret,
  input  logic        retire,
  output logic [31:0] mtvec,
  output logic [31:0] mepc
);
  logic        mie, mpie;
  logic [31:0] mscratch, mcause, mtval;
  logic [63:0] mcycle, minstret;
  logic        known, read_only;
  logic [31:0] newval;

  always_comb begin
    known = 1'b1;
    unique case (csr_addr)
      CSR_MSTATUS:                csr_rdata = {19'd0, 2'b11, 3'd0, mpie, 3'd0, mie, 3'd0};
      CSR_MISA:                   csr_rdata = 32'h4000_0100;  // RV32I
      CSR_MTVEC:                  csr_rdata = mtvec;
      CSR_MSCRATCH:               csr_rdata = mscratch;
      CSR_MEPC:                   csr_rdata = mepc;
      CSR_MCAUSE:                 csr_rdata = mcause;
      CSR_MTVAL:                  csr_rdata = mtval;
      CSR_MCYCLE, CSR_CYCLE:      csr_rdata = mcycle[31:0];
      CSR_MCYCLEH, CSR_CYCLEH:    csr_rdata = mcycle[63:32];
      CSR_MINSTRET, CSR_INSTRET:  csr_rdata = minstret[31:0];
      CSR_MINSTRETH, CSR_INSTRETH:csr_rdata = minstret[63:32];
      CSR_MHARTID:                csr_rdata = '0;
      default: begin csr_rdata = '0; known = 1'b0; end
    endcase
    read_only = csr_addr[11:10] == 2'b11;
    csr_illegal = csr_en && (!known || (read_only && csr_wr));
    unique case (csr_op)
      CSR_RW:  newval = csr_wdata;
      CSR_RS:  newval = csr_rdata | csr_wdata;
      CSR_RC:  newval = csr_rdata & ~csr_wdata;
      default: newval = csr_rdata;
    endcase
  end

  logic do_write;
  assign do_write = csr_en && csr_wr && !csr_illegal && !trap;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mie <= 1'b0; mpie <= 1'b0;
      mtvec <= MTVEC_RESET; mscratch <= '0; mepc <= '0; mcause <= '0; mtval <= '0;
      mcycle <= '0; minstret <= '0;
    end else begin
      mcycle <= mcycle + 64'd1;
      if (retire) minstret <= minstret + 64'd1;
      if (trap) begin
        mepc   <= {trap_epc[31:2], 2'b00};
        mcause <= trap_cause;
        mtval  <= trap_tval;
        mpie   <= mie;
        mie    <= 1'b0;
      end else if (mret) begin
        mie  <= mpie;
        mpie <= 1'b1;
      end else if (do_write) begin
        unique case (csr_addr)
          CSR_MSTATUS:   begin mie <= newval[3]; mpie <= newval[7]; end
          CSR_MTVEC:     mtvec    <= {newval[31:2], 2'b00};
          CSR_MSCRATCH:  mscratch <= newval;
          CSR_MEPC:      mepc     <= {newval[31:2], 2'b00};
          CSR_MCAUSE:    mcause   <= newval;
          CSR_MTVAL:     mtval    <= newval;
          CSR_MCYCLE:    mcycle[31:0]    <= newval;
          CSR_MCYCLEH:   mcycle[63:32]   <= newval;
          CSR_MINSTRET:  minstret[31:0]  <= newval;
          CSR_MINSTRETH: minstret[63:32] <= newval;
          default: ;
        endcase
      end
    end
  end
endmodule
