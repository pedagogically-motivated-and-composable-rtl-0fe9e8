// wiscv_pkg: types and constants shared by the WISCV RV32I pipeline.
//
// Holds the RISC-V opcode and CSR numbers (from the RISC-V specifications),
// the ALU operation encoding and the control bundle produced by the decoder
// (both this design's own), the request/response structs used on every
// memory-like port (core <-> cache <-> memory), the retirement trace record,
// and the load/store byte-lane helpers used in the MEM stage.
//
// Memory port protocol (this design's own choice): the requester raises
// req.valid with addr/we/be/wdata and holds them stable until the responder
// answers with rsp.ready for one cycle; for a read rsp.rdata is valid in
// that same cycle. A write completes in the cycle ready is seen.
// The paper gives none of these types; all of them are this design's own,
// except the opcode and CSR numbers, which come from the RISC-V
// specifications.
package wiscv_pkg;

  localparam int XLEN = 32;

  // RV32I major opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  localparam logic [31:0] NOP = 32'h0000_0013;  // addi x0, x0, 0

  // Machine-mode CSR addresses
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MTVAL    = 12'h343;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH  = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH= 12'hB82;
  localparam logic [11:0] CSR_CYCLE    = 12'hC00;
  localparam logic [11:0] CSR_INSTRET  = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH   = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH = 12'hC82;
  localparam logic [11:0] CSR_MHARTID  = 12'hF14;

  // Exception cause codes (mcause)
  localparam logic [31:0] EXC_INSTR_MISALIGNED = 32'd0;
  localparam logic [31:0] EXC_ILLEGAL          = 32'd2;
  localparam logic [31:0] EXC_BREAKPOINT       = 32'd3;
  localparam logic [31:0] EXC_LOAD_MISALIGNED  = 32'd4;
  localparam logic [31:0] EXC_STORE_MISALIGNED = 32'd6;
  localparam logic [31:0] EXC_ECALL_M          = 32'd11;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] { ASEL_RS1, ASEL_PC, ASEL_ZERO } asel_e;

  typedef enum logic [1:0] { CSR_NONE, CSR_RW, CSR_RS, CSR_RC } csr_op_e;

  typedef enum logic [1:0] { FWD_NONE, FWD_MEM, FWD_WB } fwd_e;

  // Control bundle produced in ID and carried down the pipe.
  typedef struct packed {
    logic        illegal;    // not a supported instruction
    logic        reg_write;  // writes rd
    logic        use_rs1;
    logic        use_rs2;
    asel_e       a_sel;
    logic        b_imm;      // operand B is the immediate
    alu_op_e     alu_op;
    logic        branch;     // conditional branch, funct3 selects compare
    logic        jal;
    logic        jalr;
    logic        mem_read;
    logic        mem_write;
    logic [2:0]  funct3;     // load/store size, branch condition
    csr_op_e     csr_op;
    logic        csr_imm;    // CSR source is the zimm field
    logic        ecall;
    logic        ebreak;
    logic        mret;
  } ctrl_t;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;   // byte address; bits [1:0] ignored by memories
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        ready;
    logic [31:0] rdata;
  } mem_rsp_t;

  // One record per instruction leaving WB (retired, or trapped).
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    logic        rd_we;
    logic [4:0]  rd;
    logic [31:0] rd_wdata;
    logic        trap;     // instruction raised an exception, did not retire
    logic [31:0] cause;
  } trace_t;

  // Sign- or zero-extend the addressed byte/half/word of a loaded word.
  function automatic logic [31:0] load_extract(logic [31:0] word, logic [1:0] off, logic [2:0] f3);
    logic [31:0] sh;
    sh = word >> {off, 3'b000};
    unique case (f3)
      3'b000:  return {{24{sh[7]}}, sh[7:0]};     // LB
      3'b001:  return {{16{sh[15]}}, sh[15:0]};   // LH
      3'b100:  return {24'd0, sh[7:0]};           // LBU
      3'b101:  return {16'd0, sh[15:0]};          // LHU
      default: return word;                        // LW
    endcase
  endfunction

  // Byte enables of a store.
  function automatic logic [3:0] store_be(logic [1:0] off, logic [2:0] f3);
    unique case (f3[1:0])
      2'b00:   return 4'b0001 << off;
      2'b01:   return 4'b0011 << off;
      default: return 4'b1111;
    endcase
  endfunction

  // Replicate store data onto its byte lanes.
  function automatic logic [31:0] store_data(logic [31:0] v, logic [2:0] f3);
    unique case (f3[1:0])
      2'b00:   return {4{v[7:0]}};
      2'b01:   return {2{v[15:0]}};
      default: return v;
    endcase
  endfunction

  // Access of this size at this offset is misaligned.
  function automatic logic misaligned(logic [1:0] off, logic [2:0] f3);
    unique case (f3[1:0])
      2'b00:   return 1'b0;
      2'b01:   return off[0];
      default: return off != 2'b00;
    endcase
  endfunction

endpackage
