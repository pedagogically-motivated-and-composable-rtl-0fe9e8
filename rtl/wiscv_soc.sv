// wiscv_soc: the WISCV processor system - core (pipelined by default, or
// single-cycle), L1 instruction and data caches and main memory.
//
// The core's fetch port goes through one wiscv_cache (read only), its data
// port through another (write-through); both caches refill from, and the
// data cache writes through to, the two ports of one unified
// wiscv_main_memory, so instructions and data share one address space.
// Program loading: while load_en is high the core and caches are held in
// reset and load_we/load_addr/load_data write words straight into memory;
// dropping load_en starts the program at RESET_PC with empty caches. This
// replaces rebuilding the hardware for every new program. The board-level
// link that drives the load port (serial line, debugger) is outside this
// module, as are clocks and pins.
// USE_CACHE=0 removes both caches and connects the core straight to the
// memory ports (the "pipelined core without cache" configuration); with
// MEM_LATENCY=1 memory then answers in the cycle of the request.
// trace reports every instruction leaving WB (pc, instruction, register
// write, trap) for comparison against an instruction-set reference model.
// The paper shows a 5-stage core with an L1 cache and exceptions and loads
// programs without rebuilding, and offers the pipelined core with or
// without cache (USE_CACHE) or the single-cycle core in its place
// (PIPELINED=0); split I/D caches over one memory, all sizes
// and latencies are this design's own choices.
module wiscv_soc
  import wiscv_pkg::*;
#(
  parameter int          MEM_WORDS   = 32768,
  parameter int          MEM_LATENCY = 4,
  parameter int          CACHE_LINES = 64,
  parameter int          LINE_WORDS  = 4,
  parameter bit          USE_CACHE   = 1'b1,
  parameter bit          PIPELINED   = 1'b1,
  parameter int          BP_ENTRIES  = 32,
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load_en,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data,
  output trace_t      trace
);
  logic     core_rst_n;
  mem_req_t ic_req, dc_req, im_req, dm_req;
  mem_rsp_t ic_rsp, dc_rsp, im_rsp, dm_rsp;

  assign core_rst_n = rst_n && !load_en;

  if (PIPELINED) begin : g_pipe
    wiscv_core #(.RESET_PC(RESET_PC), .MTVEC_RESET(MTVEC_RESET), .BP_ENTRIES(BP_ENTRIES)) u_core (
      .clk, .rst_n(core_rst_n),
      .imem_req(ic_req), .imem_rsp(ic_rsp),
      .dmem_req(dc_req), .dmem_rsp(dc_rsp),
      .trace
    );
  end else begin : g_single
    // The single-cycle reference core, same ports and trace.
    wiscv_single_cycle_core #(.RESET_PC(RESET_PC), .MTVEC_RESET(MTVEC_RESET)) u_core (
      .clk, .rst_n(core_rst_n),
      .imem_req(ic_req), .imem_rsp(ic_rsp),
      .dmem_req(dc_req), .dmem_rsp(dc_rsp),
      .trace
    );
  end

  if (USE_CACHE) begin : g_cache
    wiscv_cache #(.LINES(CACHE_LINES), .LINE_WORDS(LINE_WORDS)) u_icache (
      .clk, .rst_n(core_rst_n),
      .core_req(ic_req), .core_rsp(ic_rsp), .mem_req(im_req), .mem_rsp(im_rsp)
    );

    wiscv_cache #(.LINES(CACHE_LINES), .LINE_WORDS(LINE_WORDS)) u_dcache (
      .clk, .rst_n(core_rst_n),
      .core_req(dc_req), .core_rsp(dc_rsp), .mem_req(dm_req), .mem_rsp(dm_rsp)
    );
  end else begin : g_nocache
    // The core talks to memory directly and stalls for its full latency.
    assign im_req = ic_req;
    assign ic_rsp = im_rsp;
    assign dm_req = dc_req;
    assign dc_rsp = dm_rsp;
  end

  wiscv_main_memory #(.WORDS(MEM_WORDS), .LATENCY(MEM_LATENCY)) u_mem (
    .clk, .rst_n(core_rst_n),
    .ireq(im_req), .irsp(im_rsp), .dreq(dm_req), .drsp(dm_rsp),
    .load_we(load_we && load_en), .load_addr, .load_data
  );
endmodule
