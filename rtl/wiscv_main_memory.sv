// wiscv_main_memory: unified word-addressed main memory with two access
// ports and a program-load port.
//
// WORDS 32-bit words, shared by an instruction port (i) and a data port (d).
// Each port answers a request after LATENCY cycles: a request raised in
// cycle t is answered with rsp.ready in cycle t+LATENCY-1, so LATENCY=1 is a
// single-cycle memory (ready in the request cycle, read data combinational)
// and LATENCY>1 a multi-cycle, variable-latency-style memory that the caches
// hide. Reads return the whole word at addr[AW+1:2]; writes honour the byte
// enables and take effect at the clock edge of the ready cycle. Higher
// address bits are ignored, so the memory repeats through the address space.
// The load port writes one word per cycle and is meant to be used while the
// core is held in reset, to put a new program in memory without rebuilding
// the hardware. The paper speaks of two kinds of memory, of variable-latency
// memory support and of loading programs on the fly, without giving sizes,
// latencies or interfaces: those are this design's own.
module wiscv_main_memory
  import wiscv_pkg::*;
#(
  parameter int WORDS   = 32768,
  parameter int LATENCY = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mem_req_t    ireq,
  output mem_rsp_t    irsp,
  input  mem_req_t    dreq,
  output mem_rsp_t    drsp,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data
);
  localparam int AW = $clog2(WORDS);
  localparam int CW = (LATENCY > 1) ? $clog2(LATENCY) : 1;

  logic [31:0] mem [WORDS];
  logic [CW-1:0] icnt, dcnt;
  logic iready, dready;

  if (LATENCY == 1) begin : g_single
    assign iready = ireq.valid;
    assign dready = dreq.valid;
    always_ff @(posedge clk) begin
      icnt <= '0;
      dcnt <= '0;
    end
  end else begin : g_multi
    assign iready = ireq.valid && icnt == CW'(LATENCY - 1);
    assign dready = dreq.valid && dcnt == CW'(LATENCY - 1);
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        icnt <= '0;
        dcnt <= '0;
      end else begin
        icnt <= (ireq.valid && !iready) ? icnt + 1'b1 : '0;
        dcnt <= (dreq.valid && !dready) ? dcnt + 1'b1 : '0;
      end
    end
  end

  assign irsp.ready = iready;
  assign irsp.rdata = mem[ireq.addr[AW+1:2]];
  assign drsp.ready = dready;
  assign drsp.rdata = mem[dreq.addr[AW+1:2]];

  always_ff @(posedge clk) begin
    if (load_we) begin
      mem[load_addr[AW+1:2]] <= load_data;
    end else if (dready && dreq.we) begin
      for (int b = 0; b < 4; b++)
        if (dreq.be[b]) mem[dreq.addr[AW+1:2]][8*b +: 8] <= dreq.wdata[8*b +: 8];
    end
  end
endmodule
