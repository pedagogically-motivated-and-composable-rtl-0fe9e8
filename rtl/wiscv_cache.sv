// wiscv_cache: L1 cache placed between one core port and one memory port.
//
// Direct-mapped, LINES lines of LINE_WORDS 32-bit words, write-through with
// no write-allocate. The same module serves as instruction cache and as
// data cache.
//   * Read hit: answered in the same cycle (core_rsp.ready with rdata,
//     combinational from the arrays).
//   * Read miss: the line address is latched and the line is fetched from
//     memory one word at a time (LINE_WORDS memory reads, each taking the
//     memory's latency). The core keeps its request up; once the line is in,
//     the request hits. If the core drops or changes its request meanwhile
//     (a fetch redirect) the refill still completes.
//   * Write: passed straight to memory; the core sees ready when memory
//     does. If the line is present its word is updated under the byte
//     enables in the same cycle.
// Ports use the valid/ready protocol of wiscv_pkg (request held until
// ready). The paper names an L1 cache and "variable latency memory support"
// but gives no organisation; size, mapping and write policy here are this
// design's own, chosen as the simplest correct cache.
module wiscv_cache
  import wiscv_pkg::*;
#(
  parameter int LINES      = 64,
  parameter int LINE_WORDS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t core_req,
  output mem_rsp_t core_rsp,
  output mem_req_t mem_req,
  input  mem_rsp_t mem_rsp
);
  localparam int OW = $clog2(LINE_WORDS);
  localparam int IW = $clog2(LINES);
  localparam int TW = 30 - OW - IW;

  typedef enum logic [0:0] { S_IDLE, S_REFILL } state_e;
  state_e state;

  logic          valid [LINES];
  logic [TW-1:0] tags  [LINES];
  logic [31:0]   data  [LINES][LINE_WORDS];

  logic [IW-1:0] idx;
  logic [OW-1:0] wsel;
  logic [TW-1:0] tag;
  logic          hit;
  assign wsel = core_req.addr[OW+1:2];
  assign idx  = core_req.addr[IW+OW+1:OW+2];
  assign tag  = core_req.addr[31:IW+OW+2];
  assign hit  = valid[idx] && tags[idx] == tag;

  logic [31:0]   fill_base;     // byte address of the line being fetched
  logic [OW-1:0] fill_cnt;
  logic [IW-1:0] fill_idx;
  assign fill_idx = fill_base[IW+OW+1:OW+2];

  always_comb begin
    core_rsp = '0;
    mem_req  = '0;
    core_rsp.rdata = data[idx][wsel];
    if (state == S_REFILL) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = fill_base | {{(30-OW){1'b0}}, fill_cnt, 2'b00};
      mem_req.be    = 4'hF;
    end else if (core_req.valid && core_req.we) begin
      mem_req        = core_req;
      core_rsp.ready = mem_rsp.ready;
    end else if (core_req.valid) begin
      core_rsp.ready = hit;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      fill_base <= '0;
      fill_cnt  <= '0;
      for (int i = 0; i < LINES; i++) begin
        valid[i] <= 1'b0;
        tags[i]  <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: begin
          if (core_req.valid && !core_req.we && !hit) begin
            state     <= S_REFILL;
            fill_base <= {core_req.addr[31:OW+2], {(OW+2){1'b0}}};
            fill_cnt  <= '0;
            valid[idx] <= 1'b0;
          end
        end
        S_REFILL: begin
          if (mem_rsp.ready) begin
            fill_cnt <= fill_cnt + 1'b1;
            if (fill_cnt == OW'(LINE_WORDS - 1)) begin
              state           <= S_IDLE;
              valid[fill_idx] <= 1'b1;
              tags[fill_idx]  <= fill_base[31:IW+OW+2];
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Data array: written by refills and by write hits.
  always_ff @(posedge clk) begin
    if (state == S_REFILL && mem_rsp.ready) begin
      data[fill_idx][fill_cnt] <= mem_rsp.rdata;
    end else if (state == S_IDLE && core_req.valid && core_req.we && hit && mem_rsp.ready) begin
      for (int b = 0; b < 4; b++)
        if (core_req.be[b]) data[idx][wsel][8*b +: 8] <= core_req.wdata[8*b +: 8];
    end
  end

  // The requester must hold a request stable until it is answered.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (mem_req.valid && !mem_rsp.ready) |=> (mem_req.valid && $stable(mem_req.addr));
  endproperty
  a_hold: assert property (p_hold);
endmodule
