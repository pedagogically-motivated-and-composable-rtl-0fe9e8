// wiscv_branch_predictor: next-PC prediction for the fetch stage.
//
// A direct-mapped branch target buffer of ENTRIES entries, indexed by
// PC[log2(ENTRIES)+1:2]. Each entry holds a valid bit, the rest of the PC as
// tag, the last target and a 2-bit saturating counter. Lookup is
// combinational in IF: on a tag hit the predictor says "taken" when the
// entry is a jump (JAL/JALR) or its counter is 2 or 3, and then supplies the
// stored target; otherwise fetch goes on at PC+4.
// Update comes from EX one cycle per resolved branch or jump: a taken
// branch/jump allocates or refreshes its entry and counts up; a not-taken
// branch that hits counts down (new entries start at 2, weakly taken).
// The paper asks for branch prediction but does not give its kind or size;
// the BTB with bimodal counters and the size are this design's choices.
module wiscv_branch_predictor #(
  parameter int ENTRIES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] if_pc,
  output logic        pred_taken,
  output logic [31:0] pred_target,
  input  logic        upd_valid,
  input  logic [31:0] upd_pc,
  input  logic        upd_taken,
  input  logic [31:0] upd_target,
  input  logic        upd_is_jump
);
  localparam int IW = $clog2(ENTRIES);
  localparam int TW = 30 - IW;

  logic          valid  [ENTRIES];
  logic [TW-1:0] tag    [ENTRIES];
  logic [31:0]   target [ENTRIES];
  logic [1:0]    ctr    [ENTRIES];
  logic          jump   [ENTRIES];

  logic [IW-1:0] ri, wi;
  assign ri = if_pc[IW+1:2];
  assign wi = upd_pc[IW+1:2];

  logic hit, uhit;
  assign hit  = valid[ri] && tag[ri] == if_pc[31:IW+2];
  assign uhit = valid[wi] && tag[wi] == upd_pc[31:IW+2];

  always_comb begin
    pred_taken  = hit && (jump[ri] || ctr[ri][1]);
    pred_target = target[ri];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0; tag[i] <= '0; target[i] <= '0; ctr[i] <= 2'd0; jump[i] <= 1'b0;
      end
    end else if (upd_valid) begin
      if (upd_taken) begin
        valid[wi]  <= 1'b1;
        tag[wi]    <= upd_pc[31:IW+2];
        target[wi] <= upd_target;
        jump[wi]   <= upd_is_jump;
        if (!uhit)              ctr[wi] <= 2'd2;
        else if (ctr[wi] != 2'd3) ctr[wi] <= ctr[wi] + 2'd1;
      end else if (uhit && ctr[wi] != 2'd0) begin
        ctr[wi] <= ctr[wi] - 2'd1;
      end
    end
  end
endmodule
