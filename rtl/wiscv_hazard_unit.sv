// wiscv_hazard_unit: data-hazard detection of the 5-stage pipeline.
//
// Forwarding: an EX-stage source register that matches the destination of
// the instruction in MEM takes the MEM-stage ALU result; failing that, one
// that matches the destination in WB takes the WB value. The nearest
// producer wins and x0 is never forwarded. A producer whose result exists
// only at the end of MEM (a load, or a CSR read) cannot be forwarded from
// MEM: when such an instruction is in EX and the instruction in ID reads its
// destination, load_use asks for a one-cycle stall of IF/ID and a bubble in
// EX, after which the value arrives through the WB path.
// The paper only asks for a basic 5-stage pipeline; full forwarding with a
// single load-use stall is this design's textbook choice. Combinational.
module wiscv_hazard_unit
  import wiscv_pkg::*;
(
  input  logic [4:0] id_rs1,
  input  logic [4:0] id_rs2,
  input  logic       id_use_rs1,
  input  logic       id_use_rs2,
  input  logic [4:0] ex_rs1,
  input  logic [4:0] ex_rs2,
  input  logic       ex_valid,
  input  logic       ex_we,
  input  logic       ex_late,     // EX result available only after MEM
  input  logic [4:0] ex_rd,
  input  logic       mem_valid,
  input  logic       mem_we,
  input  logic       mem_late,
  input  logic [4:0] mem_rd,
  input  logic       wb_valid,
  input  logic       wb_we,
  input  logic [4:0] wb_rd,
  output fwd_e       fwd_a,
  output fwd_e       fwd_b,
  output logic       load_use
);
  function automatic fwd_e sel(logic [4:0] rs);
    if (rs == 5'd0)                                     return FWD_NONE;
    if (mem_valid && mem_we && !mem_late && mem_rd == rs) return FWD_MEM;
    if (wb_valid && wb_we && wb_rd == rs)               return FWD_WB;
    return FWD_NONE;
  endfunction

  always_comb begin
    fwd_a = sel(ex_rs1);
    fwd_b = sel(ex_rs2);
    load_use = ex_valid && ex_we && ex_late && ex_rd != 5'd0 &&
               ((id_use_rs1 && id_rs1 == ex_rd) || (id_use_rs2 && id_rs2 == ex_rd));
  end
endmodule
