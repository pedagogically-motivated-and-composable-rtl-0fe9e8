// wiscv_hazard_unit_tb: random pipeline occupancies; forwarding selects and
// the load-use stall are compared with a reference written here from the
// rules (nearest producer wins, x0 never forwarded, late results stall).
// The paper names the five-stage pipeline; the forwarding paths and stall
// rule checked here are this design's.
module wiscv_hazard_unit_tb;
  import wiscv_pkg::*;
  logic [4:0] id_rs1, id_rs2, ex_rs1, ex_rs2, ex_rd, mem_rd, wb_rd;
  logic id_u1, id_u2, ex_valid, ex_we, ex_late, mem_valid, mem_we, mem_late, wb_valid, wb_we;
  fwd_e fa, fb;
  logic lu;
  int checks = 0, failures = 0, n_mem = 0, n_wb = 0, n_lu = 0;

  wiscv_hazard_unit dut (.id_rs1, .id_rs2, .id_use_rs1(id_u1), .id_use_rs2(id_u2),
    .ex_rs1, .ex_rs2, .ex_valid, .ex_we, .ex_late, .ex_rd, .mem_valid, .mem_we, .mem_late,
    .mem_rd, .wb_valid, .wb_we, .wb_rd, .fwd_a(fa), .fwd_b(fb), .load_use(lu));

  function automatic fwd_e rsel(logic [4:0] r);
    bit m = mem_valid && mem_we && !mem_late && mem_rd == r && r != 0;
    bit w = wb_valid && wb_we && wb_rd == r && r != 0;
    return m ? FWD_MEM : (w ? FWD_WB : FWD_NONE);
  endfunction

  initial begin
    for (int i = 0; i < 5000; i++) begin
      // small register range so that matches are frequent
      {id_rs1, id_rs2, ex_rs1, ex_rs2} = {5'($urandom_range(0, 3)), 5'($urandom_range(0, 3)),
                                          5'($urandom_range(0, 3)), 5'($urandom_range(0, 3))};
      {ex_rd, mem_rd, wb_rd} = {5'($urandom_range(0, 3)), 5'($urandom_range(0, 3)), 5'($urandom_range(0, 3))};
      {id_u1, id_u2, ex_valid, ex_we, ex_late, mem_valid, mem_we, mem_late, wb_valid, wb_we} = 10'($urandom);
      #1;
      checks += 3;
      if (fa !== rsel(ex_rs1)) failures++;
      if (fb !== rsel(ex_rs2)) failures++;
      if (lu !== (ex_valid && ex_we && ex_late && ex_rd != 0 &&
                  ((id_u1 && id_rs1 == ex_rd) || (id_u2 && id_rs2 == ex_rd)))) failures++;
      if (fa == FWD_MEM) n_mem++;
      if (fa == FWD_WB) n_wb++;
      if (lu) n_lu++;
    end
    checks++;
    if (n_mem == 0 || n_wb == 0 || n_lu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
