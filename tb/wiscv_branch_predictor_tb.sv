// wiscv_branch_predictor_tb: checks the predictor against a reference BTB
// with 2-bit counters kept in the testbench, under random updates from a
// small set of branch addresses (some sharing an index, so tags matter).
// Also directed: a fresh entry predicts taken, two not-taken outcomes turn
// it to not-taken, and a jump predicts taken whatever its history.
// The paper asks for branch prediction but not for a particular scheme;
// the expected behaviour is that of this design's counter scheme.
module wiscv_branch_predictor_tb;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] if_pc, pt, ut, upc;
  logic ptk, uv, utk, uj;
  int checks = 0, failures = 0;

  wiscv_branch_predictor #(.ENTRIES(N)) dut (.clk, .rst_n, .if_pc, .pred_taken(ptk), .pred_target(pt),
    .upd_valid(uv), .upd_pc(upc), .upd_taken(utk), .upd_target(ut), .upd_is_jump(uj));

  // reference model
  bit          mv [N]; logic [31:0] mpc [N]; logic [31:0] mt [N]; int mc [N]; bit mj [N];

  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic update(logic [31:0] p, bit tk, logic [31:0] t, bit j);
    int i = (p >> 2) % N;
    bit h = mv[i] && mpc[i] == p;
    @(negedge clk);
    uv = 1; upc = p; utk = tk; ut = t; uj = j;
    @(posedge clk); #1 uv = 0;
    if (tk) begin
      mc[i] = !h ? 2 : (mc[i] < 3 ? mc[i] + 1 : 3);
      mv[i] = 1; mpc[i] = p; mt[i] = t; mj[i] = j;
    end else if (h && mc[i] > 0) mc[i]--;
  endtask

  task automatic check(logic [31:0] p);
    int i = (p >> 2) % N;
    bit h = mv[i] && mpc[i] == p;
    bit e = h && (mj[i] || mc[i] >= 2);
    if_pc = p; #1;
    checks++;
    if (ptk !== e || (e && pt !== mt[i])) begin
      failures++;
      if (failures < 5) $display("pc=%h pred=%0d/%h expected %0d/%h", p, ptk, pt, e, mt[i]);
    end
  endtask

  initial begin
    logic [31:0] pcs [8];
    foreach (mv[i]) begin mv[i] = 0; mc[i] = 0; mj[i] = 0; mpc[i] = 0; mt[i] = 0; end
    uv = 0; if_pc = 0; upc = 0; utk = 0; ut = 0; uj = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // directed
    check(32'h100); // cold: not taken
    update(32'h100, 1, 32'h40, 0); check(32'h100);
    checks++; if (!(ptk && pt == 32'h40)) failures++;
    update(32'h100, 0, 32'h104, 0); update(32'h100, 0, 32'h104, 0); check(32'h100);
    checks++; if (ptk) failures++;
    update(32'h200, 1, 32'h80, 1); update(32'h200, 0, 32'h204, 0); update(32'h200, 0, 32'h204, 0);
    check(32'h200);
    checks++; if (!ptk) failures++;
    // random
    foreach (pcs[i]) pcs[i] = {$urandom_range(0, 3) * N * 4 + $urandom_range(0, 3) * 4};
    for (int k = 0; k < 3000; k++) begin
      automatic int s = $urandom_range(0, 7);
      if ($urandom_range(0, 1) != 0) update(pcs[s], $urandom_range(0, 2) != 0, $urandom & ~32'd3, $urandom_range(0, 5) == 0);
      check(pcs[$urandom_range(0, 7)]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
