// wiscv_soc_tb: end-to-end test of the whole system at its default sizes.
//
// For each of several random programs (wiscv_tb_pkg::gen_program): the
// program and random data are written through the load port while load_en
// holds the core in reset, load_en drops, and every instruction the core
// reports on its trace port is compared with the instruction-set reference
// model until the final self-loop retires. The data region of main memory
// is then compared word by word with the model's memory.
// The test also counts how often each mechanism of the design fired and
// fails if one never did: I-cache and D-cache misses, write-through stores,
// D-cache stall cycles, load-use bubbles, forwarding from MEM and from WB,
// branch mispredictions, correctly predicted taken branches, traps, MRET,
// CSR accesses and program reloads. It also measures the read-miss
// penalty: counting both the cycle of the first request and the cycle of
// the answer, a read miss takes LINE_WORDS*MEM_LATENCY+2 cycles (one to see
// the miss, LINE_WORDS memory reads, one to hit).
// The paper checks its processor by comparing it, instruction by
// instruction, with a reference; this test does the same. The mechanisms it
// counts are the ones the paper names: pipeline, branch prediction, cache,
// variable-latency memory, exceptions and program loading.
module wiscv_soc_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;

  localparam int WORDS = 32768;      // defaults of wiscv_soc
  localparam int LINE_WORDS = 4;
  localparam int MEM_LATENCY = 4;
  logic clk = 0, rst_n = 0;
  logic load_en = 1, load_we = 0;
  logic [31:0] load_addr = '0, load_data = '0;
  trace_t trace;
  always #5 clk = ~clk;

  wiscv_soc dut (.clk, .rst_n, .load_en, .load_we, .load_addr, .load_data, .trace);

  int checks = 0, failures = 0;

  // mechanism counters
  int n_imiss = 0, n_dmiss = 0, n_wt = 0, n_dstall = 0, n_loaduse = 0, n_fwd_mem = 0,
      n_fwd_wb = 0, n_mispred = 0, n_pred_ok = 0, n_trap = 0, n_mret = 0, n_csr = 0, n_reload = 0;
  always @(posedge clk) if (rst_n && !load_en) begin
    if (dut.g_cache.u_icache.state == 1'b0 && dut.g_cache.u_icache.core_req.valid && !dut.g_cache.u_icache.hit) n_imiss++;
    if (dut.g_cache.u_dcache.state == 1'b0 && dut.g_cache.u_dcache.core_req.valid && !dut.g_cache.u_dcache.core_req.we
        && !dut.g_cache.u_dcache.hit) n_dmiss++;
    if (dut.g_cache.u_dcache.core_req.valid && dut.g_cache.u_dcache.core_req.we && dut.g_cache.u_dcache.core_rsp.ready) n_wt++;
    if (dut.g_pipe.u_core.dstall) n_dstall++;
    if (dut.g_pipe.u_core.load_use && !dut.g_pipe.u_core.dstall && !dut.g_pipe.u_core.ex_redirect) n_loaduse++;
    if (dut.g_pipe.u_core.idex.valid && (dut.g_pipe.u_core.fwd_a == FWD_MEM || dut.g_pipe.u_core.fwd_b == FWD_MEM)) n_fwd_mem++;
    if (dut.g_pipe.u_core.idex.valid && (dut.g_pipe.u_core.fwd_a == FWD_WB || dut.g_pipe.u_core.fwd_b == FWD_WB)) n_fwd_wb++;
    if (dut.g_pipe.u_core.ex_redirect) n_mispred++;
    if (dut.g_pipe.u_core.idex.valid && dut.g_pipe.u_core.idex.pred_taken && !dut.g_pipe.u_core.ex_redirect
        && !dut.g_pipe.u_core.dstall && !dut.g_pipe.u_core.mem_redirect) n_pred_ok++;
    if (trace.valid && trace.trap) n_trap++;
    if (trace.valid && trace.instr == MRET) n_mret++;
    if (trace.valid && trace.instr[6:0] == OP_SYSTEM && trace.instr[14:12] != 3'b000 && !trace.trap) n_csr++;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_word(logic [31:0] a, logic [31:0] d);
    load_we = 1; load_addr = a; load_data = d;
    @(posedge clk);
    #1 load_we = 0;
  endtask

  task automatic run_program(int nblocks, bit traps);
    logic [31:0] prog [];
    logic [31:0] endpc;
    rv_iss iss;
    trace_t exp;
    int n = 0, bad = 0, guard = 0;
    prog = new[WORDS];
    endpc = gen_program(prog, nblocks, traps);
    iss = new(WORDS);
    for (int i = 0; i < WORDS; i++) begin
      if (i * 4 >= DATA_BASE && i * 4 < DATA_BASE + DATA_BYTES) prog[i] = $urandom;
      iss.mem[i] = prog[i];
    end
    @(negedge clk);
    load_en = 1;
    n_reload++;
    for (int i = 0; i < WORDS; i++) begin
      load_we = 1; load_addr = 32'(i * 4); load_data = prog[i];
      @(negedge clk);
    end
    load_we = 0;
    load_en = 0;
    while (guard < 1_000_000) begin
      @(negedge clk);
      guard++;
      if (trace.valid) begin
        exp = iss.step();
        checks++; n++;
        if (trace !== exp) begin
          bad++;
          if (bad < 5) $display("MISMATCH pc=%h instr=%h dut we=%0d rd=%0d v=%h trap=%0d | ref pc=%h we=%0d rd=%0d v=%h trap=%0d",
            trace.pc, trace.instr, trace.rd_we, trace.rd, trace.rd_wdata, trace.trap,
            exp.pc, exp.rd_we, exp.rd, exp.rd_wdata, exp.trap);
        end
        if (exp.pc == endpc) break;
      end
    end
    if (guard >= 1_000_000) begin bad++; $display("program did not reach its end"); end
    for (int i = DATA_BASE / 4; i < (DATA_BASE + DATA_BYTES) / 4; i++) begin
      checks++;
      if (dut.u_mem.mem[i] !== iss.mem[i]) bad++;
    end
    failures += bad;
    $display("program of %0d blocks: %0d instructions in %0d cycles, %0d mismatches", nblocks, n, guard, bad);
  endtask

  // Read-miss penalty: request of a line that is not cached, counted in
  // cycles from the first request to the cycle the cache answers.
  task automatic miss_latency();
    int t0, t1;
    int EXPECT = LINE_WORDS * MEM_LATENCY + 2;
    t0 = -1; t1 = -1;
    for (int c = 0; c < 200 && t1 < 0; c++) begin
      @(negedge clk);
      if (t0 < 0 && dut.g_cache.u_dcache.core_req.valid && !dut.g_cache.u_dcache.core_req.we && !dut.g_cache.u_dcache.hit
          && dut.g_cache.u_dcache.state == 1'b0) t0 = c;
      if (t0 >= 0 && dut.g_cache.u_dcache.core_rsp.ready) t1 = c;
    end
    checks++;
    if (t1 - t0 + 1 != EXPECT) begin
      failures++;
      $display("D-cache miss took %0d cycles, expected %0d", t1 - t0 + 1, EXPECT);
    end else $display("D-cache read miss: %0d cycles", EXPECT);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) run_program(1000, 1);

    // Directed: one load from an uncached line, then stop.
    begin
      logic [31:0] prog [];
      prog = new[WORDS];
      foreach (prog[i]) prog[i] = NOP;
      prog[0] = enc_u(20'h9, 5'd30, OP_LUI);
      prog[1] = enc_i(12'd0, 5'd30, 3'b010, 5'd5, OP_LOAD);
      prog[2] = enc_j(21'd0, 5'd0);
      load_en = 1;
      for (int i = 0; i < 16; i++) load_word(32'(i * 4), prog[i]);
      load_word(32'h9000, 32'hCAFE_F00D);
      @(negedge clk);
      load_en = 0;
      miss_latency();
      repeat (20) @(negedge clk);
      checks++;
      if (dut.g_pipe.u_core.u_rf.regs[5] != 32'hCAFE_F00D) failures++;
    end

    $display("mechanisms: imiss=%0d dmiss=%0d write-through=%0d dstall=%0d load-use=%0d fwdMEM=%0d fwdWB=%0d mispredict=%0d predicted-taken=%0d trap=%0d mret=%0d csr=%0d reload=%0d",
      n_imiss, n_dmiss, n_wt, n_dstall, n_loaduse, n_fwd_mem, n_fwd_wb, n_mispred, n_pred_ok, n_trap, n_mret, n_csr, n_reload);
    begin
      int m [13];
      m = '{n_imiss, n_dmiss, n_wt, n_dstall, n_loaduse, n_fwd_mem, n_fwd_wb, n_mispred,
            n_pred_ok, n_trap, n_mret, n_csr, n_reload};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
