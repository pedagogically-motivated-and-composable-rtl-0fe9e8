// wiscv_soc_nocache_tb: the system in its cache-less configuration with a
// single-cycle memory (USE_CACHE=0, MEM_LATENCY=1), and with a 3-cycle
// memory. Random programs with exceptions are loaded through the load port
// and every retired instruction is compared with the reference model; the
// data region is compared at the end. With the single-cycle memory the
// pipeline must never wait for memory (no data-stall cycle at all); with the
// 3-cycle memory every data access stalls.
// The paper's platform runs the pipelined core with or without cache; this
// test covers the "without" case.
module wiscv_soc_nocache_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;

  localparam int WORDS = 16384;
  logic clk = 0, rst_n = 0;
  logic load_en = 1, load_we = 0;
  logic [31:0] load_addr = '0, load_data = '0;
  trace_t trace1, trace3;
  always #5 clk = ~clk;

  wiscv_soc #(.MEM_WORDS(WORDS), .MEM_LATENCY(1), .USE_CACHE(1'b0)) dut1 (
    .clk, .rst_n, .load_en, .load_we, .load_addr, .load_data, .trace(trace1));
  wiscv_soc #(.MEM_WORDS(WORDS), .MEM_LATENCY(3), .USE_CACHE(1'b0)) dut3 (
    .clk, .rst_n, .load_en, .load_we, .load_addr, .load_data, .trace(trace3));

  int checks = 0, failures = 0, stall1 = 0, stall3 = 0, acc3 = 0;
  always @(posedge clk) if (rst_n && !load_en) begin
    if (dut1.g_pipe.u_core.dstall) stall1++;
    if (dut3.g_pipe.u_core.dstall) stall3++;
    if (dut3.g_pipe.u_core.dmem_req.valid && dut3.g_pipe.u_core.dmem_rsp.ready) acc3++;
  end

  initial begin
    #100_000_000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_program(int nblocks);
    logic [31:0] prog [];
    logic [31:0] endpc;
    rv_iss iss1, iss3;
    trace_t e;
    bit done1 = 0, done3 = 0;
    int bad = 0, guard = 0, c1 = 0, c3 = 0;
    prog = new[WORDS];
    endpc = gen_program(prog, nblocks, 1);
    iss1 = new(WORDS); iss3 = new(WORDS);
    for (int i = 0; i < WORDS; i++) begin
      if (i * 4 >= DATA_BASE && i * 4 < DATA_BASE + DATA_BYTES) prog[i] = $urandom;
      iss1.mem[i] = prog[i]; iss3.mem[i] = prog[i];
    end
    @(negedge clk);
    load_en = 1;
    for (int i = 0; i < WORDS; i++) begin
      load_we = 1; load_addr = 32'(i * 4); load_data = prog[i];
      @(negedge clk);
    end
    load_we = 0; load_en = 0;
    while (!(done1 && done3) && guard < 500_000) begin
      @(negedge clk);
      guard++;
      if (trace1.valid && !done1) begin
        e = iss1.step(); checks++;
        if (trace1 !== e) bad++;
        if (e.pc == endpc) begin done1 = 1; c1 = guard; end
      end
      if (trace3.valid && !done3) begin
        e = iss3.step(); checks++;
        if (trace3 !== e) bad++;
        if (e.pc == endpc) begin done3 = 1; c3 = guard; end
      end
    end
    if (!(done1 && done3)) begin bad++; $display("program did not reach its end"); end
    for (int i = DATA_BASE / 4; i < (DATA_BASE + DATA_BYTES) / 4; i++) begin
      checks += 2;
      if (dut1.u_mem.mem[i] !== iss1.mem[i]) bad++;
      if (dut3.u_mem.mem[i] !== iss3.mem[i]) bad++;
    end
    failures += bad;
    $display("program of %0d blocks: %0d cycles (1-cycle memory), %0d cycles (3-cycle memory), %0d mismatches",
             nblocks, c1, c3, bad);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) run_program(600);
    checks += 2;
    if (stall1 != 0) begin failures++; $display("single-cycle memory stalled %0d cycles", stall1); end
    if (stall3 != 2 * acc3) begin failures++; $display("3-cycle memory: %0d stall cycles for %0d accesses", stall3, acc3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
