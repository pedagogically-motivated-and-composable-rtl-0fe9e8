// wiscv_single_cycle_core_tb: random-program test of the single-cycle core.
//
// The core is connected to a behavioural memory whose instruction and data
// ports answer after a random number of cycles (0..3 wait states), which
// exercises fetch bubbles and data stalls without caches. Several random
// programs (wiscv_tb_pkg::gen_program, with exceptions) are run; every
// instruction on the trace port is compared with the instruction-set
// reference model, and the data region is compared at the end.
// Also checks the timing that makes it a single-cycle core: with memories
// that always answer at once, one random program retires exactly one
// instruction every clock cycle (CPI = 1, no bubble after a load, a taken
// branch or a trap).
// The paper lists a single-cycle reference design beside the pipeline;
// the test itself is this design's own.
module wiscv_single_cycle_core_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;

  localparam int WORDS = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  trace_t   trace;
  logic [31:0] mem [WORDS];
  int unsigned iwait = 0, dwait = 0, ilat = 0, dlat = 0;
  bit zero_wait = 0;

  wiscv_single_cycle_core dut (.clk, .rst_n, .imem_req(ireq), .imem_rsp(irsp),
                  .dmem_req(dreq), .dmem_rsp(drsp), .trace);

  assign irsp.ready = ireq.valid && iwait >= ilat;
  assign irsp.rdata = mem[ireq.addr[15:2]];
  assign drsp.ready = dreq.valid && dwait >= dlat;
  assign drsp.rdata = mem[dreq.addr[15:2]];

  always_ff @(posedge clk) begin
    if (ireq.valid && !irsp.ready) iwait <= iwait + 1;
    else begin iwait <= 0; ilat <= zero_wait ? 0 : $urandom_range(0, 3); end
    if (dreq.valid && !drsp.ready) dwait <= dwait + 1;
    else begin dwait <= 0; dlat <= zero_wait ? 0 : $urandom_range(0, 3); end
    if (drsp.ready && dreq.we)
      for (int b = 0; b < 4; b++)
        if (dreq.be[b]) mem[dreq.addr[15:2]][8*b +: 8] <= dreq.wdata[8*b +: 8];
  end

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_program(int nblocks, bit traps);
    logic [31:0] prog [];
    logic [31:0] endpc;
    rv_iss iss;
    trace_t exp;
    int n = 0, bad = 0, guard = 0, first = -1, last = -1;
    prog = new[WORDS];
    endpc = gen_program(prog, nblocks, traps);
    iss = new(WORDS);
    for (int i = 0; i < WORDS; i++) begin
      if (i * 4 >= DATA_BASE && i * 4 < DATA_BASE + DATA_BYTES) prog[i] = $urandom;
      mem[i] = prog[i];
      iss.mem[i] = prog[i];
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (guard < 200000) begin
      @(negedge clk);
      guard++;
      if (trace.valid) begin
        exp = iss.step();
        checks++;
        n++;
        if (first < 0) first = guard;
        last = guard;
        if (trace !== exp) begin
          bad++;
          if (bad < 5) $display("MISMATCH pc=%h instr=%h dut we=%0d rd=%0d v=%h trap=%0d c=%0d | ref pc=%h we=%0d rd=%0d v=%h trap=%0d c=%0d",
            trace.pc, trace.instr, trace.rd_we, trace.rd, trace.rd_wdata, trace.trap, trace.cause,
            exp.pc, exp.rd_we, exp.rd, exp.rd_wdata, exp.trap, exp.cause);
        end
        if (exp.pc == endpc) break;
      end
    end
    for (int i = DATA_BASE / 4; i < (DATA_BASE + DATA_BYTES) / 4; i++) begin
      checks++;
      if (mem[i] !== iss.mem[i]) bad++;
    end
    if (guard >= 200000) bad++;
    failures += bad;
    $display("program of %0d blocks: %0d instructions in %0d cycles, %0d mismatches",
             nblocks, n, last - first + 1, bad);
    if (zero_wait) begin
      checks++;
      if (last - first + 1 != n) begin
        failures++;
        $display("CPI check: %0d instructions took %0d cycles, expected one each", n, last - first + 1);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < 12; r++) run_program(600, 1);

    zero_wait = 1;
    repeat (2) @(posedge clk);   // let the wait counters settle at zero
    run_program(600, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
