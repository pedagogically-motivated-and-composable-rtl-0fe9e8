// wiscv_cache_tb: the cache in front of a behavioural memory with a fixed
// latency. Random reads and byte-enabled writes over an address range four
// times the cache size (so lines are evicted) are checked against a
// reference array. Also checks the timing: a read hit is answered in the
// cycle of the request, a read miss after LINE_WORDS*LAT+2 cycles counted
// inclusively, and a write after the memory's LAT cycles. Counts hits and
// misses and fails if either never happened.
// The paper names an L1 cache but gives no timing; the latencies checked
// here are this design's.
module wiscv_cache_tb;
  import wiscv_pkg::*;
  localparam int LINES = 64, LW = 4, LAT = 3, RANGE_WORDS = 4 * LINES * LW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t creq = '0, mreq;
  mem_rsp_t crsp, mrsp;
  logic [31:0] mem [RANGE_WORDS];
  logic [31:0] model [RANGE_WORDS];
  int cnt = 0;
  int checks = 0, failures = 0, hits = 0, misses = 0;

  wiscv_cache #(.LINES(LINES), .LINE_WORDS(LW)) dut (.clk, .rst_n, .core_req(creq), .core_rsp(crsp),
                                                   .mem_req(mreq), .mem_rsp(mrsp));

  // behavioural memory: answers after LAT cycles
  assign mrsp.ready = mreq.valid && cnt == LAT - 1;
  assign mrsp.rdata = mem[mreq.addr[$clog2(RANGE_WORDS)+1:2]];
  always_ff @(posedge clk) begin
    cnt <= (mreq.valid && !mrsp.ready) ? cnt + 1 : 0;
    if (mrsp.ready && mreq.we)
      for (int b = 0; b < 4; b++)
        if (mreq.be[b]) mem[mreq.addr[$clog2(RANGE_WORDS)+1:2]][8*b +: 8] <= mreq.wdata[8*b +: 8];
  end

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic access(bit we, int unsigned w, logic [3:0] be, logic [31:0] d);
    int n = 1;
    @(negedge clk);
    creq = '{valid: 1'b1, we: we, be: be, addr: 32'(w * 4), wdata: d};
    forever begin
      #1;
      if (crsp.ready) break;
      @(negedge clk); n++;
    end
    if (we) begin
      checks++;
      if (n != LAT) begin failures++; $display("write took %0d cycles", n); end
      for (int b = 0; b < 4; b++) if (be[b]) model[w][8*b +: 8] = d[8*b +: 8];
    end else begin
      checks += 2;
      if (crsp.rdata !== model[w]) begin
        failures++;
        if (failures < 5) $display("read word %0d: %h expected %h", w, crsp.rdata, model[w]);
      end
      if (n == 1) hits++;
      else if (n == LW * LAT + 2) misses++;
      else begin failures++; $display("read took %0d cycles", n); end
    end
    @(posedge clk); #1 creq.valid = 0;
  endtask

  initial begin
    for (int i = 0; i < RANGE_WORDS; i++) begin mem[i] = $urandom; model[i] = mem[i]; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 6000; k++) begin
      // mostly a small hot set, sometimes anywhere
      automatic int unsigned w = ($urandom_range(0, 3) != 0) ? $urandom_range(0, 63) : $urandom_range(0, RANGE_WORDS - 1);
      if ($urandom_range(0, 3) == 0) access(1, w, 4'($urandom), $urandom);
      else access(0, w, 4'hF, 0);
    end
    checks++;
    if (hits == 0 || misses == 0) failures++;
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
