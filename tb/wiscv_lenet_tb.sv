// wiscv_lenet_tb: runs LeNet-5, compiled from C, on the full system at its
// default parameters.
//
// wiscv_lenet.hex is a bare-metal RV32I program (one 32-bit word per line,
// loaded from address 0): the LeNet-5 digit-recognition network with 8-bit
// quantized weights, in integer arithmetic only:
//   32x32 input -> conv 6@5x5 -> 2x2 max-pool -> conv 16@5x5 -> 2x2 max-pool
//   -> dense 400->120 -> dense 120->84 -> dense 84->10 -> argmax,
// about 416,000 multiply-accumulates. Every layer but the last is
// requantized to 0..127 as q(s) = min(127, max(0, s >>> shift)), with shifts
// 6, 7, 7 and 6 for conv1, conv2, dense1 and dense2. The 61,706 weights and
// biases are real int8/int32 arrays in memory (about 62 KiB), filled at start-up
// from a xorshift32 stream (x ^= x<<13; x ^= x>>17; x ^= x<<5; seed
// 0x12345678): weights ((x>>24)&31)-16, biases ((x>>20)&255)-128, drawn in
// the order w1, b1, w2, b2, w3, b3, w4, b4, w5, b5. The weights are not a
// trained network, so the class is not a recognised digit; the work and the
// memory footprint are those of the real network. The input image is
// img[y][x] = (7x + 13y) & 127. Multiplication is done in software, by
// shift-and-add over the bits of the weight.
// The program writes the class to 0x1F000, the ten scores to 0x1F004..,
// and 0x600D to 0x1F02C, then spins. The testbench loads it through the
// load port, checks every retired instruction against the reference model,
// recomputes the network here and compares the stored results, and reports
// cycles per instruction.
// The paper uses a quantized LeNet in C as its demonstration program;
// the layer sizes are the classic LeNet-5. The weight width, the
// requantization and the synthetic weights are this design's choices.
module wiscv_lenet_tb;
  import wiscv_pkg::*;
  import wiscv_tb_pkg::*;

  localparam int WORDS = 32768;
  localparam logic [31:0] OUT = 32'h1F000;
  logic clk = 0, rst_n = 0;
  logic load_en = 1, load_we = 0;
  logic [31:0] load_addr = '0, load_data = '0;
  trace_t trace;
  always #5 clk = ~clk;

  wiscv_soc dut (.clk, .rst_n, .load_en, .load_we, .load_addr, .load_data, .trace);

  int checks = 0, failures = 0;
  logic [31:0] prog [WORDS];

  initial begin
    #2_000_000_000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // The network, recomputed in SystemVerilog.
  int exp_scores [10];
  int exp_class;
  int unsigned st = 32'h1234_5678;
  function automatic int unsigned rnd();
    st ^= st << 13; st ^= st >> 17; st ^= st << 5;
    return st;
  endfunction
  function automatic int rw();
    int unsigned r = rnd();
    return int'((r >> 24) & 31) - 16;
  endfunction
  function automatic int rb();
    int unsigned r = rnd();
    return int'((r >> 20) & 255) - 128;
  endfunction
  function automatic int q(int s, int sh);
    s = s >>> sh;
    return s < 0 ? 0 : (s > 127 ? 127 : s);
  endfunction
  function automatic int max4(int a, int b, int c, int d);
    int m = a;
    if (b > m) m = b;
    if (c > m) m = c;
    if (d > m) m = d;
    return m;
  endfunction

  task automatic reference_net();
    int img [32][32], w1 [6][5][5], b1 [6], w2 [16][6][5][5], b2 [16];
    int w3 [120][400], b3 [120], w4 [84][120], b4 [84], w5 [10][84], b5 [10];
    int c1 [6][28][28], p1 [6][14][14], c2 [16][10][10], p2 [400], f1 [120], f2 [84];
    int n = 0, bestv = -2147483647;
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) img[y][x] = (x * 7 + y * 13) & 127;
    for (int c = 0; c < 6; c++) for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) w1[c][i][j] = rw();
    for (int c = 0; c < 6; c++) b1[c] = rb();
    for (int o = 0; o < 16; o++) for (int c = 0; c < 6; c++) for (int i = 0; i < 5; i++)
      for (int j = 0; j < 5; j++) w2[o][c][i][j] = rw();
    for (int o = 0; o < 16; o++) b2[o] = rb();
    for (int o = 0; o < 120; o++) for (int i = 0; i < 400; i++) w3[o][i] = rw();
    for (int o = 0; o < 120; o++) b3[o] = rb();
    for (int o = 0; o < 84; o++) for (int i = 0; i < 120; i++) w4[o][i] = rw();
    for (int o = 0; o < 84; o++) b4[o] = rb();
    for (int o = 0; o < 10; o++) for (int i = 0; i < 84; i++) w5[o][i] = rw();
    for (int o = 0; o < 10; o++) b5[o] = rb();
    for (int c = 0; c < 6; c++) for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      int s = b1[c];
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) s += img[y + i][x + j] * w1[c][i][j];
      c1[c][y][x] = q(s, 6);
    end
    for (int c = 0; c < 6; c++) for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++)
      p1[c][y][x] = max4(c1[c][2*y][2*x], c1[c][2*y][2*x+1], c1[c][2*y+1][2*x], c1[c][2*y+1][2*x+1]);
    for (int o = 0; o < 16; o++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) begin
      int s = b2[o];
      for (int c = 0; c < 6; c++) for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        s += p1[c][y + i][x + j] * w2[o][c][i][j];
      c2[o][y][x] = q(s, 7);
    end
    for (int c = 0; c < 16; c++) for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++)
      p2[n++] = max4(c2[c][2*y][2*x], c2[c][2*y][2*x+1], c2[c][2*y+1][2*x], c2[c][2*y+1][2*x+1]);
    for (int o = 0; o < 120; o++) begin
      int s = b3[o];
      for (int i = 0; i < 400; i++) s += p2[i] * w3[o][i];
      f1[o] = q(s, 7);
    end
    for (int o = 0; o < 84; o++) begin
      int s = b4[o];
      for (int i = 0; i < 120; i++) s += f1[i] * w4[o][i];
      f2[o] = q(s, 6);
    end
    exp_class = 0;
    for (int o = 0; o < 10; o++) begin
      int s = b5[o];
      for (int i = 0; i < 84; i++) s += f2[i] * w5[o][i];
      exp_scores[o] = s;
      if (s > bestv) begin bestv = s; exp_class = o; end
    end
  endtask

  initial begin
    rv_iss iss;
    trace_t exp;
    int n = 0, bad = 0, cyc = 0;
    foreach (prog[i]) prog[i] = '0;
    $readmemh("tb/wiscv_lenet.hex", prog);
    iss = new(WORDS);
    foreach (prog[i]) iss.mem[i] = prog[i];
    reference_net();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      load_we = 1; load_addr = 32'(i * 4); load_data = prog[i];
      @(negedge clk);
    end
    load_we = 0; load_en = 0;
    while (cyc < 150_000_000) begin
      @(negedge clk);
      cyc++;
      if (trace.valid) begin
        exp = iss.step();
        n++;
        checks++;
        if (trace !== exp) begin
          bad++;
          if (bad < 5) $display("MISMATCH pc=%h instr=%h v=%h | ref pc=%h v=%h", trace.pc, trace.instr,
                                trace.rd_wdata, exp.pc, exp.rd_wdata);
        end
        if (exp.pc == 32'h8) break;   // final self-loop of the start-up code
      end
    end
    failures += bad;
    checks++;
    if (dut.u_mem.mem[(OUT + 32'h2C) / 4] !== 32'h600D) begin failures++; $display("program did not finish"); end
    checks++;
    if (dut.u_mem.mem[OUT / 4] !== 32'(exp_class)) failures++;
    for (int o = 0; o < 10; o++) begin
      checks++;
      if (dut.u_mem.mem[OUT / 4 + 1 + o] !== 32'(exp_scores[o])) begin
        failures++;
        $display("score %0d: %0d expected %0d", o, $signed(dut.u_mem.mem[OUT / 4 + 1 + o]), exp_scores[o]);
      end
    end
    for (int o = 0; o < 10; o++) $display("score %0d = %0d", o, exp_scores[o]);
    $display("class %0d (expected %0d); %0d instructions in %0d cycles, CPI x1000 = %0d",
             dut.u_mem.mem[OUT / 4], exp_class, n, cyc, (longint'(cyc) * 1000) / n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
