// wiscv_main_memory_tb: latency and contents of the main memory.
// Words are written through the load port; then random reads and byte-
// enabled writes on both ports are checked against a reference array, and
// every request must be answered exactly LATENCY-1 cycles after it is
// raised. Run with the default LATENCY (4) and a small memory.
// The paper mentions single-cycle and multi-cycle memories; the latency
// parameter and its exact timing are this design's.
module wiscv_main_memory_tb;
  import wiscv_pkg::*;
  localparam int WORDS = 256, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t ireq = '0, dreq = '0;
  mem_rsp_t irsp, drsp;
  logic load_we = 0;
  logic [31:0] load_addr = '0, load_data = '0;
  logic [31:0] model [WORDS];
  int checks = 0, failures = 0;

  wiscv_main_memory #(.WORDS(WORDS)) dut (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp,
                                          .load_we, .load_addr, .load_data);

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic dacc(bit we, logic [31:0] a, logic [3:0] be, logic [31:0] d);
    int w = 0;
    @(negedge clk);
    dreq = '{valid: 1'b1, we: we, be: be, addr: a, wdata: d};
    forever begin
      #1;
      if (drsp.ready) break;
      @(negedge clk); w++;
    end
    checks++;
    if (w != LAT - 1) begin failures++; $display("data latency %0d", w + 1); end
    if (!we) begin
      checks++;
      if (drsp.rdata !== model[a[9:2]]) failures++;
    end else
      for (int b = 0; b < 4; b++) if (be[b]) model[a[9:2]][8*b +: 8] = d[8*b +: 8];
    @(posedge clk); #1 dreq.valid = 0;
  endtask

  task automatic iacc(logic [31:0] a);
    int w = 0;
    @(negedge clk);
    ireq = '{valid: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
    forever begin
      #1;
      if (irsp.ready) break;
      @(negedge clk); w++;
    end
    checks += 2;
    if (w != LAT - 1) failures++;
    if (irsp.rdata !== model[a[9:2]]) failures++;
    @(posedge clk); #1 ireq.valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      load_we = 1; load_addr = 32'(i * 4); load_data = $urandom; model[i] = load_data;
    end
    @(negedge clk); load_we = 0;
    for (int k = 0; k < 400; k++) begin
      automatic logic [31:0] a = {22'd0, 8'($urandom), 2'b00};
      case ($urandom_range(0, 2))
        0: iacc(a);
        1: dacc(0, a, 4'hF, 0);
        default: dacc(1, a, 4'($urandom), $urandom);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
