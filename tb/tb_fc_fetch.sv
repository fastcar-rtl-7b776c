// tb_fc_fetch: places a random program in the memory model, starts the fetch
// unit with random downstream back-pressure and random memory stalls, and
// checks that exactly the program comes out, in order, that bursts never
// exceed 16 beats, and that with no stalls the stream sustains close to one
// instruction per cycle.
module tb_fc_fetch;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, r_ready, out_valid, out_ready;
  logic [AXI_ADDR_W-1:0] base_addr;
  logic [15:0] num_instr;
  axi_a_t ar;
  instr_t out_instr;
  axi_m2s_t m2s [1];
  axi_s2m_t s2m [1];
  int checks = 0, failures = 0, got = 0;
  bit bp = 1;

  fc_fetch dut (.clk, .rst_n, .start, .base_addr, .num_instr, .busy, .done,
    .ar, .ar_ready(s2m[0].ar_ready), .r_valid(s2m[0].r_valid), .r_data(s2m[0].r_data),
    .r_last(s2m[0].r_last), .r_ready, .out_valid, .out_ready, .out_instr);
  fc_axi_mem #(.NPORT(1), .WORDS(4096), .STALL(1'b1)) u_mem (.clk, .rst_n, .m2s, .s2m);

  always_comb begin
    m2s[0] = '0;
    m2s[0].ar = ar;
    m2s[0].r_ready = r_ready;
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  int base_w;
  always @(posedge clk) if (rst_n) begin
    if (ar.valid && s2m[0].ar_ready) check(ar.len < 8'd16, "burst length");
    if (out_valid && out_ready) begin
      check(out_instr == instr_t'(u_mem.mem[base_w + got]), "instruction order/content");
      got++;
    end
  end
  always @(negedge clk) out_ready = bp ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic run(input int base, input int n, output int cycles);
    got = 0; base_w = base;
    @(negedge clk); start = 1; base_addr = 32'(base * 16); num_instr = 16'(n);
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #1 cycles++; end
    check(got == n, "instruction count");
    check(!busy, "idle after done");
  endtask

  initial begin
    int cyc;
    start = 0; base_addr = 0; num_instr = 0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 1, cyc);
    run(256, 37, cyc);
    run(1024, 500, cyc);
    bp = 0;
    run(2048, 160, cyc);
    $display("160 instructions with memory stalls only: %0d cycles", cyc);
    check(cyc < 160 * 2 + 10 * 4, "throughput");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
