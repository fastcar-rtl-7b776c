// tb_fc_dma: loads random blocks from the memory model into SRAM and stores
// SRAM blocks back, with random memory stalls and a competing SRAM user. Every
// word is compared with the source. Lengths cover a single beat, exact bursts
// and a partial last burst.
module tb_fc_dma;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  instr_t instr;
  sram_req_t sreq [2];
  sram_rsp_t srsp [2];
  axi_m2s_t m2s [1];
  axi_s2m_t s2m [1];
  int checks = 0, failures = 0;

  fc_dma dut (.clk, .rst_n, .start, .instr, .busy, .done, .sreq(sreq[1]), .srsp(srsp[1]),
              .axi_o(m2s[0]), .axi_i(s2m[0]));
  fc_sram #(.NPORT(2), .DEPTH(1024)) u_sram (.clk, .rst_n, .req(sreq), .rsp(srsp));
  fc_axi_mem #(.NPORT(1), .WORDS(8192), .STALL(1'b1)) u_mem (.clk, .rst_n, .m2s, .s2m);
  fc_tb_sram_port u_port (.clk, .req(sreq[0]), .rsp(srsp[0]));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  task automatic go(input logic [3:0] op, input int ext_w, input int sa, input int len, output int cyc);
    @(negedge clk);
    instr = '0; instr.unit = UNIT_DMA; instr.op = op;
    instr.ext_addr = 32'(ext_w * 16); instr.addr_a = 16'(sa); instr.len = 16'(len);
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1 cyc++; end
  endtask

  initial begin
    int cyc;
    logic [WORD_W-1:0] d;
    start = 0; instr = '0;
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // loads
    for (int t = 0; t < 6; t++) begin
      automatic int len = (t == 0) ? 1 : (t == 1) ? 16 : $urandom_range(17, 70);
      automatic int ew = 16 * $urandom_range(0, 400);
      automatic int sa = $urandom_range(0, 1024 - 71);
      go(DMA_LOAD, ew, sa, len, cyc);
      for (int k = 0; k < len; k++) begin
        u_port.read_word(sa + k, d);
        check(d == u_mem.mem[ew + k], "loaded word");
      end
    end
    // stores
    for (int t = 0; t < 6; t++) begin
      automatic int len = (t == 0) ? 1 : (t == 1) ? 32 : $urandom_range(17, 70);
      automatic int ew = 4096 + 16 * $urandom_range(0, 200);
      automatic int sa = $urandom_range(0, 1024 - 71);
      logic [WORD_W-1:0] ref_w [70];
      for (int k = 0; k < len; k++) begin
        ref_w[k] = {$urandom, $urandom, $urandom, $urandom};
        u_port.write_word(sa + k, ref_w[k]);
      end
      go(DMA_STORE, ew, sa, len, cyc);
      for (int k = 0; k < len; k++) check(u_mem.mem[ew + k] == ref_w[k], "stored word");
      check(u_mem.mem[ew + len] != ref_w[len-1] || len == 1, "no overrun");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
