// tb_fc_core: one core runs small MLP-like programs end to end: DMA loads of
// an input vector, a weight block and a residual word, a GEMV on the MU, a
// residual add on the VU and a DMA store, ordered only by wait masks. The
// stored word is compared with the same computation done here. Memory stalls
// are random.
module tb_fc_core;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, idle;
  instr_t in_instr;
  axi_m2s_t m2s [1];
  axi_s2m_t s2m [1];
  logic [15:0] done_cnt [NUM_UNITS];
  int checks = 0, failures = 0;

  fc_core #(.SRAM_WORDS(1024), .MAX_K(256)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_instr,
    .axi_o(m2s[0]), .axi_i(s2m[0]), .idle, .done_cnt);
  fc_axi_mem #(.NPORT(1), .WORDS(8192), .STALL(1'b1)) u_mem (.clk, .rst_n, .m2s, .s2m);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  task automatic send(input unit_e u, input logic [3:0] op, input int a, input int b, input int c,
                      input int len, input int ext_w, input int sh, input logic [2:0] wm);
    @(negedge clk);
    in_valid = 1; in_instr = '0;
    in_instr.unit = u; in_instr.op = op; in_instr.addr_a = 16'(a); in_instr.addr_b = 16'(b);
    in_instr.addr_c = 16'(c); in_instr.len = 16'(len); in_instr.ext_addr = 32'(ext_w * 16);
    in_instr.shift = 5'(sh); in_instr.wait_mask = wm;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_instr = '0;
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      automatic int k = 16 * $urandom_range(1, 16);
      automatic int xw = 16 * (r + 1), ww = 1024, rw = 2048 + 16 * r, ow = 4096 + 16 * r;
      automatic int sh = 8;
      logic [WORD_W-1:0] o;
      // program: wait_mask bits are {VU, MU, DMA}
      send(UNIT_DMA, DMA_LOAD,  0,   0, 0,   k / 16, xw, 0, 3'b010);  // x  -> 0
      send(UNIT_DMA, DMA_LOAD,  16,  0, 0,   k,      ww, 0, 3'b010);  // W  -> 16
      send(UNIT_DMA, DMA_LOAD,  301, 0, 0,   1,      rw, 0, 3'b100);  // r  -> 301
      send(UNIT_MU,  MU_GEMV,   0,  16, 300, k,      0, sh, 3'b001);  // y  -> 300
      send(UNIT_VU,  VU_ADD,    300, 301, 302, 1,    0, 0, 3'b011);   // y + r -> 302
      send(UNIT_DMA, DMA_STORE, 302, 0, 0,   1,      ow, 0, 3'b100);  // -> ow
      @(posedge clk);
      while (!idle) @(posedge clk);
      for (int n = 0; n < LANES; n++) begin
        automatic int acc = 0, y, rr, s;
        for (int i = 0; i < k; i++)
          acc += int'($signed(u_mem.mem[xw + i / 16][8*(i%16) +: 8])) *
                 int'($signed(u_mem.mem[ww + i][8*n +: 8]));
        y  = acc >>> sh; y = (y > 127) ? 127 : (y < -128) ? -128 : y;
        rr = int'($signed(u_mem.mem[rw][8*n +: 8]));
        s  = y + rr; s = (s > 127) ? 127 : (s < -128) ? -128 : s;
        o  = u_mem.mem[ow];
        check(o[8*n +: 8] == 8'(s), "core result lane");
      end
    end
    check(done_cnt[0] == 16 && done_cnt[1] == 4 && done_cnt[2] == 4, "completion counters");
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
