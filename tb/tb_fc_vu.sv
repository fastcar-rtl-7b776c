// tb_fc_vu: random operand blocks in SRAM, then VU_ADD, VU_MUL (with shifts)
// and VU_COPY over several lengths. Every lane of every result word is checked
// against arithmetic done here, including saturation, and words beyond the
// block must be untouched. Cycle counts: 5 per word (3 for COPY) plus 1.
module tb_fc_vu;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  instr_t instr;
  sram_req_t sreq [2];
  sram_rsp_t srsp [2];
  int checks = 0, failures = 0, n_sat = 0;

  fc_vu dut (.clk, .rst_n, .start, .instr, .busy, .done, .sreq(sreq[1]), .srsp(srsp[1]));
  fc_sram #(.NPORT(2), .DEPTH(1024)) u_sram (.clk, .rst_n, .req(sreq), .rsp(srsp));
  fc_tb_sram_port u_port (.clk, .req(sreq[0]), .rsp(srsp[0]));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    start = 0; instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 15; t++) begin
      automatic int len = $urandom_range(1, 20);
      automatic logic [3:0] op = 4'(t % 3);
      automatic int sh = $urandom_range(0, 7);
      logic [WORD_W-1:0] a [20], b [20], d;
      int cyc;
      for (int i = 0; i < len; i++) begin
        a[i] = {$urandom, $urandom, $urandom, $urandom};
        b[i] = {$urandom, $urandom, $urandom, $urandom};
        u_port.write_word(100 + i, a[i]);
        u_port.write_word(200 + i, b[i]);
      end
      u_port.write_word(300 + len, '1);   // guard word
      @(negedge clk);
      instr = '0; instr.unit = UNIT_VU; instr.op = op; instr.len = 16'(len); instr.shift = 5'(sh);
      instr.addr_a = 16'd100; instr.addr_b = 16'd200; instr.addr_c = 16'd300;
      start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(posedge clk); #1 cyc++; end
      check(cyc == ((op == VU_COPY) ? 3 : 5) * len + 1, "cycle count");
      for (int i = 0; i < len; i++) begin
        u_port.read_word(300 + i, d);
        for (int n = 0; n < LANES; n++) begin
          automatic int x = int'($signed(a[i][8*n +: 8]));
          automatic int y = int'($signed(b[i][8*n +: 8]));
          automatic int v = (op == VU_ADD) ? x + y : (op == VU_MUL) ? (x * y) >>> sh : x;
          automatic int s = (v > 127) ? 127 : (v < -128) ? -128 : v;
          if (s != v) n_sat++;
          check(d[8*n +: 8] == 8'(s), "lane result");
        end
      end
      u_port.read_word(300 + len, d);
      check(d == '1, "no write past the block");
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
