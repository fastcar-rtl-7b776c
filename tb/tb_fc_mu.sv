// tb_fc_mu: writes random int8 vectors and weight rows into SRAM, runs
// MU_GEMV for several lengths and shifts, and compares the written result word
// with a dot product computed here, including saturation. Without SRAM
// contention the run time must be len/16 + len + 4 cycles or less.
module tb_fc_mu;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  instr_t instr;
  sram_req_t sreq [2];
  sram_rsp_t srsp [2];
  int checks = 0, failures = 0, n_sat = 0;

  fc_mu #(.MAX_K(256)) dut (.clk, .rst_n, .start, .instr, .busy, .done, .sreq(sreq[1]), .srsp(srsp[1]));
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
    for (int t = 0; t < 12; t++) begin
      automatic int k = 16 * ((t == 0) ? 1 : (t == 1) ? 16 : $urandom_range(1, 16));
      automatic int sh = (t < 6) ? $urandom_range(0, 3) : $urandom_range(6, 12);
      logic signed [7:0] x [256];
      logic [WORD_W-1:0] w, d;
      int acc [LANES];
      int cyc;
      for (int n = 0; n < LANES; n++) acc[n] = 0;
      for (int i = 0; i < k; i++) x[i] = 8'($urandom);
      for (int j = 0; j < k / 16; j++) begin
        for (int l = 0; l < 16; l++) w[8*l +: 8] = x[16*j + l];
        u_port.write_word(10 + j, w);
      end
      for (int i = 0; i < k; i++) begin
        w = {$urandom, $urandom, $urandom, $urandom};
        for (int n = 0; n < LANES; n++) acc[n] += int'(x[i]) * int'($signed(w[8*n +: 8]));
        u_port.write_word(100 + i, w);
      end
      @(negedge clk);
      instr = '0; instr.unit = UNIT_MU; instr.op = MU_GEMV; instr.len = 16'(k);
      instr.addr_a = 16'd10; instr.addr_b = 16'd100; instr.addr_c = 16'd5; instr.shift = 5'(sh);
      start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(posedge clk); #1 cyc++; end
      check(cyc <= k / 16 + k + 4, "cycle count");
      u_port.read_word(5, d);
      for (int n = 0; n < LANES; n++) begin
        automatic int v = acc[n] >>> sh;
        automatic int s = (v > 127) ? 127 : (v < -128) ? -128 : v;
        if (s != v) n_sat++;
        check($signed(d[8*n +: 8]) == 8'(s), "result lane");
      end
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
