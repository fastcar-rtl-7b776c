// tb_fc_sram: three ports issue random reads and writes. A reference array
// checks every read result; the test also checks one grant per cycle, that
// read data returns on the right port one cycle after its grant, and that with
// all three ports requesting the grants rotate 0,1,2 (round robin).
module tb_fc_sram;
  import fc_pkg::*;
  localparam int NP = 3, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  sram_req_t req [NP];
  sram_rsp_t rsp [NP];
  logic [WORD_W-1:0] ref_mem [DEPTH];
  logic [WORD_W-1:0] expect_q [NP];
  logic pend [NP];
  logic was_gnt [NP];
  int checks = 0, failures = 0, rr_seen = 0;

  fc_sram #(.NPORT(NP), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  int last_g = -1;
  always @(posedge clk) if (rst_n) begin
    automatic int ng = 0;
    for (int p = 0; p < NP; p++) begin
      if (pend[p]) begin
        check(rsp[p].rvalid, "rvalid one cycle after grant");
        check(rsp[p].rdata == expect_q[p], "read data");
      end else check(!rsp[p].rvalid, "no stray rvalid");
      pend[p] <= 1'b0;
      was_gnt[p] <= rsp[p].gnt;
    end
    for (int p = 0; p < NP; p++) if (rsp[p].gnt) begin
      ng++;
      check(req[p].req, "grant only to requester");
      if (req[0].req && req[1].req && req[2].req && last_g >= 0) begin
        check(p == (last_g + 1) % NP, "round robin order");
        rr_seen++;
      end
      last_g = p;
      if (req[p].we) ref_mem[req[p].addr[5:0]] <= req[p].wdata;
      else begin
        pend[p] <= 1'b1;
        expect_q[p] <= ref_mem[req[p].addr[5:0]];
      end
    end
    check(ng == ((req[0].req || req[1].req || req[2].req) ? 1 : 0), "one grant per busy cycle");
  end

  initial begin
    for (int p = 0; p < NP; p++) begin req[p] = '0; pend[p] = 0; was_gnt[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every word through port 0
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      req[0] = '{req: 1'b1, we: 1'b1, addr: 16'(a), wdata: {4{$urandom}}};
      @(posedge clk);
    end
    @(negedge clk) req[0] = '0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        // a port keeps its request until granted (checked at posedge)
        if (!req[p].req || was_gnt[p]) begin
          req[p].req   = (cyc < 2000) ? 1'b1 : ($urandom_range(0, 1) == 1);
          req[p].we    = ($urandom_range(0, 2) == 0);
          req[p].addr  = 16'($urandom_range(0, DEPTH - 1));
          req[p].wdata = {4{$urandom}};
        end
      end
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (3) @(posedge clk);
    check(rr_seen > 100, "round robin exercised");
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
