// fc_tb_sram_port: testbench helper that gives a test direct word access to a
// core SRAM through one arbitrated port (write_word / read_word tasks).
module fc_tb_sram_port
  import fc_pkg::*;
(
  input  logic      clk,
  output sram_req_t req,
  input  sram_rsp_t rsp
);
  initial req = '0;

  task automatic write_word(input int a, input logic [WORD_W-1:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, addr: 16'(a), wdata: d};
    do @(posedge clk); while (!rsp.gnt);
    #1 req = '0;
  endtask

  task automatic read_word(input int a, output logic [WORD_W-1:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b0, addr: 16'(a), wdata: '0};
    do @(posedge clk); while (!rsp.gnt);
    #1 req = '0;
    while (!rsp.rvalid) begin @(posedge clk); #1; end
    d = rsp.rdata;
  endtask
endmodule
