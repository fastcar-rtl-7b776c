// fc_sram: on-chip data buffer of one core, shared by the DMA, the matrix unit
// (MU) and the vector unit (VU).
//
// The paper shows one SRAM under the three units and says nothing of its size
// or ports. Here it is a single-ported array of DEPTH words of WORD_W bits with
// NPORT request ports. One request is served per cycle; a round-robin arbiter
// picks among the ports that request, starting after the port served last.
// A port holds its request until it sees gnt. Write data is stored at the end
// of the grant cycle; read data returns on the granted port one cycle after
// gnt, with rvalid. The array is not reset.
module fc_sram
  import fc_pkg::*;
#(
  parameter int unsigned NPORT = 3,
  parameter int unsigned DEPTH = 4096
) (
  input  logic      clk,
  input  logic      rst_n,
  input  sram_req_t req [NPORT],
  output sram_rsp_t rsp [NPORT]
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned PW = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic [WORD_W-1:0] mem [DEPTH];
  logic [PW-1:0]     last_q;       // port served last
  logic [PW-1:0]     sel;
  logic              any;
  logic [WORD_W-1:0] rdata_q;
  logic              rd_q;
  logic [PW-1:0]     rd_port_q;

  // round-robin choice
  always_comb begin
    sel = last_q;
    any = 1'b0;
    for (int k = 1; k <= NPORT; k++) begin
      automatic int p = (int'(last_q) + k) % NPORT;
      if (!any && req[p].req) begin
        sel = PW'(p);
        any = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= PW'(NPORT - 1);
      rd_q      <= 1'b0;
      rd_port_q <= '0;
    end else begin
      rd_q <= any && !req[sel].we;
      if (any) begin
        last_q    <= sel;
        rd_port_q <= sel;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (any) begin
      if (req[sel].we) mem[req[sel].addr[AW-1:0]] <= req[sel].wdata;
      else             rdata_q <= mem[req[sel].addr[AW-1:0]];
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      rsp[p].gnt    = any && (sel == PW'(p));
      rsp[p].rvalid = rd_q && (rd_port_q == PW'(p));
      rsp[p].rdata  = rdata_q;
    end
  end
endmodule
