// fc_axi_mem: behavioural model of off-chip memory (DDR/HBM) for simulation.
// NPORT independent AXI4 slave ports share one array of WORDS 128-bit words
// (byte address >> 4). Each port serves one read burst and one write burst at a
// time; with STALL set, R and W beats are randomly delayed to exercise the
// masters' handshakes. Not synthesizable; testbenches fill and inspect mem
// directly.
module fc_axi_mem
  import fc_pkg::*;
#(
  parameter int unsigned NPORT = 1,
  parameter int unsigned WORDS = 65536,
  parameter bit          STALL = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_m2s_t m2s [NPORT],
  output axi_s2m_t s2m [NPORT]
);
  logic [WORD_W-1:0] mem [WORDS];

  logic        rd_busy [NPORT];
  logic [31:0] rd_addr [NPORT];
  logic [8:0]  rd_cnt  [NPORT];
  logic        wr_busy [NPORT];
  logic [31:0] wr_addr [NPORT];
  logic        b_pend  [NPORT];
  logic        r_go    [NPORT];
  logic        w_go    [NPORT];

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      s2m[p].ar_ready = !rd_busy[p];
      s2m[p].r_valid  = rd_busy[p] && r_go[p];
      s2m[p].r_data   = mem[rd_addr[p] % WORDS];
      s2m[p].r_last   = (rd_cnt[p] == 9'd1);
      s2m[p].aw_ready = !wr_busy[p] && !b_pend[p];
      s2m[p].w_ready  = wr_busy[p] && w_go[p];
      s2m[p].b_valid  = b_pend[p];
    end
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORT; p++) begin
        rd_busy[p] <= 1'b0; rd_addr[p] <= '0; rd_cnt[p] <= '0;
        wr_busy[p] <= 1'b0; wr_addr[p] <= '0; b_pend[p] <= 1'b0;
        r_go[p] <= 1'b1; w_go[p] <= 1'b1;
      end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        r_go[p] <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
        w_go[p] <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
        if (!rd_busy[p] && m2s[p].ar.valid) begin
          rd_busy[p] <= 1'b1;
          rd_addr[p] <= m2s[p].ar.addr >> 4;
          rd_cnt[p]  <= 9'(m2s[p].ar.len) + 9'd1;
        end else if (s2m[p].r_valid && m2s[p].r_ready) begin
          rd_addr[p] <= rd_addr[p] + 1;
          rd_cnt[p]  <= rd_cnt[p] - 1'b1;
          if (rd_cnt[p] == 9'd1) rd_busy[p] <= 1'b0;
        end
        if (!wr_busy[p] && !b_pend[p] && m2s[p].aw.valid) begin
          wr_busy[p] <= 1'b1;
          wr_addr[p] <= m2s[p].aw.addr >> 4;
        end else if (s2m[p].w_ready && m2s[p].w.valid) begin
          mem[wr_addr[p] % WORDS] <= m2s[p].w.data;
          wr_addr[p] <= wr_addr[p] + 1;
          if (m2s[p].w.last) begin
            wr_busy[p] <= 1'b0;
            b_pend[p]  <= 1'b1;
          end
        end
        if (b_pend[p] && m2s[p].b_ready) b_pend[p] <= 1'b0;
      end
    end
  end
endmodule
