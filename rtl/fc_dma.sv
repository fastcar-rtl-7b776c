// fc_dma: direct memory access unit of one core. Moves blocks of 128-bit words
// between off-chip memory (DDR or HBM, over AXI4) and the core's SRAM.
//
// The paper gives only the DMA's role: loading data from off-chip memory. The
// store direction, needed to write MLP outputs back to the replay cache in
// off-chip memory, and everything below are this design's choices.
//   DMA_LOAD  : len words from byte address ext_addr to SRAM word addr_a.
//   DMA_STORE : len words from SRAM word addr_a to byte address ext_addr.
// Transfers are split into INCR bursts of up to MAX_BURST beats, one burst in
// flight. A load writes each R beat into SRAM in the cycle the SRAM grants it
// (r_ready = gnt), so an uncontended load moves one word per cycle. A store
// reads a word, then offers it on W, about three cycles per word. ext_addr must
// be 256-byte aligned so that no burst crosses a 4 KB boundary.
//
// Interface: start pulses with the instruction while busy is low; done pulses
// in the cycle the transfer ends (for a store, at the last write response).
module fc_dma
  import fc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  instr_t    instr,
  output logic      busy,
  output logic      done,
  output sram_req_t sreq,
  input  sram_rsp_t srsp,
  output axi_m2s_t  axi_o,
  input  axi_s2m_t  axi_i
);
  localparam int unsigned BYTES = WORD_W / 8;

  typedef enum logic [2:0] {IDLE, L_AR, L_R, S_AW, S_RD, S_RW, S_W, S_B} state_e;
  state_e state;

  logic [AXI_ADDR_W-1:0]  ext_q;
  logic [SRAM_ADDR_W-1:0] sa_q;
  logic [15:0]            left_q;     // words not yet moved (burst granularity)
  logic [7:0]             beat_q;     // beats left in this burst
  logic [WORD_W-1:0]      wbuf;
  logic [15:0]            blen;

  assign blen = (left_q > 16'(MAX_BURST)) ? 16'(MAX_BURST) : left_q;

  always_comb begin
    axi_o          = '0;
    sreq           = '0;
    axi_o.ar.valid = (state == L_AR);
    axi_o.ar.addr  = ext_q;
    axi_o.ar.len   = 8'(blen - 1);
    axi_o.aw.valid = (state == S_AW);
    axi_o.aw.addr  = ext_q;
    axi_o.aw.len   = 8'(blen - 1);
    axi_o.w.valid  = (state == S_W);
    axi_o.w.data   = wbuf;
    axi_o.w.last   = (beat_q == 8'd1);
    axi_o.b_ready  = (state == S_B);
    // load: forward R beats into SRAM
    if (state == L_R) begin
      sreq.req       = axi_i.r_valid;
      sreq.we        = 1'b1;
      sreq.addr      = sa_q;
      sreq.wdata     = axi_i.r_data;
      axi_o.r_ready  = srsp.gnt;
    end
    if (state == S_RD) begin
      sreq.req  = 1'b1;
      sreq.we   = 1'b0;
      sreq.addr = sa_q;
    end
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= IDLE;
      done   <= 1'b0;
      ext_q  <= '0;
      sa_q   <= '0;
      left_q <= '0;
      beat_q <= '0;
      wbuf   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          ext_q  <= instr.ext_addr;
          sa_q   <= instr.addr_a;
          left_q <= instr.len;
          if (instr.len == 0) done <= 1'b1;
          else state <= (instr.op == DMA_STORE) ? S_AW : L_AR;
        end
        L_AR: if (axi_i.ar_ready) begin
          state  <= L_R;
          beat_q <= 8'(blen);
        end
        L_R: if (axi_i.r_valid && srsp.gnt) begin
          sa_q   <= sa_q + 1'b1;
          beat_q <= beat_q - 1'b1;
          if (beat_q == 8'd1) begin
            ext_q  <= ext_q + AXI_ADDR_W'(blen * BYTES);
            left_q <= left_q - blen;
            if (left_q == blen) begin
              state <= IDLE;
              done  <= 1'b1;
            end else state <= L_AR;
          end
        end
        S_AW: if (axi_i.aw_ready) begin
          state  <= S_RD;
          beat_q <= 8'(blen);
        end
        S_RD: if (srsp.gnt) state <= S_RW;
        S_RW: if (srsp.rvalid) begin
          wbuf  <= srsp.rdata;
          state <= S_W;
        end
        S_W: if (axi_i.w_ready) begin
          sa_q   <= sa_q + 1'b1;
          beat_q <= beat_q - 1'b1;
          state  <= (beat_q == 8'd1) ? S_B : S_RD;
        end
        S_B: if (axi_i.b_valid) begin
          ext_q  <= ext_q + AXI_ADDR_W'(blen * BYTES);
          left_q <= left_q - blen;
          if (left_q == blen) begin
            state <= IDLE;
            done  <= 1'b1;
          end else state <= S_AW;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && !busy |-> instr.ext_addr[7:0] == 8'h00);
endmodule
