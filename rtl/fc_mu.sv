// fc_mu: matrix unit (MU) of one core. Computes a matrix-vector product block,
// the operation that dominates the decode phase (one new token per step):
//   c[n] = sat8( (sum_k x[k] * W[k][n]) >>> shift ),  n = 0..LANES-1
// with int8 operands and int32 accumulation.
//
// The paper names the MU and says only that it performs matrix multiplication.
// Its size, number format and dataflow here are this design's choices:
//   MU_GEMV: x is len int8 values (len a multiple of LANES, at most MAX_K)
//   packed LANES per SRAM word from word addr_a; W is len SRAM words from addr_b,
//   word k holding row k (W[k][0..LANES-1]); the LANES results are written as
//   one word to addr_c. Lane n is bits [8n+7:8n] of a word.
// First the x words are copied into a local buffer, then one W row is read per
// cycle and LANES multiply-accumulates run in parallel on it, then the result
// is written. Without SRAM contention an instruction takes about
// len/LANES + len + 4 cycles. start/busy/done as for the other units.
module fc_mu
  import fc_pkg::*;
#(
  parameter int unsigned MAX_K = 11008     // longest dot product (LLaMA-2-7B d_ff)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  instr_t    instr,
  output logic      busy,
  output logic      done,
  output sram_req_t sreq,
  input  sram_rsp_t srsp
);
  localparam int unsigned XW  = MAX_K / LANES;        // x buffer words
  localparam int unsigned XAW = $clog2(XW);

  typedef enum logic [1:0] {IDLE, XLOAD, WSTREAM, WRITE} state_e;
  state_e state;

  logic [WORD_W-1:0]      xbuf [XW];
  logic [15:0]            n_req, n_rcv, n_tot;   // reads issued / returned / needed
  logic [SRAM_ADDR_W-1:0] base_q, wbase_q, c_q;
  logic [15:0]            k_len;
  logic [4:0]             shift_q;
  logic signed [31:0]     acc [LANES];
  logic [WORD_W-1:0]      xword;
  logic signed [7:0]      xk;
  logic [WORD_W-1:0]      result;

  // x[k] for the row returning now (k = n_rcv)
  assign xword = xbuf[XAW'(n_rcv >> $clog2(LANES))];
  assign xk    = xword[8*n_rcv[$clog2(LANES)-1:0] +: 8];

  always_comb begin
    for (int n = 0; n < LANES; n++) result[8*n +: 8] = sat8(acc[n] >>> shift_q);
  end

  always_comb begin
    sreq = '0;
    if ((state == XLOAD || state == WSTREAM) && n_req != n_tot) begin
      sreq.req  = 1'b1;
      sreq.addr = ((state == XLOAD) ? base_q : wbase_q) + SRAM_ADDR_W'(n_req);
    end else if (state == WRITE) begin
      sreq.req   = 1'b1;
      sreq.we    = 1'b1;
      sreq.addr  = c_q;
      sreq.wdata = result;
    end
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      done    <= 1'b0;
      n_req   <= '0;
      n_rcv   <= '0;
      n_tot   <= '0;
      base_q  <= '0;
      wbase_q <= '0;
      c_q     <= '0;
      k_len   <= '0;
      shift_q <= '0;
      for (int n = 0; n < LANES; n++) acc[n] <= '0;
    end else begin
      done <= 1'b0;
      if (sreq.req && srsp.gnt && state != WRITE) n_req <= n_req + 1'b1;
      unique case (state)
        IDLE: if (start) begin
          base_q  <= instr.addr_a;
          wbase_q <= instr.addr_b;
          c_q     <= instr.addr_c;
          k_len   <= instr.len;
          shift_q <= instr.shift;
          n_req   <= '0;
          n_rcv   <= '0;
          n_tot   <= instr.len >> $clog2(LANES);
          for (int n = 0; n < LANES; n++) acc[n] <= '0;
          state   <= (instr.len == 0) ? WRITE : XLOAD;
        end
        XLOAD: if (srsp.rvalid) begin
          n_rcv <= n_rcv + 1'b1;
          if (n_rcv + 1'b1 == n_tot) begin
            state <= WSTREAM;
            n_req <= '0;
            n_rcv <= '0;
            n_tot <= k_len;
          end
        end
        WSTREAM: if (srsp.rvalid) begin
          for (int n = 0; n < LANES; n++)
            acc[n] <= acc[n] + 32'(xk) * 32'($signed(srsp.rdata[8*n +: 8]));
          n_rcv <= n_rcv + 1'b1;
          if (n_rcv + 1'b1 == n_tot) state <= WRITE;
        end
        WRITE: if (srsp.gnt) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == XLOAD && srsp.rvalid) xbuf[XAW'(n_rcv)] <= srsp.rdata;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && !busy |-> instr.len[$clog2(LANES)-1:0] == '0 && instr.len <= 16'(MAX_K));
endmodule
