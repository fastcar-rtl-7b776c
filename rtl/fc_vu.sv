// fc_vu: vector unit (VU) of one core. Runs lane-wise operations on LANES int8
// lanes per SRAM word, over len consecutive words:
//   VU_ADD  : c[i] = sat8(a[i] + b[i])                 (residual add)
//   VU_MUL  : c[i] = sat8((a[i] * b[i]) >>> shift)     (gate * up product)
//   VU_COPY : c[i] = a[i]                              (move a cached output)
// with a at word addr_a, b at addr_b and c at addr_c, each advancing by one.
//
// The paper names the VU and says it performs vector computation; which
// operations it offers, their number format and the datapath are this design's
// choices. The nonlinear activation of the MLP is not among them (the paper
// gives no hardware form for it). The unit is a simple sequencer: read a, read
// b (not for COPY), write c; without SRAM contention that is 5 cycles per word
// (3 for COPY). start/busy/done as for the other units.
module fc_vu
  import fc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  instr_t    instr,
  output logic      busy,
  output logic      done,
  output sram_req_t sreq,
  input  sram_rsp_t srsp
);
  typedef enum logic [2:0] {IDLE, RA, WA, RB, WB, WR} state_e;
  state_e state;

  logic [3:0]             op_q;
  logic [4:0]             shift_q;
  logic [SRAM_ADDR_W-1:0] a_q, b_q, c_q;
  logic [15:0]            left_q;
  logic [WORD_W-1:0]      va, vb, res;

  always_comb begin
    for (int n = 0; n < LANES; n++) begin
      automatic logic signed [31:0] x = 32'($signed(va[8*n +: 8]));
      automatic logic signed [31:0] y = 32'($signed(vb[8*n +: 8]));
      unique case (op_q)
        VU_ADD:  res[8*n +: 8] = sat8(x + y);
        VU_MUL:  res[8*n +: 8] = sat8((x * y) >>> shift_q);
        default: res[8*n +: 8] = va[8*n +: 8];
      endcase
    end
  end

  always_comb begin
    sreq = '0;
    unique case (state)
      RA: begin sreq.req = 1'b1; sreq.addr = a_q; end
      RB: begin sreq.req = 1'b1; sreq.addr = b_q; end
      WR: begin sreq.req = 1'b1; sreq.we = 1'b1; sreq.addr = c_q; sreq.wdata = res; end
      default: ;
    endcase
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      done    <= 1'b0;
      op_q    <= '0;
      shift_q <= '0;
      a_q     <= '0;
      b_q     <= '0;
      c_q     <= '0;
      left_q  <= '0;
      va      <= '0;
      vb      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          op_q    <= instr.op;
          shift_q <= instr.shift;
          a_q     <= instr.addr_a;
          b_q     <= instr.addr_b;
          c_q     <= instr.addr_c;
          left_q  <= instr.len;
          if (instr.len == 0) done <= 1'b1;
          else state <= RA;
        end
        RA: if (srsp.gnt) state <= WA;
        WA: if (srsp.rvalid) begin
          va    <= srsp.rdata;
          state <= (op_q == VU_COPY) ? WR : RB;
        end
        RB: if (srsp.gnt) state <= WB;
        WB: if (srsp.rvalid) begin
          vb    <= srsp.rdata;
          state <= WR;
        end
        WR: if (srsp.gnt) begin
          a_q    <= a_q + 1'b1;
          b_q    <= b_q + 1'b1;
          c_q    <= c_q + 1'b1;
          left_q <= left_q - 1'b1;
          if (left_q == 16'd1) begin
            state <= IDLE;
            done  <= 1'b1;
          end else state <= RA;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
