// fc_tas: the "average TAS traffic light". It turns the per-head temporal
// attention scores (TAS) of one batch's current token into that batch's replay
// decision and writes it into the scheduler's Index Register.
//
// Following the paper, the TAS of head m is s_m = <q_t,i , k_t-1,i> / sqrt(d),
// the mean over the h heads is compared with the threshold tau, and the MLP is
// replayed when mean >= tau. The scores themselves come from the attention
// computation, so they arrive here as a stream. To avoid a divider the unit
// compares sum(s_m) >= h * tau, which is the same test. Index-Register coding
// follows the paper: 0 = replay, 1 = compute.
//
// Interface: one score per cycle on s_valid/s_score with s_batch; s_last marks
// the last head of a batch. The decision appears on idx_we/idx_batch/idx_bit one
// cycle after the s_last beat. Scores and tau are signed fixed point with FRAC
// fraction bits (Q7.8 by default, so tau values such as -1, -2.5 or -8 fit);
// this number format is this design's choice.
module fc_tas
  import fc_pkg::*;
#(
  parameter int unsigned SCORE_W = 16,
  parameter int unsigned FRAC    = 8,
  parameter int unsigned MAX_HEADS = 32   // heads averaged per decision
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [SCORE_W-1:0] tau,
  input  logic                      s_valid,
  input  logic signed [SCORE_W-1:0] s_score,
  input  logic [BATCH_W-1:0]        s_batch,
  input  logic                      s_last,
  output logic                      idx_we,
  output logic [BATCH_W-1:0]        idx_batch,
  output logic                      idx_bit,     // 0 = replay, 1 = compute
  output logic                      busy         // a batch is partly accumulated
);
  localparam int unsigned HW   = $clog2(MAX_HEADS + 1);
  localparam int unsigned SUMW = SCORE_W + HW + 1;

  logic signed [SUMW-1:0] sum_q, sum_d;
  logic        [HW-1:0]   cnt_q, cnt_d;
  logic signed [SUMW-1:0] tau_h;

  always_comb begin
    sum_d = sum_q + SUMW'(s_score);
    cnt_d = cnt_q + 1'b1;
    tau_h = SUMW'(tau) * $signed({1'b0, cnt_d});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q     <= '0;
      cnt_q     <= '0;
      idx_we    <= 1'b0;
      idx_batch <= '0;
      idx_bit   <= 1'b1;
    end else begin
      idx_we <= 1'b0;
      if (s_valid) begin
        if (s_last) begin
          idx_we    <= 1'b1;
          idx_batch <= s_batch;
          idx_bit   <= (sum_d >= tau_h) ? 1'b0 : 1'b1;   // score >= tau -> replay
          sum_q     <= '0;
          cnt_q     <= '0;
        end else begin
          sum_q <= sum_d;
          cnt_q <= cnt_d;
        end
      end
    end
  end

  assign busy = (cnt_q != '0);

  assert property (@(posedge clk) disable iff (!rst_n)
                   s_valid && !s_last |-> cnt_q < HW'(MAX_HEADS - 1));
endmodule
