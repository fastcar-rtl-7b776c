// fc_control: control module of one core. Sorts the core's instructions into
// one instruction FIFO per execution unit (DMA, MU, VU) and starts each unit on
// the head of its FIFO when the unit is free and the instruction's
// dependencies are met.
//
// The paper says the Control module manages the units and sends the FIFOs the
// control signals that coordinate them; how is not given. This design uses a
// small scoreboard. For each unit u it counts instructions enqueued (enq_cnt)
// and completed (done_cnt). When an instruction is enqueued, for every unit u
// set in its wait_mask it records need[u] = enq_cnt[u], i.e. all u-instructions
// that came before it in program order. It may start only when
// done_cnt[u] >= need[u] for those units. So wait_mask expresses "wait for all
// earlier work of these units", which is how the program orders a load before
// its use or a compute before its store. Counters are 16 bits and compared
// modulo 2^16.
//
// Timing: one instruction is accepted per cycle (in_ready is the target FIFO's
// in_ready); an instruction can start two cycles after it is accepted; each
// unit can start one instruction per cycle it is idle.
module fc_control
  import fc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  instr_t               in_instr,
  // per unit: 0 = DMA, 1 = MU, 2 = VU
  output logic [NUM_UNITS-1:0] start,
  output instr_t               start_instr [NUM_UNITS],
  input  logic [NUM_UNITS-1:0] busy,
  input  logic [NUM_UNITS-1:0] done,
  output logic                 idle,
  output logic [15:0]          done_cnt [NUM_UNITS]
);
  typedef struct packed {
    logic [NUM_UNITS-1:0][15:0] need;
    instr_t                     instr;
  } entry_t;

  localparam int unsigned EW = $bits(entry_t);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [15:0]          enq_cnt [NUM_UNITS];
  logic [NUM_UNITS-1:0] f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  entry_t               f_out [NUM_UNITS];
  entry_t               new_entry;
  logic [CW-1:0]        f_count [NUM_UNITS];
  logic [NUM_UNITS-1:0] dep_ok;
  logic [1:0]           u_in;
  logic [NUM_UNITS-1:0] start_q;   // started last cycle (busy not yet visible)

  assign u_in = in_instr.unit;

  always_comb begin
    new_entry.instr = in_instr;
    for (int u = 0; u < NUM_UNITS; u++) new_entry.need[u] = enq_cnt[u];
    f_in_valid = '0;
    in_ready   = 1'b0;
    if (u_in < 2'(NUM_UNITS)) begin
      f_in_valid[u_in] = in_valid;
      in_ready         = f_in_ready[u_in];
    end
  end

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    fc_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (f_in_valid[u]),
      .in_ready (f_in_ready[u]),
      .in_data  (new_entry),
      .out_valid(f_out_valid[u]),
      .out_ready(f_out_ready[u]),
      .out_data (f_out[u]),
      .count    (f_count[u])
    );

    always_comb begin
      dep_ok[u] = 1'b1;
      for (int v = 0; v < NUM_UNITS; v++)
        if (f_out[u].instr.wait_mask[v] &&
            $signed(done_cnt[v] - f_out[u].need[v]) < 0)
          dep_ok[u] = 1'b0;
    end

    assign f_out_ready[u]    = f_out_valid[u] && !busy[u] && !start_q[u] && dep_ok[u];
    assign start[u]          = f_out_ready[u];
    assign start_instr[u]    = f_out[u].instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= '0;
      for (int u = 0; u < NUM_UNITS; u++) begin
        enq_cnt[u]  <= '0;
        done_cnt[u] <= '0;
      end
    end else begin
      start_q <= start;
      for (int u = 0; u < NUM_UNITS; u++) begin
        if (f_in_valid[u] && f_in_ready[u]) enq_cnt[u] <= enq_cnt[u] + 1'b1;
        if (done[u])                        done_cnt[u] <= done_cnt[u] + 1'b1;
      end
    end
  end

  assign idle = !(|f_out_valid) && !(|busy) && !(|start_q) && !(|done) && !in_valid;

  // SYS instructions are consumed by the scheduler and never reach a core
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_instr.unit != UNIT_SYS);
endmodule
