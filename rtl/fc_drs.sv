// fc_drs: Dynamic Resource Scheduling (DRS). It sits between the instruction
// fetch and the accelerator cores and decides, instruction by instruction,
// which core runs it, or whether it is dropped because its batch replays.
//
// From the paper: a 32-bit Index Register holds one bit per batch
// (0 = replay, 1 = compute) and is written from the averaged-TAS comparison;
// 32 Mapping Registers of log2(NUM_CORES) bits name the core that runs each
// batch; they are filled round-robin over the batches that compute, so the
// remaining work is spread evenly over the cores; instructions of replayed
// batches are discarded and the others go to the core their Mapping Register
// names. Without replay ("dense mode") batches go to cores statically.
//
// This design's own choices: the static mapping is batch mod NUM_CORES; only
// instructions flagged dyn (the MLP section of a batch) are subject to replay
// and remapping, other instructions use the static mapping, and bcast
// instructions go to every core at once. Replay mode is switched by a SYS_MODE
// instruction and the Mapping Registers are rebuilt by a SYS_MAP instruction,
// one batch per cycle (NUM_BATCH cycles), starting at core 0; a replayed batch's
// Mapping Register keeps its old value (the paper's figure shows it as "x").
// SYS_MAP waits until the TAS unit has no batch half-accumulated.
//
// Timing: one instruction is accepted per cycle when its target core is ready;
// dispatch is combinational from in_* to out_* (no added latency); a discarded
// instruction also takes one cycle.
module fc_drs
  import fc_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction stream from fetch
  input  logic                 in_valid,
  output logic                 in_ready,
  input  instr_t               in_instr,
  // Index Register write port (from the TAS traffic light)
  input  logic                 idx_we,
  input  logic [BATCH_W-1:0]   idx_batch,
  input  logic                 idx_bit,
  input  logic                 tas_busy,
  // to the cores
  output logic [NUM_CORES-1:0] out_valid,
  input  logic [NUM_CORES-1:0] out_ready,
  output instr_t               out_instr,
  // status
  output logic                 replay_mode,
  output logic [NUM_BATCH-1:0] index_reg,
  output logic [CW-1:0]        map_reg [NUM_BATCH],
  output logic                 map_busy,
  output logic [31:0]          n_dispatched,
  output logic [31:0]          n_discarded
);
  logic [BATCH_W-1:0] map_i;      // batch being mapped
  logic [CW-1:0]      rr;         // next core in the round robin
  logic [CW-1:0]      tgt;
  logic               is_sys, drop, go, all_ready;

  function automatic logic [CW-1:0] next_core(input logic [CW-1:0] c);
    return (c == CW'(NUM_CORES - 1)) ? '0 : c + 1'b1;
  endfunction

  always_comb begin
    is_sys    = (in_instr.unit == UNIT_SYS);
    all_ready = &out_ready;
    drop      = 1'b0;
    tgt       = CW'(in_instr.batch % NUM_CORES);
    if (in_instr.dyn && replay_mode) begin
      drop = !index_reg[in_instr.batch];
      tgt  = map_reg[in_instr.batch];
    end

    out_valid = '0;
    in_ready  = 1'b0;
    go        = 1'b0;
    if (map_busy) begin
      in_ready = 1'b0;
    end else if (is_sys) begin
      // SYS_MAP is accepted when it can start; the others at once
      in_ready = (in_instr.op == SYS_MAP) ? !tas_busy && !idx_we : 1'b1;
    end else if (drop) begin
      in_ready = 1'b1;
    end else if (in_instr.bcast) begin
      out_valid = in_valid && all_ready ? '1 : '0;
      in_ready  = all_ready;
      go        = 1'b1;
    end else begin
      out_valid[tgt] = in_valid;
      in_ready       = out_ready[tgt];
      go             = 1'b1;
    end
  end

  assign out_instr = in_instr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      replay_mode  <= 1'b0;
      index_reg    <= '1;
      map_busy     <= 1'b0;
      map_i        <= '0;
      rr           <= '0;
      n_dispatched <= '0;
      n_discarded  <= '0;
      for (int b = 0; b < NUM_BATCH; b++) map_reg[b] <= CW'(b % NUM_CORES);
    end else begin
      if (idx_we) index_reg[idx_batch] <= idx_bit;

      if (map_busy) begin
        if (index_reg[map_i]) begin
          map_reg[map_i] <= rr;
          rr             <= next_core(rr);
        end
        map_i <= map_i + 1'b1;
        if (map_i == BATCH_W'(NUM_BATCH - 1)) map_busy <= 1'b0;
      end

      if (in_valid && in_ready) begin
        if (is_sys) begin
          case (in_instr.op)
            SYS_MODE: replay_mode <= in_instr.addr_a[0];
            SYS_MAP: begin
              map_busy <= 1'b1;
              map_i    <= '0;
              rr       <= '0;
            end
            default: ;
          endcase
        end else if (drop) begin
          n_discarded <= n_discarded + 1;
        end else if (go) begin
          n_dispatched <= n_dispatched + 1;
        end
      end
    end
  end

  // a dispatched instruction goes to exactly one core unless broadcast
  assert property (@(posedge clk) disable iff (!rst_n)
                   !in_instr.bcast |-> $onehot0(out_valid));
  // an instruction for a replayed batch never reaches a core
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid && in_instr.dyn && replay_mode && !index_reg[in_instr.batch] |-> out_valid == '0);
endmodule
