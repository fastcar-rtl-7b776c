// fc_core: one accelerator core, the left half of the paper's block diagram:
// the Control module with its three instruction FIFOs, the DMA, the Matrix
// Unit (MU), the Vector Unit (VU) and the shared on-chip SRAM.
//
// The core receives instructions from the scheduler (DRS) on a valid/ready
// stream, one per cycle. The control module queues them per unit and starts
// the units; the units share the SRAM through a round-robin arbiter (port 0
// DMA, 1 MU, 2 VU). The DMA is the core's only path to off-chip memory, over
// its own AXI4 master port. idle is high when the core has nothing queued or
// running. The paper shows this composition; the SRAM size (SRAM_WORDS words of
// 128 bits) and the FIFO depth are this design's choices.
module fc_core
  import fc_pkg::*;
#(
  parameter int unsigned SRAM_WORDS = 16384,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned MAX_K      = 11008
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  instr_t      in_instr,
  output axi_m2s_t    axi_o,
  input  axi_s2m_t    axi_i,
  output logic        idle,
  output logic [15:0] done_cnt [NUM_UNITS]
);
  logic [NUM_UNITS-1:0] start, busy, done;
  instr_t               start_instr [NUM_UNITS];
  sram_req_t            sreq [NUM_UNITS];
  sram_rsp_t            srsp [NUM_UNITS];

  fc_control #(.FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .in_instr,
    .start, .start_instr, .busy, .done, .idle, .done_cnt
  );

  fc_dma u_dma (
    .clk, .rst_n,
    .start(start[0]), .instr(start_instr[0]), .busy(busy[0]), .done(done[0]),
    .sreq(sreq[0]), .srsp(srsp[0]), .axi_o, .axi_i
  );

  fc_mu #(.MAX_K(MAX_K)) u_mu (
    .clk, .rst_n,
    .start(start[1]), .instr(start_instr[1]), .busy(busy[1]), .done(done[1]),
    .sreq(sreq[1]), .srsp(srsp[1])
  );

  fc_vu u_vu (
    .clk, .rst_n,
    .start(start[2]), .instr(start_instr[2]), .busy(busy[2]), .done(done[2]),
    .sreq(sreq[2]), .srsp(srsp[2])
  );

  fc_sram #(.NPORT(NUM_UNITS), .DEPTH(SRAM_WORDS)) u_sram (
    .clk, .rst_n, .req(sreq), .rsp(srsp)
  );
endmodule
