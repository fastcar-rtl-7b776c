// fastcar_top: the FastCar accelerator. Instruction fetch, the Dynamic
// Resource Scheduling unit (DRS) with its averaged-TAS "traffic light", and
// NUM_CORES accelerator cores.
//
// Flow: a start pulse makes the fetch unit read num_instr pre-compiled
// instructions from off-chip memory. The DRS takes them one by one: SYS
// instructions switch replay mode or rebuild the mapping table; other
// instructions go to one core, or to all cores if broadcast. In replay mode an
// MLP-section instruction (dyn) of a batch whose Index Register bit is 0 is
// dropped, and one whose bit is 1 goes to the core its Mapping Register names.
// The Index Register is written by the TAS unit from the per-head temporal
// attention scores streamed in on tas_*; the attention that produces those
// scores is part of the program the cores run, and the scores enter here as
// ports. Each core has its own AXI4 master port to off-chip memory, as does the
// fetch unit; an AXI interconnect or memory controller is outside this design.
//
// Paper: block set and order (fetch, DRS, FIFOs, control, DMA, MU, VU, SRAM),
// 32-bit Index Register, 32 Mapping Registers of log2(cores) bits, round-robin
// mapping, discard or dispatch. Own choices: four cores (the number drawn in
// the paper's DRS figure), the instruction set, widths and handshakes.
module fastcar_top
  import fc_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 4,
  parameter int unsigned SRAM_WORDS = 16384,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned MAX_K      = 11008,
  parameter int unsigned MAX_HEADS  = 32,
  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // program start
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] prog_addr,
  input  logic [15:0]           prog_len,
  output logic                  fetch_busy,
  output logic                  fetch_done,
  output logic                  all_idle,
  // fetch AXI4 read master
  output axi_a_t                f_ar,
  input  logic                  f_ar_ready,
  input  logic                  f_r_valid,
  input  logic [WORD_W-1:0]     f_r_data,
  input  logic                  f_r_last,
  output logic                  f_r_ready,
  // per-core AXI4 masters
  output axi_m2s_t              core_axi_o [NUM_CORES],
  input  axi_s2m_t              core_axi_i [NUM_CORES],
  // temporal attention scores, one head per beat
  input  logic signed [15:0]    tau,
  input  logic                  tas_valid,
  input  logic signed [15:0]    tas_score,
  input  logic [BATCH_W-1:0]    tas_batch,
  input  logic                  tas_last,
  // status
  output logic                  replay_mode,
  output logic [NUM_BATCH-1:0]  index_reg,
  output logic [CW-1:0]         map_reg [NUM_BATCH],
  output logic [31:0]           n_dispatched,
  output logic [31:0]           n_discarded,
  output logic [15:0]           core_done_cnt [NUM_CORES][NUM_UNITS]
);
  logic                 fi_valid, fi_ready;
  instr_t               fi_instr;
  logic                 idx_we, idx_bit, tas_busy, map_busy;
  logic [BATCH_W-1:0]   idx_batch;
  logic [NUM_CORES-1:0] c_valid, c_ready, c_idle;
  instr_t               c_instr;

  fc_fetch u_fetch (
    .clk, .rst_n, .start, .base_addr(prog_addr), .num_instr(prog_len),
    .busy(fetch_busy), .done(fetch_done),
    .ar(f_ar), .ar_ready(f_ar_ready), .r_valid(f_r_valid), .r_data(f_r_data),
    .r_last(f_r_last), .r_ready(f_r_ready),
    .out_valid(fi_valid), .out_ready(fi_ready), .out_instr(fi_instr)
  );

  fc_tas #(.MAX_HEADS(MAX_HEADS)) u_tas (
    .clk, .rst_n, .tau,
    .s_valid(tas_valid), .s_score(tas_score), .s_batch(tas_batch), .s_last(tas_last),
    .idx_we, .idx_batch, .idx_bit, .busy(tas_busy)
  );

  fc_drs #(.NUM_CORES(NUM_CORES)) u_drs (
    .clk, .rst_n,
    .in_valid(fi_valid), .in_ready(fi_ready), .in_instr(fi_instr),
    .idx_we, .idx_batch, .idx_bit, .tas_busy,
    .out_valid(c_valid), .out_ready(c_ready), .out_instr(c_instr),
    .replay_mode, .index_reg, .map_reg, .map_busy, .n_dispatched, .n_discarded
  );

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    fc_core #(.SRAM_WORDS(SRAM_WORDS), .FIFO_DEPTH(FIFO_DEPTH), .MAX_K(MAX_K)) u_core (
      .clk, .rst_n,
      .in_valid(c_valid[c]), .in_ready(c_ready[c]), .in_instr(c_instr),
      .axi_o(core_axi_o[c]), .axi_i(core_axi_i[c]),
      .idle(c_idle[c]), .done_cnt(core_done_cnt[c])
    );
  end

  assign all_idle = &c_idle && !fetch_busy && !map_busy;
endmodule
