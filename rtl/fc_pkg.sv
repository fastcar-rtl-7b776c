// fc_pkg: types and constants shared by the accelerator.
//
// The accelerator runs pre-compiled 128-bit instructions. Each instruction names
// the unit that executes it (DMA, matrix unit, vector unit, or the scheduler
// itself), the batch it belongs to, and whether it is part of a replayable MLP
// section. The batch count (32) and the mapping-register width (log2 of the core
// count) follow the paper's Dynamic Resource Scheduling description. The
// instruction layout, data widths and opcodes are this design's own choices.
package fc_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned NUM_BATCH   = 32;   // Index Register width (paper)
  localparam int unsigned BATCH_W     = $clog2(NUM_BATCH);
  localparam int unsigned LANES       = 16;   // int8 lanes per data word
  localparam int unsigned WORD_W      = LANES * 8;  // SRAM word / AXI data width
  localparam int unsigned INSTR_W     = 128;
  localparam int unsigned AXI_ADDR_W  = 32;
  localparam int unsigned SRAM_ADDR_W = 16;
  localparam int unsigned MAX_BURST   = 16;   // beats per AXI burst
  localparam int unsigned NUM_UNITS   = 3;    // DMA, MU, VU inside a core

  // ---- instruction --------------------------------------------------------
  typedef enum logic [1:0] {
    UNIT_DMA = 2'd0,
    UNIT_MU  = 2'd1,
    UNIT_VU  = 2'd2,
    UNIT_SYS = 2'd3     // executed by the scheduler, never reaches a core
  } unit_e;

  // opcodes per unit
  localparam logic [3:0] DMA_LOAD  = 4'd0;  // ext_addr -> sram addr_a, len words
  localparam logic [3:0] DMA_STORE = 4'd1;  // sram addr_a -> ext_addr, len words
  localparam logic [3:0] MU_GEMV   = 4'd0;  // c = sat(x(addr_a,len) * W(addr_b) >>> shift)
  localparam logic [3:0] VU_ADD    = 4'd0;  // c = sat(a + b)
  localparam logic [3:0] VU_MUL    = 4'd1;  // c = sat((a * b) >>> shift)
  localparam logic [3:0] VU_COPY   = 4'd2;  // c = a
  localparam logic [3:0] SYS_MODE  = 4'd0;  // addr_a[0]: 1 = replay mode, 0 = dense mode
  localparam logic [3:0] SYS_MAP   = 4'd1;  // rebuild Mapping Registers from Index Register
  localparam logic [3:0] SYS_NOP   = 4'd2;

  typedef struct packed {
    unit_e                  unit;       // [127:126]
    logic [3:0]             op;         // [125:122]
    logic [BATCH_W-1:0]     batch;      // [121:117]
    logic                   bcast;      // [116] send to every core
    logic                   dyn;        // [115] replayable (MLP) instruction
    logic [NUM_UNITS-1:0]   wait_mask;  // [114:112] wait for earlier work of these units
    logic [4:0]             shift;      // [111:107]
    logic [10:0]            rsvd;       // [106:96]
    logic [15:0]            len;        // [95:80]
    logic [15:0]            addr_c;     // [79:64]
    logic [15:0]            addr_b;     // [63:48]
    logic [15:0]            addr_a;     // [47:32]
    logic [AXI_ADDR_W-1:0]  ext_addr;   // [31:0]
  } instr_t;

  // ---- on-chip SRAM request / response -----------------------------------
  typedef struct packed {
    logic                   req;
    logic                   we;
    logic [SRAM_ADDR_W-1:0] addr;
    logic [WORD_W-1:0]      wdata;
  } sram_req_t;

  typedef struct packed {
    logic                   gnt;     // request accepted this cycle
    logic                   rvalid;  // read data valid (one cycle after gnt)
    logic [WORD_W-1:0]      rdata;
  } sram_rsp_t;

  // ---- AXI4 master channels (subset: INCR bursts, single ID) ---------------
  typedef struct packed {
    logic                   valid;
    logic [AXI_ADDR_W-1:0]  addr;
    logic [7:0]             len;     // beats - 1
  } axi_a_t;                         // AR and AW

  typedef struct packed {
    logic                   valid;
    logic [WORD_W-1:0]      data;
    logic                   last;
  } axi_d_t;                         // R and W

  typedef struct packed {
    logic                   ar_ready;
    logic                   r_valid;
    logic [WORD_W-1:0]      r_data;
    logic                   r_last;
    logic                   aw_ready;
    logic                   w_ready;
    logic                   b_valid;
  } axi_s2m_t;

  typedef struct packed {
    axi_a_t                 ar;
    logic                   r_ready;
    axi_a_t                 aw;
    axi_d_t                 w;
    logic                   b_ready;
  } axi_m2s_t;

  // signed 8-bit saturation
  function automatic logic [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[7:0];
  endfunction

endpackage
