// tb_fastcar_top: end-to-end test of the whole accelerator at its default
// parameters (4 cores, 32 batches). A host model here plays a decode step of
// an MLP layer for all 32 batches over several frames.
//
// Memory layout (128-bit words): per batch b an input vector X_b (K int8), a
// replay-cache slot Y_b holding the batch's last MLP output, a residual R_b
// and an output O_b; one weight block W shared by all batches.
// Each frame is two program launches separated by the host waiting for idle:
//   MLP program : SYS_MODE, [SYS_MAP], broadcast load of W, then per batch a
//                 dyn section {load X_b, GEMV, store to Y_b}
//   add program : broadcast weight prefetch, then per batch, on its static
//                 core, {load Y_b, load R_b, VU add, store O_b}, software
//                 pipelined so that loads of the next round overlap the adds
// Frame 0 runs in dense mode. Later frames first stream per-head temporal
// attention scores for every batch into the TAS unit, then run in replay mode:
// batches whose mean score reaches tau skip their MLP section, so Y_b keeps
// the previous frame's value and O_b is built from it. The expected O_b and
// Y_b are computed here from the same rule. Also checked: the DRS mapping is
// round robin over computing batches, work is balanced (per-core MLP counts
// differ by at most one), and every mechanism happened at least once (replay
// drop, remap to a different core, broadcast, dense mode, mode switch,
// dispatch back-pressure, dependency wait, SRAM contention).
module tb_fastcar_top;
  import fc_pkg::*;
  localparam int NC = 4, NB = NUM_BATCH, K = 64, HEADS = 32;
  localparam int PROG = 0, XB = 1024, WB = 2048, YB = 4096, RB = 5120, OB = 6144, NPROG = 2;
  localparam int MEMW = 8192;

  logic clk = 0, rst_n = 0;
  logic start, fetch_busy, fetch_done, all_idle;
  logic [AXI_ADDR_W-1:0] prog_addr;
  logic [15:0] prog_len;
  axi_a_t f_ar;
  logic f_r_ready;
  axi_m2s_t m2s [NC+1];
  axi_s2m_t s2m [NC+1];
  axi_m2s_t core_axi_o [NC];
  axi_s2m_t core_axi_i [NC];
  logic signed [15:0] tau, tas_score;
  logic tas_valid, tas_last;
  logic [BATCH_W-1:0] tas_batch;
  logic replay_mode;
  logic [NB-1:0] index_reg;
  logic [1:0] map_reg [NB];
  logic [31:0] n_dispatched, n_discarded;
  logic [15:0] core_done_cnt [NC][NUM_UNITS];
  int checks = 0, failures = 0;
  int ev_drop = 0, ev_remap = 0, ev_bcast = 0, ev_dense = 0, ev_switch = 0,
      ev_stall = 0, ev_depwait = 0, ev_contend = 0;

  fastcar_top dut (
    .clk, .rst_n, .start, .prog_addr, .prog_len, .fetch_busy, .fetch_done, .all_idle,
    .f_ar, .f_ar_ready(s2m[NC].ar_ready), .f_r_valid(s2m[NC].r_valid), .f_r_data(s2m[NC].r_data),
    .f_r_last(s2m[NC].r_last), .f_r_ready,
    .core_axi_o, .core_axi_i,
    .tau, .tas_valid, .tas_score, .tas_batch, .tas_last,
    .replay_mode, .index_reg, .map_reg, .n_dispatched, .n_discarded, .core_done_cnt
  );
  fc_axi_mem #(.NPORT(NC+1), .WORDS(MEMW), .STALL(1'b1)) u_mem (.clk, .rst_n, .m2s, .s2m);

  always_comb begin
    for (int c = 0; c < NC; c++) begin m2s[c] = core_axi_o[c]; core_axi_i[c] = s2m[c]; end
    m2s[NC] = '0; m2s[NC].ar = f_ar; m2s[NC].r_ready = f_r_ready;
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  // ---- event counters (observation only) ----
  int mlp_on_core [NC];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (dut.c_valid[c] && !dut.c_ready[c]) ev_stall++;
      if (dut.c_valid[c] && dut.c_ready[c] && dut.c_instr.dyn && dut.c_instr.unit == UNIT_MU) begin
        mlp_on_core[c]++;
        if (c != int'(dut.c_instr.batch) % NC) ev_remap++;
      end
    end
    if (dut.fi_valid && dut.fi_ready && dut.fi_instr.bcast) ev_bcast++;
    if (dut.fi_valid && dut.fi_ready && dut.fi_instr.unit == UNIT_SYS && dut.fi_instr.op == SYS_MODE
        && dut.fi_instr.addr_a[0] != replay_mode) ev_switch++;
  end
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (int'(dut.g_core[c].u_core.u_ctrl.f_out_valid & ~dut.g_core[c].u_core.u_ctrl.dep_ok
               & ~dut.g_core[c].u_core.u_ctrl.busy) != 0) ev_depwait++;
      if (int'(dut.g_core[c].u_core.sreq[0].req) + int'(dut.g_core[c].u_core.sreq[1].req)
          + int'(dut.g_core[c].u_core.sreq[2].req) > 1) ev_contend++;
    end
  end

  // ---- host-side program builder ----
  int pc;
  function automatic void emit(input unit_e u, input logic [3:0] op, input int batch, input bit dyn,
                               input bit bc, input logic [2:0] wm, input int a, input int b, input int c,
                               input int len, input int ext_w, input int sh);
    instr_t i = '0;
    i.unit = u; i.op = op; i.batch = BATCH_W'(batch); i.dyn = dyn; i.bcast = bc; i.wait_mask = wm;
    i.addr_a = 16'(a); i.addr_b = 16'(b); i.addr_c = 16'(c); i.len = 16'(len);
    i.ext_addr = 32'(ext_w * 16); i.shift = 5'(sh);
    u_mem.mem[pc] = i;
    pc++;
  endfunction

  task automatic launch(input int first, input int n);
    @(negedge clk); start = 1; prog_addr = 32'(first * 16); prog_len = 16'(n);
    @(negedge clk); start = 0;
    @(posedge clk);
    while (fetch_busy || !all_idle) @(posedge clk);
    repeat (2) @(posedge clk);
    while (!all_idle) @(posedge clk);
  endtask

  localparam int SH = 6;
  // run-time loop bounds keep the reference loops from being unrolled
  int k_run = K, lanes_run = LANES;
  function automatic logic [WORD_W-1:0] gemv(input int b);
    logic [WORD_W-1:0] r;
    for (int n = 0; n < lanes_run; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < k_run; i++)
        acc += int'($signed(u_mem.mem[XB + 16*b + i/16][8*(i%16) +: 8])) *
               int'($signed(u_mem.mem[WB + i][8*n +: 8]));
      acc = acc >>> SH;
      r[8*n +: 8] = 8'((acc > 127) ? 127 : (acc < -128) ? -128 : acc);
    end
    return r;
  endfunction

  function automatic logic [WORD_W-1:0] vadd(input logic [WORD_W-1:0] a, input logic [WORD_W-1:0] b);
    logic [WORD_W-1:0] r;
    for (int n = 0; n < lanes_run; n++) begin
      automatic int s = int'($signed(a[8*n +: 8])) + int'($signed(b[8*n +: 8]));
      r[8*n +: 8] = 8'((s > 127) ? 127 : (s < -128) ? -128 : s);
    end
    return r;
  endfunction

  initial begin
    logic [WORD_W-1:0] exp_y [NB];
    bit replay [NB];
    start = 0; prog_addr = 0; prog_len = 0; tau = 0;
    tas_valid = 0; tas_score = 0; tas_batch = 0; tas_last = 0;
    for (int c = 0; c < NC; c++) mlp_on_core[c] = 0;
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int f = 0; f < 4; f++) begin
      automatic int n_mlp, n_add, n_replay = 0;
      automatic bit dense = (f == 0) || (f == 3);
      automatic int before_cnt [NC];
      // new frame: fresh inputs and residuals
      for (int b = 0; b < NB; b++) begin
        for (int w = 0; w < K / 16; w++) u_mem.mem[XB + 16*b + w] = {$urandom, $urandom, $urandom, $urandom};
        u_mem.mem[RB + 16*b] = {$urandom, $urandom, $urandom, $urandom};
        replay[b] = 0;
      end
      // temporal attention scores (Q7.8), tau = -2.0
      if (!dense) begin
        tau = -16'sd512;
        for (int b = 0; b < NB; b++) begin
          automatic int sum = 0;
          automatic int centre = (($urandom_range(0, 9) < 5) ? -300 : -700) - 50 * f;
          for (int m = 0; m < HEADS; m++) begin
            automatic int s = centre + int'($urandom_range(0, 400)) - 200;
            @(negedge clk);
            tas_valid = 1; tas_score = 16'(s); tas_batch = BATCH_W'(b); tas_last = (m == HEADS - 1);
            sum += s;
          end
          replay[b] = (real'(sum) / HEADS) >= (real'(tau));
          @(negedge clk) tas_valid = 0; tas_last = 0;
        end
        @(posedge clk); #1;
        for (int b = 0; b < NB; b++) check(index_reg[b] == !replay[b], "index register from TAS");
      end
      // MLP program
      pc = PROG;
      emit(UNIT_SYS, SYS_MODE, 0, 0, 0, 0, dense ? 0 : 1, 0, 0, 0, 0, 0);
      if (!dense) emit(UNIT_SYS, SYS_MAP, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0);
      emit(UNIT_DMA, DMA_LOAD, 0, 0, 1, 3'b010, 64, 0, 0, K, WB, 0);
      for (int b = 0; b < NB; b++) begin
        emit(UNIT_DMA, DMA_LOAD,  b, 1, 0, 3'b010, 0, 0, 0, K / 16, XB + 16*b, 0);
        emit(UNIT_MU,  MU_GEMV,   b, 1, 0, 3'b001, 0, 64, 200, K, 0, SH);
        emit(UNIT_DMA, DMA_STORE, b, 1, 0, 3'b010, 200, 0, 0, 1, YB + 16*b, 0);
      end
      n_mlp = pc - PROG;
      for (int c = 0; c < NC; c++) before_cnt[c] = mlp_on_core[c];
      launch(PROG, n_mlp);
      for (int b = 0; b < NB; b++) begin
        if (!replay[b]) exp_y[b] = gemv(b);
        else n_replay++;
        check(u_mem.mem[YB + 16*b] == exp_y[b], replay[b] ? "replayed cache kept" : "MLP output");
      end
      if (dense) ev_dense++;
      ev_drop += n_replay;
      // balance and mapping
      begin
        automatic int mx = 0, mn = 1 << 30, rr = 0;
        for (int c = 0; c < NC; c++) begin
          automatic int d = mlp_on_core[c] - before_cnt[c];
          mx = (d > mx) ? d : mx; mn = (d < mn) ? d : mn;
        end
        check(mx - mn <= 1, "MLP work balanced across cores");
        if (!dense) for (int b = 0; b < NB; b++) if (!replay[b]) begin
          check(int'(map_reg[b]) == rr, "round-robin mapping");
          rr = (rr + 1) % NC;
        end
      end
      // residual-add program
      pc = PROG + 256;
      // Each batch has its own SRAM slot. A long broadcast prefetch of the
      // next weight block comes first, so the cores' DMA FIFOs fill up; then,
      // per round of NC batches, the loads of round r are issued ahead of the
      // stores of round r-1, so the DMA loads while the VU adds.
      emit(UNIT_DMA, DMA_LOAD, 0, 0, 1, 3'b000, 1024, 0, 0, 256, WB, 0);
      for (int r = 0; r <= NB / NC; r++) begin
        if (r < NB / NC) for (int b = NC*r; b < NC*(r+1); b++) begin
          emit(UNIT_DMA, DMA_LOAD, b, 0, 0, 3'b000, 400 + 4*b, 0, 0, 1, YB + 16*b, 0);
          emit(UNIT_DMA, DMA_LOAD, b, 0, 0, 3'b000, 401 + 4*b, 0, 0, 1, RB + 16*b, 0);
        end
        if (r > 0) for (int b = NC*(r-1); b < NC*r; b++)
          emit(UNIT_DMA, DMA_STORE, b, 0, 0, 3'b100, 402 + 4*b, 0, 0, 1, OB + 16*b, 0);
        if (r < NB / NC) for (int b = NC*r; b < NC*(r+1); b++)
          emit(UNIT_VU, VU_ADD, b, 0, 0, 3'b001, 400 + 4*b, 401 + 4*b, 402 + 4*b, 1, 0, 0);
      end
      n_add = pc - (PROG + 256);
      launch(PROG + 256, n_add);
      for (int b = 0; b < NB; b++)
        check(u_mem.mem[OB + 16*b] == vadd(exp_y[b], u_mem.mem[RB + 16*b]), "block output");
      $display("frame %0d: %s, %0d of %0d batches replayed, t=%0t", f, dense ? "dense" : "replay",
               n_replay, NB, $time);
    end
    check(n_discarded == 32'(ev_drop * 3), "discarded instruction count");
    $display("events: drop=%0d remap=%0d bcast=%0d dense=%0d switch=%0d stall=%0d depwait=%0d contend=%0d",
             ev_drop, ev_remap, ev_bcast, ev_dense, ev_switch, ev_stall, ev_depwait, ev_contend);
    check(ev_drop > 0, "replay drop happened");
    check(ev_remap > 0, "remap happened");
    check(ev_bcast > 0, "broadcast happened");
    check(ev_dense > 0, "dense mode happened");
    check(ev_switch >= 2, "mode switch both ways");
    check(ev_stall > 0, "dispatch back-pressure happened");
    check(ev_depwait > 0, "dependency wait happened");
    check(ev_contend > 0, "SRAM contention happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
