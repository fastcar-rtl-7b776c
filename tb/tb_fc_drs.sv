// tb_fc_drs: drives the scheduler with Index Register writes, mode switches,
// mapping rebuilds and random instruction streams under random core
// back-pressure. A reference model (static batch mod 4 in dense mode; in replay
// mode drop if the batch's bit is 0, else round-robin core over computing
// batches) predicts the target of every accepted instruction. It also checks
// the paper's figure example (index 1,0,1,1,0,1,1,0,1 gives cores
// 0,x,1,2,x,3,0,x,1), the NUM_BATCH-cycle rebuild time, one dispatch per cycle
// when the cores are ready, and that SYS_MAP waits while the TAS unit is busy.
module tb_fc_drs;
  import fc_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  instr_t in_instr;
  logic idx_we, idx_bit, tas_busy;
  logic [BATCH_W-1:0] idx_batch;
  logic [NC-1:0] out_valid, out_ready;
  instr_t out_instr;
  logic replay_mode, map_busy;
  logic [NUM_BATCH-1:0] index_reg;
  logic [1:0] map_reg [NUM_BATCH];
  logic [31:0] n_dispatched, n_discarded;
  int checks = 0, failures = 0;
  int n_drop = 0, n_remap = 0, n_bcast = 0, n_stall = 0;

  fc_drs #(.NUM_CORES(NC)) dut (.*);
  always #5 clk = ~clk;

  // reference state
  bit ref_mode = 0;
  bit [NUM_BATCH-1:0] ref_idx = '1;
  int ref_map [NUM_BATCH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic void ref_build();
    int rr = 0;
    for (int b = 0; b < NUM_BATCH; b++) if (ref_idx[b]) begin ref_map[b] = rr; rr = (rr + 1) % NC; end
  endfunction

  // check every accepted instruction
  always @(posedge clk) if (rst_n && in_valid && in_ready && in_instr.unit != UNIT_SYS) begin
    automatic logic [NC-1:0] exp = '0;
    if (in_instr.dyn && ref_mode && !ref_idx[in_instr.batch]) begin
      n_drop++;
    end else if (in_instr.bcast) begin
      exp = '1; n_bcast++;
    end else if (in_instr.dyn && ref_mode) begin
      exp[ref_map[in_instr.batch]] = 1'b1;
      if (ref_map[in_instr.batch] != in_instr.batch % NC) n_remap++;
    end else exp[in_instr.batch % NC] = 1'b1;
    check(out_valid == exp, "target core");
    check(out_instr == in_instr, "instruction passed unchanged");
  end
  always @(posedge clk) if (rst_n && in_valid && !in_ready && !map_busy && in_instr.unit != UNIT_SYS) n_stall++;

  task automatic send(input instr_t i);
    @(negedge clk);
    in_valid = 1; in_instr = i;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  function automatic instr_t mk(input unit_e u, input logic [3:0] op, input int b, input bit dyn, input bit bc);
    instr_t i = '0;
    i.unit = u; i.op = op; i.batch = BATCH_W'(b); i.dyn = dyn; i.bcast = bc;
    i.addr_a = 16'($urandom); i.ext_addr = $urandom;
    return i;
  endfunction

  task automatic set_idx(input int b, input bit v);
    @(negedge clk); idx_we = 1; idx_batch = BATCH_W'(b); idx_bit = v;
    @(negedge clk); idx_we = 0;
    ref_idx[b] = v;
  endtask

  task automatic do_map();
    int cyc = 0;
    send(mk(UNIT_SYS, SYS_MAP, 0, 0, 0));
    ref_build();
    while (map_busy) begin @(posedge clk); #1 cyc++; end
    check(cyc == NUM_BATCH, "mapping rebuild takes NUM_BATCH cycles");
  endtask

  task automatic random_stream(input int n);
    for (int k = 0; k < n; k++) begin
      automatic int r = $urandom_range(0, 9);
      send(mk(unit_e'($urandom_range(0, 2)), 4'($urandom_range(0, 2)),
              $urandom_range(0, NUM_BATCH - 1), r < 7, r == 9));
    end
  endtask

  always @(negedge clk) out_ready = (4'($urandom) | 4'($urandom)) ;

  initial begin
    automatic instr_t m;
    in_valid = 0; in_instr = '0; idx_we = 0; idx_bit = 0; idx_batch = 0; tas_busy = 0;
    for (int b = 0; b < NUM_BATCH; b++) ref_map[b] = b % NC;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(index_reg == '1 && !replay_mode, "reset state: all compute, dense");
    // dense mode traffic
    random_stream(200);
    // figure example
    for (int b = 0; b < NUM_BATCH; b++) set_idx(b, (b % 3) != 1);
    set_idx(NUM_BATCH - 1, 0);
    check(index_reg == ref_idx, "index register written");
    // SYS_MAP must wait for the TAS unit
    tas_busy = 1;
    @(negedge clk); in_valid = 1; in_instr = mk(UNIT_SYS, SYS_MAP, 0, 0, 0);
    repeat (3) begin @(posedge clk); check(!in_ready, "SYS_MAP waits for TAS"); end
    @(negedge clk); in_valid = 0; tas_busy = 0;
    do_map();
    check(map_reg[0] == 0 && map_reg[2] == 1 && map_reg[3] == 2 && map_reg[5] == 3 &&
          map_reg[6] == 0 && map_reg[8] == 1, "figure example mapping");
    for (int b = 0; b < NUM_BATCH; b++) if (ref_idx[b]) check(map_reg[b] == 2'(ref_map[b]), "map reg");
    m = mk(UNIT_SYS, SYS_MODE, 0, 0, 0); m.addr_a = 16'd1;
    send(m);
    check(replay_mode, "replay mode on");
    ref_mode = 1;
    random_stream(300);
    // random index patterns
    for (int r = 0; r < 5; r++) begin
      for (int b = 0; b < NUM_BATCH; b++) set_idx(b, $urandom_range(0, 9) < 4);
      do_map();
      random_stream(200);
    end
    // throughput: all cores ready -> one instruction per cycle
    begin
      automatic int t0, t1;
      force out_ready = '1;
      @(negedge clk); t0 = n_dispatched + n_discarded;
      in_valid = 1;
      for (int k = 0; k < 50; k++) begin
        in_instr = mk(UNIT_MU, 0, k % NUM_BATCH, 1, 0);
        @(posedge clk); #1;
      end
      in_valid = 0;
      t1 = n_dispatched + n_discarded;
      check(t1 - t0 == 50, "one instruction per cycle");
      release out_ready;
    end
    m = mk(UNIT_SYS, SYS_MODE, 0, 0, 0); m.addr_a = 16'd0;
    send(m); ref_mode = 0;
    random_stream(100);
    check(n_discarded == 32'(n_drop), "discard counter");
    check(n_drop > 0 && n_remap > 0 && n_bcast > 0 && n_stall > 0, "drop, remap, broadcast and stall all seen");
    $display("drops=%0d remaps=%0d bcasts=%0d stalls=%0d", n_drop, n_remap, n_bcast, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
