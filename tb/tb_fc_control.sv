// tb_fc_control: feeds random programs for the three units into the control
// module; the units are modelled here and stay busy for random times. At
// every start the test checks that the instruction is the next one of its unit
// in program order and that, for each unit in its wait_mask, every earlier
// instruction of that unit has completed. It also checks that independent
// units overlap (run concurrently) and that all instructions complete.
module tb_fc_control;
  import fc_pkg::*;
  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, idle;
  instr_t in_instr;
  logic [2:0] start, busy, done;
  instr_t start_instr [3];
  logic [15:0] done_cnt [3];
  int checks = 0, failures = 0, overlap = 0, waited = 0;

  fc_control #(.FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  int prog_unit [N];
  int prog_mask [N];
  int n_before [N][3];     // instructions of each unit earlier in program order
  int n_done [3];
  int next_of [3];       // program index expected next per unit
  int remain [3];
  int started = 0;

  // unit models
  always @(posedge clk) begin
    if (!rst_n) begin
      busy <= '0; done <= '0;
      for (int u = 0; u < 3; u++) begin remain[u] <= 0; n_done[u] <= 0; end
    end else begin
      for (int u = 0; u < 3; u++) begin
        done[u] <= 1'b0;
        if (start[u]) begin
          automatic int id = int'(start_instr[u].ext_addr);
          check(!busy[u], "start only when idle");
          check(prog_unit[id] == u, "right unit");
          check(id == next_of[u], "program order within unit");
          for (int v = 0; v < 3; v++) if (prog_mask[id][v])
            check(n_done[v] >= n_before[id][v], "dependency met at start");
          next_of[u] = id + 1;
          while (next_of[u] < N && prog_unit[next_of[u]] != u) next_of[u]++;
          busy[u]   <= 1'b1;
          remain[u] <= $urandom_range(0, 12);
          started++;
        end else if (busy[u]) begin
          if (remain[u] == 0) begin busy[u] <= 1'b0; done[u] <= 1'b1; n_done[u] <= n_done[u] + 1; end
          else remain[u] <= remain[u] - 1;
        end
      end
      if ((busy[0] + busy[1] + busy[2]) >= 2) overlap++;
      for (int u = 0; u < 3; u++)
        if (!busy[u] && dut.f_out_valid[u] && !dut.dep_ok[u]) waited++;
    end
  end

  initial begin
    automatic int cnt [3] = '{0, 0, 0};
    in_valid = 0; in_instr = '0;
    for (int i = 0; i < N; i++) begin
      prog_unit[i] = $urandom_range(0, 2);
      prog_mask[i] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 7) : 0;
      for (int u = 0; u < 3; u++) n_before[i][u] = cnt[u];
      cnt[prog_unit[i]]++;
    end
    for (int u = 0; u < 3; u++) begin
      next_of[u] = 0;
      while (next_of[u] < N && prog_unit[next_of[u]] != u) next_of[u]++;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_instr = '0;
      in_instr.unit = unit_e'(prog_unit[i]);
      in_instr.wait_mask = 3'(prog_mask[i]);
      in_instr.ext_addr = 32'(i);
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
    end
    while (!idle) @(posedge clk);
    check(started == N, "all instructions started");
    for (int u = 0; u < 3; u++) check(int'(done_cnt[u]) == cnt[u], "done counters");
    check(overlap > 100, "units run concurrently");
    check(waited > 10, "dependency stalls exercised");
    $display("overlap=%0d waited=%0d", overlap, waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
