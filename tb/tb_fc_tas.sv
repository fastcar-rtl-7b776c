// tb_fc_tas: streams random per-head temporal attention scores for random
// batches and head counts. The reference takes the real-valued mean of the
// heads and compares it with tau; the decision must appear one cycle after the
// last head, coded 0 = replay (mean >= tau), 1 = compute. Boundary cases with
// the mean exactly equal to tau are included.
module tb_fc_tas;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] tau, s_score;
  logic s_valid, s_last;
  logic [BATCH_W-1:0] s_batch;
  logic idx_we, idx_bit, busy;
  logic [BATCH_W-1:0] idx_batch;
  int checks = 0, failures = 0, n_replay = 0, n_compute = 0;

  fc_tas dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_score = 0; s_batch = 0; tau = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic int h = $urandom_range(1, 32);
      automatic real sum = 0.0;
      automatic int b = $urandom_range(0, NUM_BATCH - 1);
      automatic bit exp_replay;
      automatic int sc;
      // tau in {-8 .. 2} in steps of 0.25, Q7.8
      tau = 16'((int'($urandom_range(0, 40)) - 32) * 64);
      for (int m = 0; m < h; m++) begin
        @(negedge clk);
        if (t % 10 == 0) sc = int'(tau);                 // mean exactly tau
        else sc = int'($urandom_range(0, 2048)) - 1536 + int'(tau) / 2;
        s_valid = 1; s_score = 16'(sc); s_batch = BATCH_W'(b); s_last = (m == h - 1);
        sum += real'(sc) / 256.0;
        @(posedge clk); #1;
        if (m < h - 1) check(busy == (m >= 0), "busy while accumulating");
        check(idx_we == (m == h - 1), "idx_we only after last head");
      end
      exp_replay = (sum / real'(h)) >= (real'(tau) / 256.0);
      check(idx_batch == BATCH_W'(b), "batch");
      check(idx_bit == !exp_replay, "decision");
      if (exp_replay) n_replay++; else n_compute++;
      @(negedge clk) s_valid = 0; s_last = 0;
      if ($urandom_range(0, 1) == 1) @(posedge clk);
    end
    check(n_replay > 50 && n_compute > 50, "both outcomes exercised");
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
