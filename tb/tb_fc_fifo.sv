// tb_fc_fifo: random push/pop traffic against a queue reference model. Checks
// every popped word, the count, and that in_ready drops exactly when full.
module tb_fc_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];

  fc_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(count == q.size(), "count");
      check(in_ready == (q.size() < D), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "data");
      if (q.size() == D) fulls++;
      in_valid  = ($urandom_range(0, 99) < (cyc < 1500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (cyc < 1500 ? 40 : 80));
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
    end
    check(fulls > 0, "fifo reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
