// tb_sync_fifo: checks the request/response queue.
//
// A 4-deep, 16-bit FIFO gets 2000 cycles of random pushes and pops; the
// output must follow a queue model, in_ready must drop exactly when it is
// full (and no pop is requested), and out_valid must match the model's
// occupancy. A pushed entry must be visible at the output one cycle later.
module tb_sync_fifo;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [15:0] in_data = '0, out_data;
  int          checks = 0, failures = 0, n_full = 0;
  logic [15:0] q[$];

  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 3) == 0;
      #1;
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "out_data");
      check(in_ready == (q.size() < 4 || out_ready), "in_ready");
      if (q.size() == 4) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(n_full > 20, "queue filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
