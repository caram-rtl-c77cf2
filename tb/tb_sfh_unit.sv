// tb_sfh_unit: checks the SuperFastHash line fingerprint unit.
//
// Hashes three lines with fingerprints computed beforehand by an independent
// software implementation (bytes 0..255, all zero, all 0xFF) and 40 random
// lines against the reference model, and checks that every fingerprint takes
// LINE_BYTES+1 cycles from start to done and that busy is high meanwhile.
module tb_sfh_unit;
  import caram_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        start = 1'b0;
  line_t       line = '0;
  logic        busy, done;
  logic [31:0] lfp;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  sfh_unit dut (.clk, .rst_n, .start, .line, .busy, .done, .lfp);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic hash_one(input line_t l, input logic [31:0] exp);
    int cycles;
    @(negedge clk);
    line  = l;
    start = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    cycles = 0;
    check(busy, "busy after start");
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    check(lfp == exp, $sformatf("lfp %08x expected %08x", lfp, exp));
    check(cycles == LINE_BYTES + 1,
          $sformatf("latency %0d expected %0d", cycles, LINE_BYTES + 1));
  endtask

  initial begin
    line_t l;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < LINE_BYTES; i++) l[8*i +: 8] = 8'(i);
    hash_one(l, 32'he4eef917);
    hash_one('0, 32'hbc3fb0f0);
    hash_one('1, 32'h709051eb);
    for (int k = 0; k < 40; k++) begin
      l = mk_line($urandom);
      hash_one(l, sfh_ref(l));
    end
    @(negedge clk);
    check(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
