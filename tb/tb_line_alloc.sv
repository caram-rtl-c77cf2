// tb_line_alloc: checks the physical line allocator.
//
// With 16 lines: the first 16 allocations must return 0..15 in order and
// then no line is free; freed lines come back last-in first-out; a random
// mix of 400 allocations and frees (also in the same cycle) is checked
// against a model of the free pool, and `used_lines` against the number of
// lines handed out.
module tb_line_alloc;
  import caram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic alloc_ok, alloc_take = 1'b0, free_valid = 1'b0;
  pla_t alloc_pla, free_pla = '0, used_lines;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  line_alloc #(.PHYS_LINES(16)) dut (.*);

  pla_t m_stack[$];
  int   m_next = 0;
  bit   m_used[16];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic pla_t exp_pla();
    return (m_stack.size() > 0) ? m_stack[$] : pla_t'(m_next);
  endfunction

  // one cycle: optionally take and/or free a line, checked against the model
  task automatic step(input bit take, input bit fr, input pla_t fpla);
    bit exp_ok;
    @(negedge clk);
    exp_ok = (m_stack.size() > 0) || (m_next < 16);
    check(alloc_ok == exp_ok, "alloc_ok");
    if (exp_ok) check(alloc_pla == exp_pla(), $sformatf("alloc_pla %0d exp %0d", alloc_pla, exp_pla()));
    check(int'(used_lines) == 16 - (16 - m_next) - m_stack.size(), "used_lines");
    alloc_take = take;
    free_valid = fr;
    free_pla   = fpla;
    if (take && exp_ok) begin
      pla_t p = exp_pla();
      if (m_stack.size() > 0) void'(m_stack.pop_back());
      else m_next++;
      check(!m_used[p], $sformatf("line %0d handed out twice (sp %0d next %0d stk %p)", p, dut.sp, dut.next, m_stack));
      m_used[p] = 1;
    end
    if (fr) begin
      m_used[fpla] = 0;
      m_stack.push_back(fpla);
    end
    @(posedge clk);
    #1;
    alloc_take = 1'b0;
    free_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < 16; i++) m_used[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) step(1, 0, '0);
    step(0, 0, '0);
    check(!alloc_ok, "pool empty after 16 allocations");
    step(0, 1, 5);
    step(0, 1, 9);
    check(alloc_ok && alloc_pla == 9, "LIFO reuse");
    for (int n = 0; n < 400; n++) begin
      bit   t, f;
      pla_t fp;
      int   cand[$];
      cand.delete();
      for (int i = 0; i < 16; i++) if (m_used[i]) cand.push_back(i);
      t  = ($urandom % 2) == 1;
      f  = (cand.size() > 0) && (($urandom % 2) == 1);
      fp = f ? pla_t'(cand[$urandom % cand.size()]) : '0;
      // never free the line being taken in the same cycle
      if (t && f && fp == exp_pla() && ((m_stack.size() > 0) || m_next < 16)) f = 0;
      step(t, f, fp);
    end
    step(0, 0, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
