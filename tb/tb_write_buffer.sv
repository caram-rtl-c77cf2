// tb_write_buffer: checks the PCM write buffer.
//
// A 4-entry buffer gets 3000 cycles of random writes (to 8 PLAs, so writes
// to a waiting PLA happen), lookups and drains. A model keeps the waiting
// lines in order with at most one entry per PLA; the drain port must present
// the oldest one, lookups must hit exactly the waiting PLAs and return their
// newest data, push_ready must drop only when the buffer is full and the
// write does not match, and `count` must equal the model's occupancy.
module tb_write_buffer;
  import caram_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  push_valid = 1'b0, push_ready, lk_hit, out_valid, out_ready = 1'b0;
  pla_t  push_pla = '0, lk_pla = '0, out_pla;
  line_t push_data = '0, lk_data, out_data;
  logic [2:0] count;
  int    checks = 0, failures = 0, n_coal = 0, n_stall = 0, n_hit = 0;

  typedef struct { pla_t pla; line_t data; } ent_t;
  ent_t q[$];

  always #5 clk = ~clk;

  write_buffer #(.ENTRIES(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int find(input pla_t p);
    for (int i = 0; i < q.size(); i++) if (q[i].pla == p) return i;
    return -1;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      int  fi, li;
      bit  pop, exp_ready;
      @(negedge clk);
      push_valid = ($urandom % 2) == 1;
      push_pla   = pla_t'($urandom % 8);
      push_data  = {64{32'($urandom)}};
      lk_pla     = pla_t'($urandom % 8);
      out_ready  = ($urandom % 4) == 0;
      #1;
      check(int'(count) == q.size(), "count");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_pla == q[0].pla && out_data == q[0].data, "drain order");
      li = find(lk_pla);
      check(lk_hit == (li >= 0), "lookup hit");
      if (li >= 0) begin
        check(lk_data == q[li].data, "lookup data");
        n_hit++;
      end
      pop = out_valid && out_ready;
      fi  = find(push_pla);
      exp_ready = (fi >= 0 && !(pop && fi == 0)) || q.size() < 4 || pop;
      check(push_ready == exp_ready, "push_ready");
      if (push_valid && !push_ready) n_stall++;
      @(posedge clk);
      if (push_valid && exp_ready && fi >= 0 && !(pop && fi == 0)) begin
        q[fi].data = push_data;
        n_coal++;
      end else if (push_valid && exp_ready) begin
        ent_t e;
        e.pla = push_pla;
        e.data = push_data;
        q.push_back(e);
      end
      if (pop) void'(q.pop_front());
    end
    check(n_coal > 20 && n_stall > 20 && n_hit > 200, "coverage");
    $display("overwrites=%0d stalls=%0d hits=%0d", n_coal, n_stall, n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
