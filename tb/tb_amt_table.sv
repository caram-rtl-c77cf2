// tb_amt_table: checks the address mapping table against a reference model.
//
// A 16-slot table (IDX_W=4) gets 600 random lookups and updates on LLAs drawn
// from three tags over the 16 slots, so an update sometimes displaces another
// LLA. Every answer (hit, occupied, PLA) is compared with a model of a
// direct-mapped hash map; the table must be empty after its clearing sweep and
// answer exactly two cycles after a command is taken.
module tb_amt_table;
  import caram_pkg::*;

  localparam int IDX_W = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init_busy, cmd_valid = 1'b0, cmd_ready, cmd_write = 1'b0;
  lla_t cmd_lla = '0;
  pla_t cmd_pla = '0;
  logic rsp_valid, rsp_hit, rsp_occ;
  pla_t rsp_pla;
  int   checks = 0, failures = 0, n_disp = 0, n_hit = 0;

  always #5 clk = ~clk;

  amt_table #(.IDX_W(IDX_W)) dut (.*);

  bit   m_v   [16];
  lla_t m_lla [16];
  pla_t m_pla [16];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic do_cmd(input bit wr, input lla_t lla, input pla_t pla);
    int s, lat;
    bit hit;
    s   = int'(lla[IDX_W-1:0]);
    hit = m_v[s] && m_lla[s] == lla;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1;
    cmd_write = wr;
    cmd_lla   = lla;
    cmd_pla   = pla;
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!rsp_valid && lat < 10) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 2, $sformatf("latency %0d", lat));
    check(rsp_hit == hit, $sformatf("lla %08x hit %0b exp %0b", lla, rsp_hit, hit));
    check(rsp_occ == m_v[s], "occupied");
    if (m_v[s]) check(rsp_pla == m_pla[s], $sformatf("pla %08x exp %08x", rsp_pla, m_pla[s]));
    if (hit) n_hit++;
    if (wr) begin
      if (m_v[s] && !hit) n_disp++;
      m_v[s] = 1; m_lla[s] = lla; m_pla[s] = pla;
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) m_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(init_busy && !cmd_ready, "busy during clearing sweep");
    while (init_busy) @(negedge clk);
    for (int i = 0; i < 16; i++) do_cmd(1'b0, lla_t'(i), '0);
    for (int n = 0; n < 600; n++) begin
      lla_t lla;
      lla = {28'(($urandom % 3) * 32'h10001), 4'($urandom)};
      do_cmd(($urandom % 2) == 1, lla, pla_t'($urandom));
    end
    check(n_disp > 10 && n_hit > 50, "coverage");
    $display("displaced=%0d hits=%0d", n_disp, n_hit);
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
