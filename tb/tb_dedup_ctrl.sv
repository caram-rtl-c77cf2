// tb_dedup_ctrl: checks the deduplicator's write and read flows.
//
// The deduplicator runs with real 16-slot LFI and AMT tables and a 16-line
// allocator; line storage is a simple array that answers every access one
// cycle later. A directed sequence walks through every branch of the write
// flow and checks the status of each response, the number of physical lines
// in use and the data read back:
//   new line, sharing a duplicate, dropping a repeated write, read hit and
//   miss, line update (old line keeps a reference / old line freed),
//   a fingerprint match with different data (treated as a new line),
//   displacement of another LLA in the AMT (for a new line and for sharing),
//   filling the physical space and the write refused when it is full.
// The fingerprint collision uses two lines whose first 32-bit words differ
// but give the same hash state (found offline), so their SuperFastHash
// values are equal.
module tb_dedup_ctrl;
  import caram_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  bit   dbg = 0;
  int   checks = 0, failures = 0, n_free = 0, n_disp = 0, n_rel = 0, n_lfi_full = 0;

  always #5 clk = ~clk;

  // request / response
  logic      rq_valid = 1'b0, rq_ready, rs_valid, rs_ready = 1'b1;
  host_req_t rq = '0;
  host_rsp_t rs;
  // tables
  logic    lfi_init, lfi_cmd_valid, lfi_cmd_ready, lfi_rsp_valid, lfi_rsp_hit, lfi_rsp_ok, lfi_rsp_freed;
  lfi_op_e lfi_cmd_op;
  lfp_t    lfi_cmd_key;
  pla_t    lfi_cmd_pla, lfi_rsp_pla;
  ref_t    lfi_rsp_ref;
  logic    amt_init, amt_cmd_valid, amt_cmd_ready, amt_cmd_write, amt_rsp_valid, amt_rsp_hit, amt_rsp_occ;
  lla_t    amt_cmd_lla;
  pla_t    amt_cmd_pla, amt_rsp_pla;
  logic    alloc_ok, alloc_take, free_valid;
  pla_t    alloc_pla, free_pla, used_lines;
  logic    m_req_valid, m_req_ready, m_req_we, m_rsp_valid;
  pla_t    m_req_pla;
  line_t   m_req_wdata, m_rsp_rdata;
  logic    ev_lfi_full, ev_displace, ev_release;

  dedup_ctrl dut (.*);

  lfi_table #(.IDX_W(4)) u_lfi (.clk, .rst_n, .init_busy(lfi_init),
    .cmd_valid(lfi_cmd_valid), .cmd_ready(lfi_cmd_ready), .cmd_op(lfi_cmd_op),
    .cmd_key(lfi_cmd_key), .cmd_pla(lfi_cmd_pla), .rsp_valid(lfi_rsp_valid),
    .rsp_hit(lfi_rsp_hit), .rsp_ok(lfi_rsp_ok), .rsp_freed(lfi_rsp_freed),
    .rsp_pla(lfi_rsp_pla), .rsp_ref(lfi_rsp_ref));
  amt_table #(.IDX_W(4)) u_amt (.clk, .rst_n, .init_busy(amt_init),
    .cmd_valid(amt_cmd_valid), .cmd_ready(amt_cmd_ready), .cmd_write(amt_cmd_write),
    .cmd_lla(amt_cmd_lla), .cmd_pla(amt_cmd_pla), .rsp_valid(amt_rsp_valid),
    .rsp_hit(amt_rsp_hit), .rsp_occ(amt_rsp_occ), .rsp_pla(amt_rsp_pla));
  line_alloc #(.PHYS_LINES(16)) u_alloc (.clk, .rst_n, .alloc_ok, .alloc_pla,
    .alloc_take, .free_valid, .free_pla, .used_lines);

  // line storage: answers one cycle after the access
  line_t store [16];
  assign m_req_ready = 1'b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_rsp_valid <= 1'b0;
      m_rsp_rdata <= '0;
    end else begin
      m_rsp_valid <= m_req_valid;
      if (m_req_valid && m_req_we) store[m_req_pla[3:0]] <= m_req_wdata;
      if (m_req_valid && !m_req_we) m_rsp_rdata <= store[m_req_pla[3:0]];
    end
  end

  always @(posedge clk) begin
    if (free_valid && rst_n) n_free++;
    if (ev_displace && rst_n) n_disp++;
    if (ev_release && rst_n) n_rel++;
    if (ev_lfi_full && rst_n) n_lfi_full++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic req(input op_e op, input lla_t lla, input line_t data,
                     input status_e exp, input line_t exp_data);
    @(negedge clk);
    rq_valid = 1'b1;
    rq = '{op: op, lla: lla, data: data};
    do @(posedge clk); while (!rq_ready);
    #1 rq_valid = 1'b0;
    do @(posedge clk); while (!rs_valid);
    #1;
    check(rs.status == exp, $sformatf("%s lla %0d status %s exp %s (used %0d disp %0d free %0d)", op.name(), lla, rs.status.name(), exp.name(), used_lines, n_disp, n_free));
    if (dbg) $display("%s lla %0d -> %s used %0d disp %0d free %0d", op.name(), lla, rs.status.name(), used_lines, n_disp, n_free);
    check(rs.lla == lla, "response lla");
    if (exp == ST_RD_HIT) check(rs.data == exp_data, $sformatf("read data lla %0d", lla));
  endtask

  task automatic wr(input lla_t lla, input line_t d, input status_e exp);
    req(OP_WRITE, lla, d, exp, '0);
  endtask
  task automatic rd(input lla_t lla, input status_e exp, input line_t d);
    req(OP_READ, lla, '0, exp, d);
  endtask

  initial begin
    line_t A, B, C, D, X, Y;
    A = mk_line(1); B = mk_line(2); C = mk_line(3); D = mk_line(4);
    X = mk_line(5); Y = X;
    X[31:0] = 32'h6e9d026d;
    Y[31:0] = 32'h1282fe6d;
    check(sfh_ref(X) == sfh_ref(Y) && X != Y, "collision pair");
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (!lfi_init && !amt_init);

    wr(1, A, ST_WR_NEW);      check(used_lines == 1, "used after new");
    wr(2, A, ST_WR_SHARE);    check(used_lines == 1, "used after share");
    wr(2, A, ST_WR_DROP);
    rd(2, ST_RD_HIT, A);
    rd(3, ST_RD_MISS, '0);
    wr(1, B, ST_WR_UPD);      check(used_lines == 2 && n_free == 0, "update keeps shared line");
    wr(2, C, ST_WR_UPD);      check(used_lines == 2 && n_free == 1, "update frees last reference");
    rd(1, ST_RD_HIT, B);
    rd(2, ST_RD_HIT, C);
    wr(17, D, ST_WR_NEW);     check(n_disp == 1 && used_lines == 2, "new line displaces LLA 1");
    rd(1, ST_RD_MISS, '0);
    rd(17, ST_RD_HIT, D);
    wr(18, C, ST_WR_SHARE);   check(n_disp == 2 && used_lines == 2, "share displaces LLA 2");
    rd(18, ST_RD_HIT, C);
    rd(2, ST_RD_MISS, '0);
    wr(5, X, ST_WR_NEW);      check(used_lines == 3, "X stored");
    wr(6, Y, ST_WR_NEW);      check(used_lines == 4 && n_lfi_full == 1, "same fingerprint, other data: new unindexed line");
    rd(5, ST_RD_HIT, X);
    rd(6, ST_RD_HIT, Y);
    wr(6, X, ST_WR_SHARE);    check(used_lines == 3, "unindexed line freed on remap");
    // fill the physical space: LLAs 0..15, all distinct content
    for (int i = 0; i < 16; i++)
      wr(lla_t'(i), mk_line(100 + i), (i == 5 || i == 6) ? ST_WR_UPD : ST_WR_NEW);
    check(used_lines == 16, $sformatf("space full, used %0d", used_lines));
    wr(0, mk_line(999), ST_WR_FULL);
    rd(0, ST_RD_HIT, mk_line(100));
    rd(15, ST_RD_HIT, mk_line(115));
    check(n_rel > 5, "releases");
    $display("frees=%0d displaced=%0d releases=%0d unindexed=%0d", n_free, n_disp, n_rel, n_lfi_full);
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
