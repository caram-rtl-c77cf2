// tb_caram_workload: the four block-trace workloads (mail, web-vm, homes,
// web-users) replayed, scaled down, through the whole memory controller.
//
// The traces record one fingerprint per 4 KB disk block, so all 16 lines of
// a block carry the same content. Each workload here writes BLOCKS blocks
// (16 consecutive LLAs per block, every LLA written once), of which
// round(BLOCKS * unique / total) carry distinct content and the rest repeat
// earlier content in random order; unique and total are the write counts of
// the trace. Then every LLA is read back.
//
// Expected, with tables large enough for no fingerprint to collide in the
// index: exactly one NEW line per distinct content, every other write
// shared, lines in use equal to the distinct contents, and every read
// returning its block's content. The controller is reset between workloads.
// The write reduction (shared writes over all writes) is printed for each.
module tb_caram_workload;
  import caram_pkg::*;
  import tb_ref_pkg::*;

  localparam int BLOCKS = 32, LPB = 16, NLINES = BLOCKS * LPB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     init_done, rq_valid = 1'b0, rq_ready, rs_valid, rs_ready = 1'b1;
  op_e      rq_op = OP_READ;
  lla_t     rq_lla = '0, rs_lla;
  line_t    rq_data = '0, rs_data;
  status_e  rs_status;
  dev_cmd_e dram_cmd, pcm_cmd;
  logic [2:0] dram_rank, dram_bank, pcm_rank, pcm_bank;
  logic [12:0] dram_row;
  logic [14:0] pcm_row;
  logic [3:0] dram_col, pcm_col;
  line_t    dram_wdata, dram_rdata, pcm_wdata, pcm_rdata;
  logic     dram_rvalid, pcm_rvalid;
  pla_t     used_lines;
  logic [5:0] wb_count;
  logic     ev_lfi_full, ev_displace, ev_release, ev_free, ev_wb_hit, ev_wb_stall, ev_wb_drain;
  int       d_viol, p_viol, d_act, p_act, d_wr, p_wr;

  caram_top #(.LFI_IDX_W(16), .AMT_IDX_W(10), .DRAM_DATA_LINES(64),
              .PCM_LINES(1024)) dut (.*);

  hm_device_model #(.ROW_W(13), .RL(2), .T_RC(96), .T_RP(60)) m_dram (
    .clk, .cmd(dram_cmd), .rank(dram_rank), .bank(dram_bank), .row(dram_row),
    .col(dram_col), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations(d_viol), .n_act(d_act), .n_wr(d_wr));
  hm_device_model #(.ROW_W(15), .RL(2), .T_RC(20), .T_RP(5)) m_pcm (
    .clk, .cmd(pcm_cmd), .rank(pcm_rank), .bank(pcm_bank), .row(pcm_row),
    .col(pcm_col), .wdata(pcm_wdata), .rvalid(pcm_rvalid), .rdata(pcm_rdata),
    .violations(p_viol), .n_act(p_act), .n_wr(p_wr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int n_lfi_full = 0;
  always @(posedge clk) if (rst_n && ev_lfi_full) n_lfi_full++;

  // one request, waits for its response
  task automatic xfer(input op_e op, input lla_t lla, input line_t data,
                      output status_e st, output line_t rdata);
    @(negedge clk);
    rq_valid = 1'b1;
    rq_op    = op;
    rq_lla   = lla;
    rq_data  = data;
    @(posedge clk);
    while (!rq_ready) @(posedge clk);
    #1 rq_valid = 1'b0;
    @(posedge clk);
    while (!rs_valid) @(posedge clk);
    st    = rs_status;
    rdata = rs_data;
    check(rs_lla == lla, "response LLA");
  endtask

  task automatic run(input string name, input int unsigned uniq_w,
                     input int unsigned total_w, input int unsigned seed);
    int    u, n_new, n_share, lfi0;
    int    content [BLOCKS];
    int    pool [$];
    status_e st;
    line_t rd;
    u = (BLOCKS * uniq_w + total_w / 2) / total_w;
    // each distinct content once, the rest repeats, in random order
    pool.delete();
    for (int i = 0; i < u; i++) pool.push_back(i);
    for (int i = u; i < BLOCKS; i++) pool.push_back(int'($urandom % u));
    for (int i = 0; i < BLOCKS; i++) begin
      int k;
      k = int'($urandom % pool.size());
      content[i] = pool[k];
      pool.delete(k);
    end
    // let the channels close their rows and the write buffer drain
    repeat (200) @(negedge clk);
    wait (wb_count == 0);
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (init_done);
    lfi0 = n_lfi_full;
    n_new = 0;
    n_share = 0;
    for (int b = 0; b < BLOCKS; b++)
      for (int l = 0; l < LPB; l++) begin
        xfer(OP_WRITE, lla_t'(b * LPB + l), mk_line(seed + content[b]), st, rd);
        if (st == ST_WR_NEW) n_new++;
        else if (st == ST_WR_SHARE) n_share++;
        else check(1'b0, $sformatf("%s: write status %s", name, st.name()));
      end
    check(n_lfi_full == lfi0, $sformatf("%s: fingerprint left unindexed", name));
    check(n_new == u, $sformatf("%s: %0d new lines for %0d distinct blocks", name, n_new, u));
    check(n_share == NLINES - u, $sformatf("%s: %0d shared writes", name, n_share));
    check(int'(used_lines) == u, $sformatf("%s: %0d lines in use", name, used_lines));
    for (int i = 0; i < NLINES; i++) begin
      xfer(OP_READ, lla_t'(i), '0, st, rd);
      check(st == ST_RD_HIT && rd == mk_line(seed + content[i / LPB]),
            $sformatf("%s: read LLA %0d", name, i));
    end
    $display("%s: %0d of %0d blocks distinct, %0d line writes, %0d stored, write reduction %0d%%",
             name, u, BLOCKS, NLINES, n_new, 100 * n_share / NLINES);
  endtask

  initial begin
    // unique / total write blocks of each trace
    run("mail",      108664, 212253, 1000);
    run("web-vm",    146491, 383539, 2000);
    run("homes",     243040, 389559, 3000);
    run("web-users", 172125, 245662, 4000);
    check(d_viol == 0 && p_viol == 0, "device protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
