// tb_caram_top: end-to-end test of the memory controller with behavioural
// DRAM and PCM devices, at reduced table and memory sizes (64-slot LFI and
// AMT, 16 DRAM + 32 PCM data lines, fewer than AMT slots, 4-entry write buffer, 4-deep queues).
//
// Requests are streamed into the request queue as fast as it accepts them
// while the response side is randomly back-pressured. Phase 1 writes and
// reads 90 LLAs with content drawn from a small pool (many duplicates, plus
// a pair of lines with equal fingerprints); phase 2 writes mostly distinct
// content until the physical space is full.
//
// A model keeps, per AMT slot, which LLA it maps and that LLA's content.
// Every read must hit with the model's content or miss exactly when the
// model says the LLA is not resident; every write status must be consistent
// with the model (update only for a mapped LLA, new only for an unmapped
// one, drop only for unchanged content, sharing only of content that is
// stored). The number of physical lines in use must lie between the number
// of distinct stored contents and the number of mapped LLAs. Each mechanism
// of the design is counted and must occur at least once; the devices must
// see no protocol error.
module tb_caram_top;
  import caram_pkg::*;
  import tb_ref_pkg::*;

  localparam int IDXW = 6, SLOTS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     init_done, rq_valid = 1'b0, rq_ready, rs_valid, rs_ready = 1'b0;
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
  logic [2:0] wb_count;
  logic     ev_lfi_full, ev_displace, ev_release, ev_free, ev_wb_hit, ev_wb_stall, ev_wb_drain;
  int       d_viol, p_viol, d_act, p_act, d_wr, p_wr;

  caram_top #(.LFI_IDX_W(IDXW), .AMT_IDX_W(IDXW), .DRAM_DATA_LINES(16),
              .PCM_LINES(32), .WB_ENTRIES(4), .Q_DEPTH(4)) dut (.*);

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

  // ---------------- mechanism counters ----------------
  int n_st[8];
  int n_lfi_full = 0, n_disp = 0, n_rel = 0, n_free = 0, n_wb_hit = 0, n_wb_stall = 0;
  int n_wb_drain = 0, n_q_full = 0, n_mismatch = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_lfi_full) n_lfi_full++;
    if (ev_displace) n_disp++;
    if (ev_release)  n_rel++;
    if (ev_free)     n_free++;
    if (ev_wb_hit && dut.u_sched.mreq_ready) n_wb_hit++;
    if (ev_wb_stall) n_wb_stall++;
    if (ev_wb_drain) n_wb_drain++;
    if (rq_valid && !rq_ready && init_done) n_q_full++;
    if (dut.u_dedup.state == dut.u_dedup.S_CMP_W && dut.m_rsp_valid &&
        dut.m_rsp_rdata != dut.u_dedup.req_q.data) n_mismatch++;
  end

  // ---------------- request stream ----------------
  typedef struct { op_e op; lla_t lla; line_t data; } req_t;
  req_t reqs[$];     // issued, waiting for their response

  // model: per AMT slot, the resident LLA and its content
  bit    m_v   [SLOTS];
  lla_t  m_lla [SLOTS];
  line_t m_dat [SLOTS];

  function automatic bit stored(input line_t d);
    for (int i = 0; i < SLOTS; i++) if (m_v[i] && m_dat[i] == d) return 1;
    return 0;
  endfunction

  function automatic int distinct_contents();
    line_t seen[$];
    for (int i = 0; i < SLOTS; i++) if (m_v[i]) begin
      bit dup = 0;
      foreach (seen[j]) if (seen[j] == m_dat[i]) dup = 1;
      if (!dup) seen.push_back(m_dat[i]);
    end
    return seen.size();
  endfunction

  function automatic int mapped();
    int n = 0;
    for (int i = 0; i < SLOTS; i++) if (m_v[i]) n++;
    return n;
  endfunction

  line_t X, Y;
  int    n_rsp = 0, total = 0;

  // response checker: runs the model in request order
  initial begin
    forever begin
      @(negedge clk);
      rs_ready = ($urandom % 4) != 0;
      if (rs_valid && rs_ready) begin
        req_t r;
        int   s;
        bit   hit;
        r   = reqs.pop_front();
        s   = int'(r.lla[IDXW-1:0]);
        hit = m_v[s] && m_lla[s] == r.lla;
        n_st[rs_status]++;
        n_rsp++;
        check(rs_lla == r.lla, "response order");
        if (r.op == OP_READ) begin
          check(rs_status == (hit ? ST_RD_HIT : ST_RD_MISS),
                $sformatf("read lla %0d status %s", r.lla, rs_status.name()));
          if (hit && rs_status == ST_RD_HIT) check(rs_data == m_dat[s], $sformatf("read data lla %0d", r.lla));
        end else begin
          unique case (rs_status)
            ST_WR_NEW:   check(!hit, "new line for a mapped LLA");
            ST_WR_UPD:   check(hit, "update of an unmapped LLA");
            ST_WR_DROP:  check(hit && m_dat[s] == r.data, "drop of changed content");
            ST_WR_SHARE: check(stored(r.data), "sharing content that is not stored");
            ST_WR_FULL:  check(used_lines == 48, "refused while lines are free");
            default:     check(1'b0, "read status for a write");
          endcase
          if (rs_status != ST_WR_FULL) begin
            m_v[s]   = 1;
            m_lla[s] = r.lla;
            m_dat[s] = r.data;
          end
        end
        // lines in use: at least one per distinct content, at most one per LLA
        #1;
        check(int'(used_lines) >= distinct_contents() && int'(used_lines) <= mapped(),
              $sformatf("used lines %0d outside [%0d,%0d]", used_lines, distinct_contents(), mapped()));
      end
    end
  end

  task automatic send(input op_e op, input lla_t lla, input line_t data);
    req_t r;
    @(negedge clk);
    rq_valid = 1'b1;
    rq_op    = op;
    rq_lla   = lla;
    rq_data  = data;
    r.op = op; r.lla = lla; r.data = data;
    reqs.push_back(r);
    total++;
    @(posedge clk);
    while (!rq_ready) @(posedge clk);
    #1 rq_valid = 1'b0;
  endtask

  function automatic line_t pick_small();
    int k = $urandom % 14;
    if (k == 12) return X;
    if (k == 13) return Y;
    return mk_line(k);
  endfunction

  initial begin
    X = mk_line(77); Y = X;
    X[31:0] = 32'h6e9d026d;       // equal SuperFastHash, different data
    Y[31:0] = 32'h1282fe6d;
    for (int i = 0; i < SLOTS; i++) m_v[i] = 0;
    for (int i = 0; i < 8; i++) n_st[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: duplicates, updates, reads, AMT displacement (LLAs 0..89)
    for (int n = 0; n < 260; n++) begin
      lla_t lla;
      lla = lla_t'($urandom % 90);
      if ($urandom % 3 == 0) send(OP_READ, lla, '0);
      else send(OP_WRITE, lla, pick_small());
    end
    // phase 2: distinct content until the physical space is full
    for (int n = 0; n < 90; n++) begin
      lla_t lla;
      lla = lla_t'($urandom % 64);
      send(OP_WRITE, lla, mk_line(1000 + n));
      if (n % 4 == 0) send(OP_READ, lla_t'($urandom % 64), '0);
    end
    while (n_rsp < total) @(negedge clk);
    repeat (100) @(negedge clk);
    check(d_viol == 0 && p_viol == 0, "device protocol");
    // every NEW / UPD write took one line, every free event gave one back
    check(int'(used_lines) == n_st[ST_WR_NEW] + n_st[ST_WR_UPD] - n_free,
          $sformatf("used lines %0d, allocated %0d, freed %0d", used_lines,
                    n_st[ST_WR_NEW] + n_st[ST_WR_UPD], n_free));
    $display("new=%0d update=%0d share=%0d drop=%0d full=%0d read_hit=%0d read_miss=%0d",
             n_st[ST_WR_NEW], n_st[ST_WR_UPD], n_st[ST_WR_SHARE], n_st[ST_WR_DROP],
             n_st[ST_WR_FULL], n_st[ST_RD_HIT], n_st[ST_RD_MISS]);
    $display("fp_match_data_differs=%0d unindexed=%0d displaced=%0d released=%0d freed=%0d",
             n_mismatch, n_lfi_full, n_disp, n_rel, n_free);
    $display("dram_writes=%0d pcm_writes=%0d wb_drains=%0d wb_read_hits=%0d wb_stall_cycles=%0d queue_full_cycles=%0d",
             d_wr, p_wr, n_wb_drain, n_wb_hit, n_wb_stall, n_q_full);
    check(n_st[ST_WR_NEW] > 0,   "mechanism: new line");
    check(n_st[ST_WR_UPD] > 0,   "mechanism: line update");
    check(n_st[ST_WR_SHARE] > 0, "mechanism: line sharing");
    check(n_st[ST_WR_DROP] > 0,  "mechanism: duplicate write dropped");
    check(n_st[ST_WR_FULL] > 0,  "mechanism: physical space full");
    check(n_st[ST_RD_HIT] > 0,   "mechanism: read translated through the AMT");
    check(n_st[ST_RD_MISS] > 0,  "mechanism: read of a non-resident LLA");
    check(n_mismatch > 0,        "mechanism: fingerprint match with different data");
    check(n_lfi_full > 0,        "mechanism: new line not indexed");
    check(n_disp > 0,            "mechanism: AMT displacement");
    check(n_rel > 0,             "mechanism: old fingerprint deleted / reference dropped");
    check(n_free > 0,            "mechanism: physical line freed");
    check(d_wr > 0 && p_wr > 0,  "mechanism: DRAM and PCM line writes");
    check(n_wb_drain > 0,        "mechanism: write buffer drained to PCM");
    check(n_q_full > 0,          "mechanism: request queue back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
