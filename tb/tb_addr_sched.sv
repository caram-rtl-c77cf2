// tb_addr_sched: checks the address map / scheduler with its write buffer and
// both channel controllers, driving behavioural DRAM and PCM devices.
//
// Small physical space (64 DRAM lines, 128 PCM lines, 4-entry write buffer),
// device timings as built. 600 random line reads and writes go to PLAs drawn
// mostly from a few lines of each device; every read must return the last
// line written to that PLA (zero if none). Latencies are checked from the
// clock edge that takes the access to the edge after which the response is
// seen: PCM write 1, read served by the buffer 1, DRAM write tRCD+2, DRAM
// read and PCM read from the device tRCD+RL+4 (RL = device read latency,
// 2 here). Buffer hits, stalls on a full
// buffer and drains must all occur; the devices must see no protocol error,
// and each access must reach the device the address map selects.
module tb_addr_sched;
  import caram_pkg::*;

  localparam int DL = 64, PL = 128, RL = 2;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  mreq_valid = 1'b0, mreq_ready, mreq_we = 1'b0, mrsp_valid;
  pla_t  mreq_pla = '0;
  line_t mreq_wdata = '0, mrsp_rdata;
  dev_cmd_e dram_cmd, pcm_cmd;
  logic [2:0] dram_rank, dram_bank, pcm_rank, pcm_bank;
  logic [12:0] dram_row;
  logic [14:0] pcm_row;
  logic [3:0] dram_col, pcm_col;
  line_t dram_wdata, dram_rdata, pcm_wdata, pcm_rdata;
  logic  dram_rvalid, pcm_rvalid, ev_wb_hit, ev_wb_stall, ev_wb_drain;
  logic [2:0] wb_count;
  int    checks = 0, failures = 0, n_hit = 0, n_stall = 0, n_drain = 0;
  int    d_viol, p_viol, d_act, p_act, d_wr, p_wr;

  always #5 clk = ~clk;

  addr_sched #(.DRAM_DATA_LINES(DL), .PCM_LINES(PL), .WB_ENTRIES(4)) dut (.*);

  hm_device_model #(.ROW_W(13), .RL(RL), .T_RC(96), .T_RP(60)) m_dram (
    .clk, .cmd(dram_cmd), .rank(dram_rank), .bank(dram_bank), .row(dram_row),
    .col(dram_col), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations(d_viol), .n_act(d_act), .n_wr(d_wr));
  hm_device_model #(.ROW_W(15), .RL(RL), .T_RC(20), .T_RP(5)) m_pcm (
    .clk, .cmd(pcm_cmd), .rank(pcm_rank), .bank(pcm_bank), .row(pcm_row),
    .col(pcm_col), .wdata(pcm_wdata), .rvalid(pcm_rvalid), .rdata(pcm_rdata),
    .violations(p_viol), .n_act(p_act), .n_wr(p_wr));

  always @(posedge clk) begin
    if (ev_wb_hit && mreq_ready) n_hit++;
    if (ev_wb_stall) n_stall++;
    if (ev_wb_drain) n_drain++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  line_t mem [pla_t];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      int   lat, exp_lat, dram_acts;
      bit   hit_buf;
      line_t expv;
      @(negedge clk);
      mreq_we    = ($urandom % 3) != 0;
      mreq_pla   = ($urandom % 2) ? pla_t'($urandom % 4) : pla_t'(DL + $urandom % 6);
      if ($urandom % 8 == 0) mreq_pla = pla_t'($urandom % (DL + PL));
      mreq_wdata = {64{32'($urandom)}};
      mreq_valid = 1'b1;
      expv       = mem.exists(mreq_pla) ? mem[mreq_pla] : '0;
      dram_acts  = d_act;
      #1;
      while (!mreq_ready) begin
        @(negedge clk);
        #1;
      end
      hit_buf = dut.wb_lk_hit;
      if (mreq_pla < DL) exp_lat = mreq_we ? 22 + 2 : 22 + RL + 4;
      else if (mreq_we || hit_buf) exp_lat = 1;
      else exp_lat = 5 + RL + 4;
      if (mreq_we) mem[mreq_pla] = mreq_wdata;
      @(posedge clk);
      #1 mreq_valid = 1'b0;
      lat = 0;
      do begin
        @(posedge clk);
        lat++;
      end while (!mrsp_valid && lat < 500);
      check(lat == exp_lat, $sformatf("pla %0d we %0b latency %0d exp %0d", mreq_pla, mreq_we, lat, exp_lat));
      if (!mreq_we) check(mrsp_rdata == expv, $sformatf("read data pla %0d", mreq_pla));
      check((d_act != dram_acts) == (mreq_pla < DL), "device selected by the address map");
    end
    repeat (300) @(negedge clk);
    check(wb_count == 0, "buffer drained");
    check(d_viol == 0 && p_viol == 0, $sformatf("device protocol %0d %0d", d_viol, p_viol));
    check(n_hit > 5 && n_stall > 5 && n_drain > 20, $sformatf("coverage hit %0d stall %0d drain %0d", n_hit, n_stall, n_drain));
    // everything written to PCM reached the device: read it all back
    foreach (mem[p]) if (p >= DL) begin
      @(negedge clk);
      mreq_we = 1'b0; mreq_pla = p; mreq_valid = 1'b1;
      #1 while (!mreq_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 mreq_valid = 1'b0;
      do @(posedge clk); while (!mrsp_valid);
      check(mrsp_rdata == mem[p], "PCM line after drain");
    end
    $display("buffer hits=%0d stall cycles=%0d drains=%0d", n_hit, n_stall, n_drain);
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
