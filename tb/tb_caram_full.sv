// tb_caram_full: the memory controller at its full default size.
//
// Tables of 2**26 entries each, 3,670,016 DRAM data lines and 33,554,432 PCM
// lines. The test waits for the clearing sweep of both tables (2**26
// cycles, checked), then runs one complete pass through the write flow on
// the DRAM data partition: a new line, a duplicate shared by a second LLA, a
// repeated write dropped, reads through the address mapping, a line update
// that keeps the shared line, an update that frees it, and a write to an LLA
// that collides in the AMT (same low 26 bits). Line storage is modelled by
// behavioural DRAM and PCM devices.
module tb_caram_full;
  import caram_pkg::*;
  import tb_ref_pkg::*;

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
  longint   cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  caram_top dut (.*);

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

  task automatic req(input op_e op, input lla_t lla, input line_t data,
                     input status_e exp, input line_t exp_data);
    @(negedge clk);
    rq_valid = 1'b1;
    rq_op = op; rq_lla = lla; rq_data = data;
    do @(posedge clk); while (!rq_ready);
    #1 rq_valid = 1'b0;
    // sampled at the clock edge that takes the response
    do @(posedge clk); while (!rs_valid);
    check(rs_status == exp, $sformatf("%s lla %08x status %s exp %s", op.name(), lla, rs_status.name(), exp.name()));
    if (exp == ST_RD_HIT) check(rs_data == exp_data, "read data");
  endtask

  initial begin
    line_t A, B, C;
    longint t0;
    A = mk_line(11); B = mk_line(12); C = mk_line(13);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    t0 = cyc;
    wait (init_done);
    check(cyc - t0 >= 64'd67108864 && cyc - t0 < 64'd67108870,
          $sformatf("clearing sweep took %0d cycles", cyc - t0));
    req(OP_WRITE, 32'h0000_1001, A, ST_WR_NEW, '0);
    req(OP_WRITE, 32'h0000_10d5, A, ST_WR_SHARE, '0);
    req(OP_WRITE, 32'h0000_10d5, A, ST_WR_DROP, '0);
    check(used_lines == 1, "one line for two LLAs");
    req(OP_READ,  32'h0000_10d5, '0, ST_RD_HIT, A);
    req(OP_READ,  32'h0000_20ff, '0, ST_RD_MISS, '0);
    req(OP_WRITE, 32'h0000_1001, B, ST_WR_UPD, '0);
    check(used_lines == 2 && !ev_free, "update keeps the shared line");
    req(OP_WRITE, 32'h0000_10d5, C, ST_WR_UPD, '0);
    check(used_lines == 2, "update frees the last reference");
    req(OP_READ,  32'h0000_1001, '0, ST_RD_HIT, B);
    req(OP_WRITE, 32'h0400_10d5, B, ST_WR_SHARE, '0);   // same AMT slot as 0x10d5
    req(OP_READ,  32'h0000_10d5, '0, ST_RD_MISS, '0);
    req(OP_READ,  32'h0400_10d5, '0, ST_RD_HIT, B);
    check(used_lines == 1, "displaced line freed");
    check(d_viol == 0 && p_viol == 0, "device protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (68000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
