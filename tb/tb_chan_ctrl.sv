// tb_chan_ctrl: checks the DRAM/PCM channel controller against the device
// row timing.
//
// Two instances run side by side: one with the DRAM timing (tRAS 36, tRCD 22,
// tRC 96, tRP 60) and one with the PCM timing (tRAS 15, tRCD 5, tRC 20,
// tRP 5). Each gets back-to-back random line writes and reads to random
// rank/bank/row/column locations from a request stream that is always
// valid. The command bus is timed against the ACT cycle: RD/WR exactly tRCD
// later, PRE exactly tRAS later, the next ACT exactly max(tRC, tRAS+tRP)
// later. Read data is compared with a model of the written lines, and the
// device models count protocol errors.
module tb_chan_ctrl;
  import caram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // -------- one channel under test, parameterised by its timing --------
  `define CHAN(NAME, RAS, RCD, RC, RP, RW)                                   \
  logic  NAME``_req_valid = 1'b0, NAME``_req_ready, NAME``_req_we = 1'b0;   \
  logic [2:0] NAME``_rank = '0, NAME``_bank = '0;                           \
  logic [RW-1:0] NAME``_row = '0;                                           \
  logic [3:0] NAME``_col = '0;                                              \
  line_t NAME``_wdata = '0, NAME``_rsp_rdata, NAME``_dev_wdata, NAME``_dev_rdata; \
  logic  NAME``_rsp_valid, NAME``_dev_rvalid;                               \
  dev_cmd_e NAME``_cmd;                                                     \
  logic [2:0] NAME``_drank, NAME``_dbank;                                   \
  logic [RW-1:0] NAME``_drow;                                               \
  logic [3:0] NAME``_dcol;                                                  \
  int NAME``_viol, NAME``_nact, NAME``_nwr;                                 \
  chan_ctrl #(.T_RAS(RAS), .T_RCD(RCD), .T_RC(RC), .T_RP(RP), .ROW_W(RW))   \
    u_``NAME (.clk, .rst_n,                                                 \
    .req_valid(NAME``_req_valid), .req_ready(NAME``_req_ready),             \
    .req_we(NAME``_req_we), .req_rank(NAME``_rank), .req_bank(NAME``_bank), \
    .req_row(NAME``_row), .req_col(NAME``_col), .req_wdata(NAME``_wdata),   \
    .rsp_valid(NAME``_rsp_valid), .rsp_rdata(NAME``_rsp_rdata),             \
    .dev_cmd(NAME``_cmd), .dev_rank(NAME``_drank), .dev_bank(NAME``_dbank), \
    .dev_row(NAME``_drow), .dev_col(NAME``_dcol), .dev_wdata(NAME``_dev_wdata), \
    .dev_rvalid(NAME``_dev_rvalid), .dev_rdata(NAME``_dev_rdata));         \
  hm_device_model #(.ROW_W(RW), .RL(2), .T_RC(RC), .T_RP(RP)) m_``NAME (   \
    .clk, .cmd(NAME``_cmd), .rank(NAME``_drank), .bank(NAME``_dbank),       \
    .row(NAME``_drow), .col(NAME``_dcol), .wdata(NAME``_dev_wdata),         \
    .rvalid(NAME``_dev_rvalid), .rdata(NAME``_dev_rdata),                  \
    .violations(NAME``_viol), .n_act(NAME``_nact), .n_wr(NAME``_nwr));

  `CHAN(d, 36, 22, 96, 60, 13)
  `CHAN(p, 15, 5, 20, 5, 15)

  // -------- command timing monitor --------
  `define MON(NAME, RAS, RCD, NEXT)                                          \
  longint NAME``_act = -1;                                                  \
  int NAME``_rw_ok = 0, NAME``_pre_ok = 0, NAME``_act_ok = 0;               \
  always @(negedge clk) if (rst_n) begin                                    \
    if (NAME``_cmd == CMD_ACT) begin                                        \
      if (NAME``_act >= 0) begin                                            \
        check(cyc - NAME``_act == NEXT, $sformatf(`"NAME ACT->ACT %0d`", cyc - NAME``_act)); \
        NAME``_act_ok++;                                                    \
      end                                                                   \
      NAME``_act = cyc;                                                     \
    end                                                                     \
    if (NAME``_cmd == CMD_RD || NAME``_cmd == CMD_WR) begin                 \
      check(cyc - NAME``_act == RCD, $sformatf(`"NAME ACT->RD/WR %0d`", cyc - NAME``_act)); \
      NAME``_rw_ok++;                                                       \
    end                                                                     \
    if (NAME``_cmd == CMD_PRE) begin                                        \
      check(cyc - NAME``_act == RAS, $sformatf(`"NAME ACT->PRE %0d`", cyc - NAME``_act)); \
      NAME``_pre_ok++;                                                      \
    end                                                                     \
  end

  `MON(d, 36, 22, 96)
  `MON(p, 15, 5, 20)

  // -------- stimulus: keep each channel busy, check read data --------
  `define DRIVE(NAME, RW, N)                                                 \
  initial begin : drv_``NAME                                                \
    line_t mem [logic [63:0]];                                              \
    logic [63:0] key;                                                       \
    line_t expv;                                                            \
    int reads;                                                              \
    reads = 0;                                                              \
    wait (rst_n);                                                           \
    for (int n = 0; n < N; n++) begin                                       \
      @(negedge clk);                                                       \
      NAME``_req_valid = 1'b1;                                              \
      NAME``_req_we    = (n < 4) || ($urandom % 2 == 1);                    \
      NAME``_rank      = 3'($urandom % 2);                                  \
      NAME``_bank      = 3'($urandom % 2);                                  \
      NAME``_row       = RW'($urandom % 2);                                 \
      NAME``_col       = 4'($urandom % 2);                                  \
      NAME``_wdata     = {64{32'($urandom)}};                               \
      key = {NAME``_rank, NAME``_bank, 16'(NAME``_row), NAME``_col};        \
      expv = mem.exists(key) ? mem[key] : '0;                               \
      if (NAME``_req_we) mem[key] = NAME``_wdata;                           \
      do @(posedge clk); while (!NAME``_req_ready);                         \
      #1 NAME``_req_valid = 1'b0;                                           \
      if (!NAME``_req_we) begin                                             \
        do @(posedge clk); while (!NAME``_rsp_valid);                       \
        check(NAME``_rsp_rdata == expv, `"NAME read data`");                \
        reads++;                                                            \
      end                                                                   \
    end                                                                     \
    check(reads > 3, `"NAME reads`");                                      \
  end

  `DRIVE(d, 13, 30)
  `DRIVE(p, 15, 60)

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (4000) @(negedge clk);
    check(d_viol == 0 && p_viol == 0, $sformatf("device protocol errors %0d/%0d", d_viol, p_viol));
    check(d_act_ok > 20 && p_act_ok > 40 && d_pre_ok > 20 && p_rw_ok > 40, "timing coverage");
    $display("DRAM ACT=%0d PCM ACT=%0d", d_nact, p_nact);
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
