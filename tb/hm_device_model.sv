// hm_device_model: behavioural model of a DRAM or PCM channel's devices.
//
// Not synthesizable; it stands in for the memory chips on one channel. It
// keeps written lines in a sparse associative array keyed by
// {rank, bank, row, column}, tracks the open row of every bank and answers a
// RD with the stored line (zero if never written) RL cycles later on
// `rvalid`/`rdata`. Protocol errors (ACT to an open bank, RD/WR/PRE to a
// closed bank) are counted in `violations`; ACT-to-ACT spacing below T_RC or
// PRE-to-ACT spacing below T_RP count too.
module hm_device_model
  import caram_pkg::*;
#(
  parameter int ROW_W  = 13,
  parameter int BANK_W = 3,
  parameter int COL_W  = 4,
  parameter int RANK_W = 3,
  parameter int RL     = 2,
  parameter int T_RC   = 96,
  parameter int T_RP   = 60
) (
  input  logic              clk,
  input  dev_cmd_e          cmd,
  input  logic [RANK_W-1:0] rank,
  input  logic [BANK_W-1:0] bank,
  input  logic [ROW_W-1:0]  row,
  input  logic [COL_W-1:0]  col,
  input  line_t             wdata,
  output logic              rvalid,
  output line_t             rdata,
  output int                violations,
  output int                n_act,
  output int                n_wr
);
  line_t       store [logic [63:0]];
  logic [63:0] open_row [logic [63:0]];
  longint      cyc = 0, last_act = -1000000, last_pre = -1000000;
  logic        rv_pipe [RL];
  line_t       rd_pipe [RL];

  initial begin
    violations = 0;
    n_act = 0;
    n_wr = 0;
    rvalid = 1'b0;
    rdata = '0;
    for (int i = 0; i < RL; i++) begin
      rv_pipe[i] = 1'b0;
      rd_pipe[i] = '0;
    end
  end

  function automatic logic [63:0] bkey();
    return 64'({rank, bank});
  endfunction

  function automatic logic [63:0] lkey(input logic [63:0] r);
    return 64'({rank, bank, r[ROW_W-1:0], col});
  endfunction

  always @(posedge clk) begin
    logic [63:0] k;
    cyc <= cyc + 1;
    for (int i = RL - 1; i > 0; i--) begin
      rv_pipe[i] <= rv_pipe[i-1];
      rd_pipe[i] <= rd_pipe[i-1];
    end
    rv_pipe[0] <= 1'b0;
    rvalid     <= rv_pipe[RL-1];
    rdata      <= rd_pipe[RL-1];
    k = bkey();
    // the command bus is undefined until the controller's first clocked reset
    if (cyc >= 2) unique case (cmd)
      CMD_ACT: begin
        if (open_row.exists(k)) begin
          violations <= violations + 1;
          $display("%m: ACT to an open bank");
        end
        if (cyc - last_act < T_RC || cyc - last_pre < T_RP) begin
          violations <= violations + 1;
          $display("%m: ACT %0d cycles after ACT, %0d after PRE", cyc - last_act, cyc - last_pre);
        end
        open_row[k] = 64'(row);
        last_act <= cyc;
        n_act <= n_act + 1;
      end
      CMD_RD: begin
        if (!open_row.exists(k)) violations <= violations + 1;
        else begin
          rv_pipe[0] <= 1'b1;
          rd_pipe[0] <= store.exists(lkey(open_row[k])) ? store[lkey(open_row[k])] : '0;
        end
      end
      CMD_WR: begin
        if (!open_row.exists(k)) violations <= violations + 1;
        else store[lkey(open_row[k])] = wdata;
        n_wr <= n_wr + 1;
      end
      CMD_PRE: begin
        if (!open_row.exists(k)) violations <= violations + 1;
        else open_row.delete(k);
        last_pre <= cyc;
      end
      default: ;
    endcase
  end
endmodule
