// chan_ctrl: DRAM / PCM channel interface.
//
// Turns one line read or write at a {rank, bank, row, column} location into
// the device command sequence ACT, RD/WR, PRE on a channel, honouring the
// row timing of the device. One access is in flight at a time and every
// access opens and closes its row (closed-page policy). With the ACT on the
// command bus in cycle 0:
//   RD or WR in cycle T_RCD,
//   PRE      in cycle T_RAS,
//   the next ACT no earlier than cycle max(T_RC, T_RAS + T_RP).
// A whole line moves with the RD or WR command (one data beat).
//
// Request side: `req_valid`/`req_ready`; `req_ready` is high only when the
// channel may take a new access so that its ACT lands in the first legal
// cycle. `rsp_valid` pulses once per access: for a write in the cycle the WR
// command is on the bus, for a read the cycle after the device returned the
// data (`dev_rvalid`), with the data on `rsp_rdata`. The device is expected
// to answer a RD within the row's open time; the channel does not go idle
// before the data arrived.
//
// The timing values are those of the simulated DRAM and PCM devices (the
// defaults are the DRAM's; the PCM channel overrides them), and the row
// count sets ROW_W. The closed-page policy, one access per channel at a time,
// the single-beat line transfer and the bank, column and rank widths are
// this implementation's choices.
module chan_ctrl
  import caram_pkg::*;
#(
  parameter int T_RAS  = 36,
  parameter int T_RCD  = 22,
  parameter int T_RC   = 96,
  parameter int T_RP   = 60,
  parameter int ROW_W  = 13,
  parameter int BANK_W = 3,
  parameter int COL_W  = 4,
  parameter int RANK_W = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // access request
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [RANK_W-1:0] req_rank,
  input  logic [BANK_W-1:0] req_bank,
  input  logic [ROW_W-1:0]  req_row,
  input  logic [COL_W-1:0]  req_col,
  input  line_t             req_wdata,
  output logic              rsp_valid,
  output line_t             rsp_rdata,
  // device command bus
  output dev_cmd_e          dev_cmd,
  output logic [RANK_W-1:0] dev_rank,
  output logic [BANK_W-1:0] dev_bank,
  output logic [ROW_W-1:0]  dev_row,
  output logic [COL_W-1:0]  dev_col,
  output line_t             dev_wdata,
  input  logic              dev_rvalid,
  input  line_t             dev_rdata
);
  localparam int T_NEXT = (T_RC > T_RAS + T_RP) ? T_RC : T_RAS + T_RP;
  localparam int T_W    = $clog2(T_NEXT + 1);

  initial assert (T_RCD < T_RAS && T_NEXT >= T_RAS + 2)
    else $error("chan_ctrl: unsupported timing parameters");

  logic           busy;
  logic           we_q;
  logic           rd_pend;
  logic [T_W-1:0] t;
  logic [T_W-1:0] t_n;

  assign req_ready = !busy;
  assign t_n       = t + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      we_q      <= 1'b0;
      rd_pend   <= 1'b0;
      t         <= '0;
      dev_cmd   <= CMD_NOP;
      dev_rank  <= '0;
      dev_bank  <= '0;
      dev_row   <= '0;
      dev_col   <= '0;
      dev_wdata <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= 1'b0;
      dev_cmd   <= CMD_NOP;
      if (!busy) begin
        if (req_valid) begin
          busy      <= 1'b1;
          we_q      <= req_we;
          rd_pend   <= !req_we;
          t         <= '0;
          dev_cmd   <= CMD_ACT;
          dev_rank  <= req_rank;
          dev_bank  <= req_bank;
          dev_row   <= req_row;
          dev_col   <= req_col;
          dev_wdata <= req_wdata;
        end
      end else begin
        if (t != '1) t <= t_n;
        if (t_n == T_W'(T_RCD)) begin
          dev_cmd <= we_q ? CMD_WR : CMD_RD;
          if (we_q) rsp_valid <= 1'b1;
        end else if (t_n == T_W'(T_RAS)) begin
          dev_cmd <= CMD_PRE;
        end
        if (dev_rvalid && rd_pend) begin
          rd_pend   <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_rdata <= dev_rdata;
        end
        if (t >= T_W'(T_NEXT - 2) && !(rd_pend && !dev_rvalid)) busy <= 1'b0;
      end
    end
  end

endmodule
