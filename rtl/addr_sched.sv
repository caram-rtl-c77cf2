// addr_sched: address map and scheduler of the hybrid memory.
//
// Takes one line access at a time on the unified physical line address (PLA)
// space and carries it out on the DRAM or the PCM channel. The PLA space is
// the DRAM data partition first (PLA 0 .. DRAM_DATA_LINES-1) followed by the
// PCM (the next PCM_LINES lines). Within a device a line index is split, from
// the least significant bit up, into column (COL_W bits), bank (BANK_W),
// row (log2 of the device's row count) and rank (RANK_W).
//
//   DRAM read/write : sent to the DRAM channel controller.
//   PCM write       : put into the DRAM write buffer and answered at once;
//                     the buffer drains to the PCM channel in the background.
//   PCM read        : answered from the write buffer when the line is still
//                     waiting there, otherwise read from the PCM channel.
//                     A waiting read has priority over the buffer drain.
//
// Interface: `mreq_valid`/`mreq_ready` with `mreq_we`, `mreq_pla`,
// `mreq_wdata`; `mrsp_valid` pulses once per access (with `mrsp_rdata` for a
// read). The caller issues the next access only after `mrsp_valid`. The two
// device command buses are ports. Event outputs pulse for a read served by
// the buffer, for a cycle in which a PCM write waits on a full buffer, and
// for a buffer entry drained to PCM.
//
// Latency: a buffered PCM write or a buffer hit answers one cycle after the
// request is taken; channel accesses take T_RCD cycles plus the device's read
// latency (reads) after the ACT. The separate DRAM and PCM channels, the row
// counts and row timings, and the write buffer for PCM writes follow the
// design description; the address split, the bank/column/rank widths and the
// read-over-drain priority are this implementation's choices.
module addr_sched
  import caram_pkg::*;
#(
  parameter int unsigned DRAM_DATA_LINES = 32'd3670016,
  parameter int unsigned PCM_LINES       = 32'd33554432,
  parameter int WB_ENTRIES    = 32,
  parameter int DRAM_NUM_ROWS = 8192,
  parameter int PCM_NUM_ROWS  = 32768,
  parameter int DRAM_T_RAS = 36, parameter int DRAM_T_RCD = 22,
  parameter int DRAM_T_RC  = 96, parameter int DRAM_T_RP  = 60,
  parameter int PCM_T_RAS  = 15, parameter int PCM_T_RCD  = 5,
  parameter int PCM_T_RC   = 20, parameter int PCM_T_RP   = 5,
  parameter int BANK_W = 3,
  parameter int COL_W  = 4,
  parameter int RANK_W = 3,
  localparam int DROW_W = $clog2(DRAM_NUM_ROWS),
  localparam int PROW_W = $clog2(PCM_NUM_ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // line access from the deduplicator
  input  logic              mreq_valid,
  output logic              mreq_ready,
  input  logic              mreq_we,
  input  pla_t              mreq_pla,
  input  line_t             mreq_wdata,
  output logic              mrsp_valid,
  output line_t             mrsp_rdata,
  // DRAM device command bus
  output dev_cmd_e          dram_cmd,
  output logic [RANK_W-1:0] dram_rank,
  output logic [BANK_W-1:0] dram_bank,
  output logic [DROW_W-1:0] dram_row,
  output logic [COL_W-1:0]  dram_col,
  output line_t             dram_wdata,
  input  logic              dram_rvalid,
  input  line_t             dram_rdata,
  // PCM device command bus
  output dev_cmd_e          pcm_cmd,
  output logic [RANK_W-1:0] pcm_rank,
  output logic [BANK_W-1:0] pcm_bank,
  output logic [PROW_W-1:0] pcm_row,
  output logic [COL_W-1:0]  pcm_col,
  output line_t             pcm_wdata,
  input  logic              pcm_rvalid,
  input  line_t             pcm_rdata,
  // events
  output logic              ev_wb_hit,
  output logic              ev_wb_stall,
  output logic              ev_wb_drain,
  output logic [$clog2(WB_ENTRIES+1)-1:0] wb_count
);
  // ---------------- address decode ----------------
  logic is_dram;
  pla_t pcm_line;
  assign is_dram  = (mreq_pla < pla_t'(DRAM_DATA_LINES));
  assign pcm_line = mreq_pla - pla_t'(DRAM_DATA_LINES);

  // ---------------- DRAM channel ----------------
  logic  d_req_valid, d_req_ready, d_rsp_valid;
  line_t d_rsp_rdata;

  chan_ctrl #(
    .T_RAS(DRAM_T_RAS), .T_RCD(DRAM_T_RCD), .T_RC(DRAM_T_RC), .T_RP(DRAM_T_RP),
    .ROW_W(DROW_W), .BANK_W(BANK_W), .COL_W(COL_W), .RANK_W(RANK_W)
  ) u_dram (
    .clk, .rst_n,
    .req_valid (d_req_valid),
    .req_ready (d_req_ready),
    .req_we    (mreq_we),
    .req_col   (mreq_pla[COL_W-1:0]),
    .req_bank  (mreq_pla[COL_W +: BANK_W]),
    .req_row   (mreq_pla[COL_W+BANK_W +: DROW_W]),
    .req_rank  (mreq_pla[COL_W+BANK_W+DROW_W +: RANK_W]),
    .req_wdata (mreq_wdata),
    .rsp_valid (d_rsp_valid),
    .rsp_rdata (d_rsp_rdata),
    .dev_cmd   (dram_cmd),
    .dev_rank  (dram_rank),
    .dev_bank  (dram_bank),
    .dev_row   (dram_row),
    .dev_col   (dram_col),
    .dev_wdata (dram_wdata),
    .dev_rvalid(dram_rvalid),
    .dev_rdata (dram_rdata)
  );

  // ---------------- PCM write buffer ----------------
  logic  wb_push_valid, wb_push_ready, wb_lk_hit;
  line_t wb_lk_data;
  logic  wb_out_valid, wb_out_ready;
  pla_t  wb_out_pla;
  line_t wb_out_data;

  write_buffer #(.ENTRIES(WB_ENTRIES)) u_wb (
    .clk, .rst_n,
    .push_valid(wb_push_valid),
    .push_ready(wb_push_ready),
    .push_pla  (pcm_line),
    .push_data (mreq_wdata),
    .lk_pla    (pcm_line),
    .lk_hit    (wb_lk_hit),
    .lk_data   (wb_lk_data),
    .out_valid (wb_out_valid),
    .out_ready (wb_out_ready),
    .out_pla   (wb_out_pla),
    .out_data  (wb_out_data),
    .count     (wb_count)
  );

  // ---------------- PCM channel ----------------
  logic  p_req_valid, p_req_ready, p_req_we, p_rsp_valid;
  pla_t  p_line;
  line_t p_wdata, p_rsp_rdata;

  chan_ctrl #(
    .T_RAS(PCM_T_RAS), .T_RCD(PCM_T_RCD), .T_RC(PCM_T_RC), .T_RP(PCM_T_RP),
    .ROW_W(PROW_W), .BANK_W(BANK_W), .COL_W(COL_W), .RANK_W(RANK_W)
  ) u_pcm (
    .clk, .rst_n,
    .req_valid (p_req_valid),
    .req_ready (p_req_ready),
    .req_we    (p_req_we),
    .req_col   (p_line[COL_W-1:0]),
    .req_bank  (p_line[COL_W +: BANK_W]),
    .req_row   (p_line[COL_W+BANK_W +: PROW_W]),
    .req_rank  (p_line[COL_W+BANK_W+PROW_W +: RANK_W]),
    .req_wdata (p_wdata),
    .rsp_valid (p_rsp_valid),
    .rsp_rdata (p_rsp_rdata),
    .dev_cmd   (pcm_cmd),
    .dev_rank  (pcm_rank),
    .dev_bank  (pcm_bank),
    .dev_row   (pcm_row),
    .dev_col   (pcm_col),
    .dev_wdata (pcm_wdata),
    .dev_rvalid(pcm_rvalid),
    .dev_rdata (pcm_rdata)
  );

  // ---------------- scheduling ----------------
  typedef enum logic [1:0] { W_NONE, W_DRAM, W_PCM_RD } wait_e;
  wait_e wait_q;

  logic idle, pcm_rd_req;
  assign idle        = (wait_q == W_NONE);
  assign pcm_rd_req  = idle && mreq_valid && !is_dram && !mreq_we && !wb_lk_hit;

  assign d_req_valid   = idle && mreq_valid && is_dram;
  assign wb_push_valid = idle && mreq_valid && !is_dram && mreq_we;

  // PCM channel: a read that missed the buffer goes first, else drain
  always_comb begin
    p_req_valid  = 1'b0;
    p_req_we     = 1'b0;
    p_line       = pcm_line;
    p_wdata      = wb_out_data;
    wb_out_ready = 1'b0;
    if (pcm_rd_req) begin
      p_req_valid = 1'b1;
    end else if (wb_out_valid && wait_q != W_PCM_RD) begin
      p_req_valid  = 1'b1;
      p_req_we     = 1'b1;
      p_line       = wb_out_pla;
      wb_out_ready = p_req_ready;
    end
  end

  always_comb begin
    mreq_ready = 1'b0;
    if (idle && mreq_valid) begin
      if (is_dram)       mreq_ready = d_req_ready;
      else if (mreq_we)  mreq_ready = wb_push_ready;
      else if (wb_lk_hit) mreq_ready = 1'b1;
      else               mreq_ready = p_req_ready;
    end
  end

  assign ev_wb_hit   = idle && mreq_valid && !is_dram && !mreq_we && wb_lk_hit;
  assign ev_wb_stall = wb_push_valid && !wb_push_ready;
  assign ev_wb_drain = wb_out_valid && wb_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q     <= W_NONE;
      mrsp_valid <= 1'b0;
      mrsp_rdata <= '0;
    end else begin
      mrsp_valid <= 1'b0;
      unique case (wait_q)
        W_NONE: if (mreq_valid && mreq_ready) begin
          if (is_dram) wait_q <= W_DRAM;
          else if (mreq_we) mrsp_valid <= 1'b1;
          else if (wb_lk_hit) begin
            mrsp_valid <= 1'b1;
            mrsp_rdata <= wb_lk_data;
          end else wait_q <= W_PCM_RD;
        end
        W_DRAM: if (d_rsp_valid) begin
          mrsp_valid <= 1'b1;
          mrsp_rdata <= d_rsp_rdata;
          wait_q     <= W_NONE;
        end
        W_PCM_RD: if (p_rsp_valid) begin
          mrsp_valid <= 1'b1;
          mrsp_rdata <= p_rsp_rdata;
          wait_q     <= W_NONE;
        end
        default: wait_q <= W_NONE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   mreq_valid |-> (mreq_pla < pla_t'(DRAM_DATA_LINES) + pla_t'(PCM_LINES)))
    else $error("addr_sched: PLA outside the physical line space");

endmodule
