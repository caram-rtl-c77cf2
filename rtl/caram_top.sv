// caram_top: content-aware hybrid DRAM/PCM memory controller.
//
// The controller sits between the last-level caches and a hybrid main memory
// of one DRAM channel and one PCM channel. It removes duplicate line writes:
// every written 256-byte line is fingerprinted, and a line whose content is
// already stored is not written again; its logical line address (LLA) is
// instead mapped to the stored copy. Unique lines go to one physical line
// space made of the DRAM data partition and the PCM; PCM writes pass through
// a DRAM write buffer.
//
//   host request -> request queue -> deduplicator -> response queue -> host
//                                     |   |    |   \
//                                   LFI  AMT  free  address map/scheduler
//                                               lines  |-> DRAM channel
//                                                      |-> write buffer -> PCM channel
//
// The line fingerprint index (LFI) and the address mapping table (AMT) live
// in the battery-backed DRAM partition; here they are dedicated arrays.
// After reset both tables are cleared, one entry per cycle (2**26 cycles at
// the default size, `init_done` low); requests wait until then.
//
// Host interface: `rq_valid`/`rq_ready` with `rq_op`, `rq_lla`, `rq_data`
// (the line, byte i in bits [8i+7:8i]); `rs_valid`/`rs_ready` with
// `rs_status`, `rs_lla` and `rs_data` (read data for ST_RD_HIT). Responses
// come back in request order. The DRAM and PCM device command buses are
// ports; the devices themselves are outside. `used_lines` is the number of
// physical lines in use; the ev_* outputs pulse once per event.
//
// The block structure (deduplicator in the memory controller, LFI, AMT and
// write buffer in DRAM, separate DRAM and PCM interfaces, request queues and
// address mapping) and the table sizes and device timings follow the design
// description; sizes the description leaves open (queue depth, write buffer
// size, DRAM data partition) are this implementation's choices.
module caram_top
  import caram_pkg::*;
#(
  parameter int          LFI_IDX_W       = 26,
  parameter int          AMT_IDX_W       = 26,
  parameter int unsigned DRAM_DATA_LINES = 32'd3670016,
  parameter int unsigned PCM_LINES       = 32'd33554432,
  parameter int          WB_ENTRIES      = 32,
  parameter int          Q_DEPTH         = 8,
  parameter int          DRAM_NUM_ROWS   = 8192,
  parameter int          PCM_NUM_ROWS    = 32768,
  parameter int          BANK_W          = 3,
  parameter int          COL_W           = 4,
  parameter int          RANK_W          = 3,
  localparam int         DROW_W          = $clog2(DRAM_NUM_ROWS),
  localparam int         PROW_W          = $clog2(PCM_NUM_ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // host requests (from the last-level caches)
  input  logic              rq_valid,
  output logic              rq_ready,
  input  op_e               rq_op,
  input  lla_t              rq_lla,
  input  line_t             rq_data,
  // host responses
  output logic              rs_valid,
  input  logic              rs_ready,
  output status_e           rs_status,
  output lla_t              rs_lla,
  output line_t             rs_data,
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
  // status and events
  output pla_t              used_lines,
  output logic [$clog2(WB_ENTRIES+1)-1:0] wb_count,
  output logic              ev_lfi_full,
  output logic              ev_displace,
  output logic              ev_release,
  output logic              ev_free,
  output logic              ev_wb_hit,
  output logic              ev_wb_stall,
  output logic              ev_wb_drain
);
  localparam int unsigned PHYS_LINES = DRAM_DATA_LINES + PCM_LINES;

  // ---------------- request / response queues ----------------
  host_req_t rq_in, rq_head;
  host_rsp_t rs_out, rs_head;
  logic      dq_valid, dq_ready, dr_valid, dr_ready;

  assign rq_in = '{op: rq_op, lla: rq_lla, data: rq_data};

  sync_fifo #(.WIDTH($bits(host_req_t)), .DEPTH(Q_DEPTH)) u_req_q (
    .clk, .rst_n,
    .in_valid (rq_valid), .in_ready (rq_ready), .in_data (rq_in),
    .out_valid(dq_valid), .out_ready(dq_ready), .out_data(rq_head)
  );

  sync_fifo #(.WIDTH($bits(host_rsp_t)), .DEPTH(Q_DEPTH)) u_rsp_q (
    .clk, .rst_n,
    .in_valid (dr_valid), .in_ready (dr_ready), .in_data (rs_out),
    .out_valid(rs_valid), .out_ready(rs_ready), .out_data(rs_head)
  );

  assign rs_status = rs_head.status;
  assign rs_lla    = rs_head.lla;
  assign rs_data   = rs_head.data;

  // ---------------- metadata tables ----------------
  logic    lfi_init, lfi_cmd_valid, lfi_cmd_ready;
  lfi_op_e lfi_cmd_op;
  lfp_t    lfi_cmd_key;
  pla_t    lfi_cmd_pla, lfi_rsp_pla;
  logic    lfi_rsp_valid, lfi_rsp_hit, lfi_rsp_ok, lfi_rsp_freed;
  ref_t    lfi_rsp_ref;

  lfi_table #(.IDX_W(LFI_IDX_W)) u_lfi (
    .clk, .rst_n,
    .init_busy(lfi_init),
    .cmd_valid(lfi_cmd_valid), .cmd_ready(lfi_cmd_ready),
    .cmd_op   (lfi_cmd_op),    .cmd_key  (lfi_cmd_key), .cmd_pla(lfi_cmd_pla),
    .rsp_valid(lfi_rsp_valid), .rsp_hit  (lfi_rsp_hit), .rsp_ok (lfi_rsp_ok),
    .rsp_freed(lfi_rsp_freed), .rsp_pla  (lfi_rsp_pla), .rsp_ref(lfi_rsp_ref)
  );

  logic amt_init, amt_cmd_valid, amt_cmd_ready, amt_cmd_write;
  lla_t amt_cmd_lla;
  pla_t amt_cmd_pla, amt_rsp_pla;
  logic amt_rsp_valid, amt_rsp_hit, amt_rsp_occ;

  amt_table #(.IDX_W(AMT_IDX_W)) u_amt (
    .clk, .rst_n,
    .init_busy  (amt_init),
    .cmd_valid  (amt_cmd_valid), .cmd_ready(amt_cmd_ready),
    .cmd_write  (amt_cmd_write), .cmd_lla  (amt_cmd_lla), .cmd_pla(amt_cmd_pla),
    .rsp_valid  (amt_rsp_valid), .rsp_hit  (amt_rsp_hit), .rsp_occ(amt_rsp_occ),
    .rsp_pla    (amt_rsp_pla)
  );

  assign init_done = !lfi_init && !amt_init;

  // ---------------- free physical lines ----------------
  logic alloc_ok, alloc_take, free_valid;
  pla_t alloc_pla, free_pla;

  line_alloc #(.PHYS_LINES(PHYS_LINES)) u_alloc (
    .clk, .rst_n,
    .alloc_ok, .alloc_pla, .alloc_take,
    .free_valid, .free_pla,
    .used_lines
  );

  assign ev_free = free_valid;

  // ---------------- deduplicator ----------------
  logic  m_req_valid, m_req_ready, m_req_we, m_rsp_valid;
  pla_t  m_req_pla;
  line_t m_req_wdata, m_rsp_rdata;

  dedup_ctrl u_dedup (
    .clk, .rst_n,
    .rq_valid(dq_valid), .rq_ready(dq_ready), .rq(rq_head),
    .rs_valid(dr_valid), .rs_ready(dr_ready), .rs(rs_out),
    .lfi_cmd_valid, .lfi_cmd_ready, .lfi_cmd_op, .lfi_cmd_key, .lfi_cmd_pla,
    .lfi_rsp_valid, .lfi_rsp_hit, .lfi_rsp_ok, .lfi_rsp_freed, .lfi_rsp_pla,
    .lfi_rsp_ref,
    .amt_cmd_valid, .amt_cmd_ready, .amt_cmd_write, .amt_cmd_lla, .amt_cmd_pla,
    .amt_rsp_valid, .amt_rsp_hit, .amt_rsp_occ, .amt_rsp_pla,
    .alloc_ok, .alloc_pla, .alloc_take, .free_valid, .free_pla,
    .m_req_valid, .m_req_ready, .m_req_we, .m_req_pla, .m_req_wdata,
    .m_rsp_valid, .m_rsp_rdata,
    .ev_lfi_full, .ev_displace, .ev_release
  );

  // ---------------- address map, write buffer, channels ----------------
  addr_sched #(
    .DRAM_DATA_LINES(DRAM_DATA_LINES), .PCM_LINES(PCM_LINES),
    .WB_ENTRIES(WB_ENTRIES),
    .DRAM_NUM_ROWS(DRAM_NUM_ROWS), .PCM_NUM_ROWS(PCM_NUM_ROWS),
    .BANK_W(BANK_W), .COL_W(COL_W), .RANK_W(RANK_W)
  ) u_sched (
    .clk, .rst_n,
    .mreq_valid(m_req_valid), .mreq_ready(m_req_ready), .mreq_we(m_req_we),
    .mreq_pla  (m_req_pla),   .mreq_wdata(m_req_wdata),
    .mrsp_valid(m_rsp_valid), .mrsp_rdata(m_rsp_rdata),
    .dram_cmd, .dram_rank, .dram_bank, .dram_row, .dram_col, .dram_wdata,
    .dram_rvalid, .dram_rdata,
    .pcm_cmd, .pcm_rank, .pcm_bank, .pcm_row, .pcm_col, .pcm_wdata,
    .pcm_rvalid, .pcm_rdata,
    .ev_wb_hit, .ev_wb_stall, .ev_wb_drain, .wb_count
  );

endmodule
