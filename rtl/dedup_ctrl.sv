// dedup_ctrl: the deduplicator of the memory controller.
//
// Handles one host request at a time.
//
// Line write on a logical line address (LLA):
//   1. Fingerprint the line (LFP) with the SuperFastHash unit.
//   2. Look the LFP up in the line fingerprint index (LFI).
//   3. On a hit, read the line at the indexed physical line address (PLA)
//      and compare it with the written data.
//   4. Duplicate: look the LLA up in the address mapping table (AMT).
//      If it already maps to that PLA the write is dropped (ST_WR_DROP).
//      Otherwise the AMT maps LLA -> PLA and the LFI reference count of the
//      line goes up (line sharing, ST_WR_SHARE).
//   5. Not a duplicate (no LFI hit, data differs, or the count is
//      saturated): take a free PLA, write the line, add {LFP, PLA, 1} to the
//      LFI, look the LLA up in the AMT and map it to the new PLA
//      (ST_WR_NEW, or ST_WR_UPD when the LLA was mapped already).
//   Whenever step 4 or 5 replaces a mapping, the line the slot pointed to
//   before loses a reference ("delete the old LFP"): that line is read back,
//   its fingerprint recomputed and its LFI count decremented. At zero, or if
//   the line was never indexed, its PLA goes back to the free pool.
// Line read: the AMT gives the PLA, and the line is read from there
// (ST_RD_HIT); an unmapped LLA answers ST_RD_MISS.
//
// Interfaces: request in (`rq_*`, valid/ready), response out (`rs_*`,
// valid/ready), command ports to the LFI and AMT tables (one command in
// flight, answer on *_rsp_valid), the free-line allocator, and a line access
// port to the memory back end (next access only after `m_rsp_valid`).
// Event outputs pulse once per occurrence.
//
// Timing: a fingerprint takes LINE_BYTES+1 cycles, each table command 2
// cycles after it is taken, memory accesses as the back end answers. The
// flow and its decisions follow the design's write-processing flowchart. The
// design does not say how the old LFP of a remapped LLA is found; here it is
// recomputed from the old line's data. Also this implementation's own:
// treating a saturated reference count as "not a duplicate", and treating a
// full physical space as a refused write (ST_WR_FULL).
module dedup_ctrl
  import caram_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // host request / response
  input  logic      rq_valid,
  output logic      rq_ready,
  input  host_req_t rq,
  output logic      rs_valid,
  input  logic      rs_ready,
  output host_rsp_t rs,
  // LFI command port
  output logic      lfi_cmd_valid,
  input  logic      lfi_cmd_ready,
  output lfi_op_e   lfi_cmd_op,
  output lfp_t      lfi_cmd_key,
  output pla_t      lfi_cmd_pla,
  input  logic      lfi_rsp_valid,
  input  logic      lfi_rsp_hit,
  input  logic      lfi_rsp_ok,
  input  logic      lfi_rsp_freed,
  input  pla_t      lfi_rsp_pla,
  input  ref_t      lfi_rsp_ref,
  // AMT command port
  output logic      amt_cmd_valid,
  input  logic      amt_cmd_ready,
  output logic      amt_cmd_write,
  output lla_t      amt_cmd_lla,
  output pla_t      amt_cmd_pla,
  input  logic      amt_rsp_valid,
  input  logic      amt_rsp_hit,
  input  logic      amt_rsp_occ,
  input  pla_t      amt_rsp_pla,
  // free-line allocator
  input  logic      alloc_ok,
  input  pla_t      alloc_pla,
  output logic      alloc_take,
  output logic      free_valid,
  output pla_t      free_pla,
  // memory back end
  output logic      m_req_valid,
  input  logic      m_req_ready,
  output logic      m_req_we,
  output pla_t      m_req_pla,
  output line_t     m_req_wdata,
  input  logic      m_rsp_valid,
  input  line_t     m_rsp_rdata,
  // events
  output logic      ev_lfi_full,   // a new line could not be indexed in the LFI
  output logic      ev_displace,   // an AMT update displaced another LLA
  output logic      ev_release     // a replaced line lost a reference
);

  typedef enum logic [5:0] {
    S_IDLE,
    S_RD_AMT, S_RD_AMT_W, S_RD_MEM, S_RD_MEM_W,
    S_HASH, S_HASH_W,
    S_LFI_LK, S_LFI_LK_W, S_CMP_RD, S_CMP_W,
    S_DUP_AMT, S_DUP_AMT_W, S_DUP_WR, S_DUP_WR_W, S_DUP_INC, S_DUP_INC_W,
    S_ALLOC, S_NEW_WR, S_NEW_WR_W, S_NEW_INS, S_NEW_INS_W,
    S_NEW_AMT, S_NEW_AMT_W, S_NEW_MAP, S_NEW_MAP_W,
    S_REL_RD, S_REL_RD_W, S_REL_HASH, S_REL_HASH_W, S_REL_DEC, S_REL_DEC_W,
    S_RESP
  } state_e;

  state_e    state;
  host_req_t req_q;
  lfp_t      lfp_q;       // fingerprint of the written line
  lfp_t      old_lfp_q;   // recomputed fingerprint of a replaced line
  pla_t      cand_q;      // PLA indexed by the LFI / newly allocated PLA
  pla_t      old_q;       // PLA the AMT slot held before the update
  logic      old_occ_q;   // AMT slot was occupied
  logic      old_hit_q;   // ... by this same LLA
  line_t     rdata_q;
  status_e   status_q;

  // ---------------- fingerprint unit ----------------
  logic  h_start, h_busy, h_done;
  lfp_t  h_lfp;
  line_t h_line;

  assign h_start = (state == S_HASH) || (state == S_REL_HASH);
  assign h_line  = (state == S_REL_HASH) ? rdata_q : req_q.data;

  sfh_unit #(.LINE_BYTES(LINE_BYTES)) u_sfh (
    .clk, .rst_n,
    .start(h_start),
    .line (h_line),
    .busy (h_busy),
    .done (h_done),
    .lfp  (h_lfp)
  );

  // ---------------- command outputs ----------------
  always_comb begin
    lfi_cmd_valid = 1'b0;
    lfi_cmd_op    = LFI_LOOKUP;
    lfi_cmd_key   = lfp_q;
    lfi_cmd_pla   = cand_q;
    unique case (state)
      S_LFI_LK:  lfi_cmd_valid = 1'b1;
      S_NEW_INS: begin lfi_cmd_valid = 1'b1; lfi_cmd_op = LFI_INSERT; end
      S_DUP_INC: begin lfi_cmd_valid = 1'b1; lfi_cmd_op = LFI_INCREF; end
      S_REL_DEC: begin
        lfi_cmd_valid = 1'b1;
        lfi_cmd_op    = LFI_DECREF;
        lfi_cmd_key   = old_lfp_q;
        lfi_cmd_pla   = old_q;
      end
      default: ;
    endcase
  end

  always_comb begin
    amt_cmd_valid = 1'b0;
    amt_cmd_write = 1'b0;
    amt_cmd_lla   = req_q.lla;
    amt_cmd_pla   = cand_q;
    unique case (state)
      S_RD_AMT, S_DUP_AMT, S_NEW_AMT: amt_cmd_valid = 1'b1;
      S_DUP_WR, S_NEW_MAP: begin amt_cmd_valid = 1'b1; amt_cmd_write = 1'b1; end
      default: ;
    endcase
  end

  always_comb begin
    m_req_valid = 1'b0;
    m_req_we    = 1'b0;
    m_req_pla   = cand_q;
    m_req_wdata = req_q.data;
    unique case (state)
      S_RD_MEM, S_CMP_RD: m_req_valid = 1'b1;
      S_NEW_WR: begin m_req_valid = 1'b1; m_req_we = 1'b1; end
      S_REL_RD: begin m_req_valid = 1'b1; m_req_pla = old_q; end
      default: ;
    endcase
  end

  assign rq_ready   = (state == S_IDLE);
  assign rs_valid   = (state == S_RESP);
  assign rs.status  = status_q;
  assign rs.lla     = req_q.lla;
  assign rs.data    = rdata_q;
  assign alloc_take = (state == S_ALLOC) && alloc_ok;
  assign free_pla   = old_q;
  assign free_valid = (state == S_REL_DEC_W) && lfi_rsp_valid &&
                      (!lfi_rsp_ok || lfi_rsp_freed);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      req_q       <= '0;
      lfp_q       <= '0;
      old_lfp_q   <= '0;
      cand_q      <= '0;
      old_q       <= '0;
      old_occ_q   <= 1'b0;
      old_hit_q   <= 1'b0;
      rdata_q     <= '0;
      status_q    <= ST_RD_MISS;
      ev_lfi_full <= 1'b0;
      ev_displace <= 1'b0;
      ev_release  <= 1'b0;
    end else begin
      ev_lfi_full <= 1'b0;
      ev_displace <= 1'b0;
      ev_release  <= 1'b0;
      unique case (state)
        S_IDLE: if (rq_valid) begin
          req_q   <= rq;
          rdata_q <= '0;
          state   <= (rq.op == OP_WRITE) ? S_HASH : S_RD_AMT;
        end

        // ---- read: translate LLA through the AMT ----
        S_RD_AMT:   if (amt_cmd_ready) state <= S_RD_AMT_W;
        S_RD_AMT_W: if (amt_rsp_valid) begin
          if (amt_rsp_hit) begin
            cand_q <= amt_rsp_pla;
            state  <= S_RD_MEM;
          end else begin
            status_q <= ST_RD_MISS;
            state    <= S_RESP;
          end
        end
        S_RD_MEM:   if (m_req_ready) state <= S_RD_MEM_W;
        S_RD_MEM_W: if (m_rsp_valid) begin
          rdata_q  <= m_rsp_rdata;
          status_q <= ST_RD_HIT;
          state    <= S_RESP;
        end

        // ---- write: fingerprint and LFI lookup ----
        S_HASH:   state <= S_HASH_W;
        S_HASH_W: if (h_done) begin
          lfp_q <= h_lfp;
          state <= S_LFI_LK;
        end
        S_LFI_LK:   if (lfi_cmd_ready) state <= S_LFI_LK_W;
        S_LFI_LK_W: if (lfi_rsp_valid) begin
          if (lfi_rsp_hit && lfi_rsp_ref != '1) begin
            cand_q <= lfi_rsp_pla;
            state  <= S_CMP_RD;
          end else begin
            state <= S_ALLOC;
          end
        end
        S_CMP_RD: if (m_req_ready) state <= S_CMP_W;
        S_CMP_W:  if (m_rsp_valid) begin
          state <= (m_rsp_rdata == req_q.data) ? S_DUP_AMT : S_ALLOC;
        end

        // ---- duplicate line: drop or share ----
        S_DUP_AMT:   if (amt_cmd_ready) state <= S_DUP_AMT_W;
        S_DUP_AMT_W: if (amt_rsp_valid) begin
          old_q     <= amt_rsp_pla;
          old_occ_q <= amt_rsp_occ;
          old_hit_q <= amt_rsp_hit;
          if (amt_rsp_hit && amt_rsp_pla == cand_q) begin
            status_q <= ST_WR_DROP;
            state    <= S_RESP;
          end else begin
            status_q <= ST_WR_SHARE;
            state    <= S_DUP_WR;
          end
        end
        S_DUP_WR:   if (amt_cmd_ready) state <= S_DUP_WR_W;
        S_DUP_WR_W: if (amt_rsp_valid) begin
          ev_displace <= old_occ_q && !old_hit_q;
          state       <= S_DUP_INC;
        end
        S_DUP_INC:   if (lfi_cmd_ready) state <= S_DUP_INC_W;
        S_DUP_INC_W: if (lfi_rsp_valid) state <= old_occ_q ? S_REL_RD : S_RESP;

        // ---- unique line: store, index, map ----
        S_ALLOC: begin
          if (alloc_ok) begin
            cand_q <= alloc_pla;
            state  <= S_NEW_WR;
          end else begin
            status_q <= ST_WR_FULL;
            state    <= S_RESP;
          end
        end
        S_NEW_WR:   if (m_req_ready) state <= S_NEW_WR_W;
        S_NEW_WR_W: if (m_rsp_valid) state <= S_NEW_INS;
        S_NEW_INS:   if (lfi_cmd_ready) state <= S_NEW_INS_W;
        S_NEW_INS_W: if (lfi_rsp_valid) begin
          ev_lfi_full <= !lfi_rsp_ok;
          state       <= S_NEW_AMT;
        end
        S_NEW_AMT:   if (amt_cmd_ready) state <= S_NEW_AMT_W;
        S_NEW_AMT_W: if (amt_rsp_valid) begin
          old_q     <= amt_rsp_pla;
          old_occ_q <= amt_rsp_occ;
          old_hit_q <= amt_rsp_hit;
          status_q  <= amt_rsp_hit ? ST_WR_UPD : ST_WR_NEW;
          state     <= S_NEW_MAP;
        end
        S_NEW_MAP:   if (amt_cmd_ready) state <= S_NEW_MAP_W;
        S_NEW_MAP_W: if (amt_rsp_valid) begin
          ev_displace <= old_occ_q && !old_hit_q;
          state       <= old_occ_q ? S_REL_RD : S_RESP;
        end

        // ---- release the line a replaced mapping pointed to ----
        S_REL_RD:   if (m_req_ready) state <= S_REL_RD_W;
        S_REL_RD_W: if (m_rsp_valid) begin
          rdata_q <= m_rsp_rdata;
          state   <= S_REL_HASH;
        end
        S_REL_HASH:   state <= S_REL_HASH_W;
        S_REL_HASH_W: if (h_done) begin
          old_lfp_q <= h_lfp;
          state     <= S_REL_DEC;
        end
        S_REL_DEC:   if (lfi_cmd_ready) state <= S_REL_DEC_W;
        S_REL_DEC_W: if (lfi_rsp_valid) begin
          ev_release <= 1'b1;
          rdata_q    <= '0;
          state      <= S_RESP;
        end

        S_RESP: if (rs_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command is only issued while the unit answering it is idle
  assert property (@(posedge clk) disable iff (!rst_n) h_start |-> !h_busy)
    else $error("dedup_ctrl: hash unit started while busy");

endmodule
