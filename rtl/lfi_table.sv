// lfi_table: line fingerprint index (LFI).
//
// Maps a 32-bit line fingerprint (LFP) to {physical line address, reference
// count} for every unique line that can be shared. It is a hash map: the low
// IDX_W bits of the LFP select one slot of a direct-mapped table and the
// remaining high bits are kept as a tag, so a slot holds the full key. Each
// slot is {valid, tag, PLA (32 b), RefCount (16 b)}.
//
// Commands (one at a time, cmd_valid/cmd_ready handshake):
//   LFI_LOOKUP  key          -> hit, pla, refcnt of the slot's entry
//   LFI_INSERT  key, pla     -> writes {key, pla, RefCount=1} if the slot is
//                               empty (ok=1); an occupied slot is left alone
//                               (ok=0) and the line simply stays unindexed
//   LFI_INCREF  key          -> RefCount+1 if hit and not saturated (ok=1)
//   LFI_DECREF  key, pla     -> if hit and the entry's PLA equals `pla`
//                               (ok=1): RefCount-1, or delete the entry when
//                               it reaches zero (freed=1)
// Timing: a command accepted in cycle 0 reads its slot in cycle 0, updates it
// in cycle 1 and presents rsp_valid with the result in cycle 2. cmd_ready is
// low while a command is in flight and during the clearing sweep after reset,
// which writes one empty slot per cycle (2**IDX_W cycles, init_busy high).
//
// The key/value layout, the field widths and the default size (2**26 entries
// of 10 B = 640 MB, the figure estimated for a 16 GB memory) follow the
// design description, as does keeping the table in the battery-backed DRAM.
// Here that DRAM partition is modelled as a dedicated single-port array with
// one-cycle access. The direct-mapped organisation, the refusal to overwrite
// an occupied slot and the command set are this implementation's choices.
module lfi_table
  import caram_pkg::*;
#(
  parameter int IDX_W = 26
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    init_busy,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  lfi_op_e cmd_op,
  input  lfp_t    cmd_key,
  input  pla_t    cmd_pla,
  output logic    rsp_valid,
  output logic    rsp_hit,
  output logic    rsp_ok,
  output logic    rsp_freed,
  output pla_t    rsp_pla,
  output ref_t    rsp_ref
);
  localparam int TAG_W   = LFP_W - IDX_W;
  localparam int ENTRIES = 2 ** IDX_W;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    pla_t             pla;
    ref_t             refcnt;
  } entry_t;

  entry_t mem [ENTRIES];

  logic             init_q;
  logic [IDX_W-1:0] init_idx;
  logic             pend;
  lfi_op_e          op_q;
  logic [IDX_W-1:0] idx_q;
  logic [TAG_W-1:0] tag_q;
  pla_t             pla_q;
  entry_t           slot_q;

  logic   hit;
  logic   we;
  entry_t wdata;
  logic   ok, freed;

  assign init_busy = init_q;
  assign cmd_ready = !init_q && !pend;
  assign hit       = slot_q.valid && (slot_q.tag == tag_q);

  // Result of the command in flight, worked out from the slot read in cycle 0
  always_comb begin
    we    = 1'b0;
    wdata = slot_q;
    ok    = 1'b0;
    freed = 1'b0;
    unique case (op_q)
      LFI_LOOKUP: ok = hit;
      LFI_INSERT: if (!slot_q.valid) begin
        we    = 1'b1;
        wdata = '{valid: 1'b1, tag: tag_q, pla: pla_q, refcnt: ref_t'(1)};
        ok    = 1'b1;
      end
      LFI_INCREF: if (hit && slot_q.refcnt != '1) begin
        we           = 1'b1;
        wdata.refcnt = slot_q.refcnt + 1'b1;
        ok           = 1'b1;
      end
      LFI_DECREF: if (hit && slot_q.pla == pla_q) begin
        we = 1'b1;
        ok = 1'b1;
        if (slot_q.refcnt <= ref_t'(1)) begin
          wdata = '0;
          freed = 1'b1;
        end else begin
          wdata.refcnt = slot_q.refcnt - 1'b1;
        end
      end
      default: ;
    endcase
  end

  // Table storage: one write port (clearing sweep or command update)
  always_ff @(posedge clk) begin
    if (init_q)
      mem[init_idx] <= '0;
    else if (pend && we)
      mem[idx_q] <= wdata;
    if (cmd_valid && cmd_ready)
      slot_q <= mem[cmd_key[IDX_W-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q    <= 1'b1;
      init_idx  <= '0;
      pend      <= 1'b0;
      op_q      <= LFI_LOOKUP;
      idx_q     <= '0;
      tag_q     <= '0;
      pla_q     <= '0;
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
      rsp_ok    <= 1'b0;
      rsp_freed <= 1'b0;
      rsp_pla   <= '0;
      rsp_ref   <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (init_q) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == IDX_W'(ENTRIES - 1)) init_q <= 1'b0;
      end
      if (cmd_valid && cmd_ready) begin
        pend  <= 1'b1;
        op_q  <= cmd_op;
        idx_q <= cmd_key[IDX_W-1:0];
        tag_q <= cmd_key[LFP_W-1:IDX_W];
        pla_q <= cmd_pla;
      end else if (pend) begin
        pend      <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_hit   <= hit;
        rsp_ok    <= ok;
        rsp_freed <= freed;
        rsp_pla   <= slot_q.pla;
        rsp_ref   <= we ? wdata.refcnt : slot_q.refcnt;
      end
    end
  end

endmodule
