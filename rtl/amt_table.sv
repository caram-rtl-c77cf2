// amt_table: address mapping table (AMT).
//
// Maps a logical line address (LLA) to the physical line address (PLA) that
// holds its content. Several LLAs may map to one PLA: that is how duplicate
// lines are shared. It is a hash map: the low IDX_W bits of the LLA select a
// slot of a direct-mapped table and the high bits are stored as a tag. Each
// slot is {valid, tag, PLA (32 b)}.
//
// Commands (one at a time, cmd_valid/cmd_ready handshake):
//   write=0 (lookup) lla       -> reports the slot
//   write=1 (update) lla, pla  -> stores lla -> pla, reports the slot as it
//                                 was before the update
// The report is: hit (slot holds this LLA), occ (slot holds any LLA) and the
// slot's pla. An update of a slot that held a different
// LLA displaces that mapping; the caller must then release the displaced
// line (it leaves the memory, as a page swapped to the storage pool would).
// Timing: accepted in cycle 0, rsp_valid in cycle 2, cmd_ready low in
// between and during the clearing sweep after reset (2**IDX_W cycles).
//
// The key/value pair and its 4 B + 4 B size, the many-to-one use and the
// default size (2**26 entries, 512 MB, the figure estimated for a 16 GB
// memory) follow the design description. The DRAM partition holding the
// table is modelled as a dedicated single-port array with one-cycle access;
// the direct-mapped organisation and the displacement rule are this
// implementation's choices.
module amt_table
  import caram_pkg::*;
#(
  parameter int IDX_W = 26
) (
  input  logic clk,
  input  logic rst_n,
  output logic init_busy,
  input  logic cmd_valid,
  output logic cmd_ready,
  input  logic cmd_write,
  input  lla_t cmd_lla,
  input  pla_t cmd_pla,
  output logic rsp_valid,
  output logic rsp_hit,
  output logic rsp_occ,
  output pla_t rsp_pla
);
  localparam int TAG_W   = LLA_W - IDX_W;
  localparam int ENTRIES = 2 ** IDX_W;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    pla_t             pla;
  } entry_t;

  entry_t mem [ENTRIES];

  logic             init_q;
  logic [IDX_W-1:0] init_idx;
  logic             pend;
  logic             write_q;
  logic [IDX_W-1:0] idx_q;
  logic [TAG_W-1:0] tag_q;
  pla_t             pla_q;
  entry_t           slot_q;

  assign init_busy = init_q;
  assign cmd_ready = !init_q && !pend;

  always_ff @(posedge clk) begin
    if (init_q)
      mem[init_idx] <= '0;
    else if (pend && write_q)
      mem[idx_q] <= '{valid: 1'b1, tag: tag_q, pla: pla_q};
    if (cmd_valid && cmd_ready)
      slot_q <= mem[cmd_lla[IDX_W-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q      <= 1'b1;
      init_idx    <= '0;
      pend        <= 1'b0;
      write_q     <= 1'b0;
      idx_q       <= '0;
      tag_q       <= '0;
      pla_q       <= '0;
      rsp_valid   <= 1'b0;
      rsp_hit     <= 1'b0;
      rsp_occ     <= 1'b0;
      rsp_pla     <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (init_q) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == IDX_W'(ENTRIES - 1)) init_q <= 1'b0;
      end
      if (cmd_valid && cmd_ready) begin
        pend    <= 1'b1;
        write_q <= cmd_write;
        idx_q   <= cmd_lla[IDX_W-1:0];
        tag_q   <= cmd_lla[LLA_W-1:IDX_W];
        pla_q   <= cmd_pla;
      end else if (pend) begin
        pend        <= 1'b0;
        rsp_valid   <= 1'b1;
        rsp_hit     <= slot_q.valid && (slot_q.tag == tag_q);
        rsp_occ     <= slot_q.valid;
        rsp_pla     <= slot_q.pla;
      end
    end
  end

endmodule
