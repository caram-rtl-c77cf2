// write_buffer: DRAM write buffer in front of the PCM.
//
// Absorbs line writes bound for the PCM so that the controller does not wait
// for the slow PCM write, and drains them to the PCM channel in arrival order
// when that channel is free. It is a circular queue of ENTRIES {PLA, line}
// slots with an associative match on the PLA:
//   - a read of a PCM line is first looked up here (`lk_pla` -> `lk_hit`,
//     `lk_data`, combinational) and served from the buffer on a hit;
//   - a write to a PLA already waiting in the buffer overwrites that slot's
//     data instead of taking a new slot (unless that slot is leaving through
//     the drain port in the same cycle), so a PLA is held at most once.
// `push_ready` is low only when the buffer is full and the write does not
// match; the controller then stalls. The oldest slot is on the drain port
// (`out_valid`/`out_ready`/`out_pla`/`out_data`). `count` is the occupancy.
//
// A small DRAM part used as a write buffer for PCM writes follows the design
// description. Its size, the modelling as a dedicated array, the in-place
// update of a waiting line and the forwarding of reads are this
// implementation's choices.
module write_buffer
  import caram_pkg::*;
#(
  parameter int ENTRIES = 32
) (
  input  logic clk,
  input  logic rst_n,
  // write from the controller
  input  logic push_valid,
  output logic push_ready,
  input  pla_t push_pla,
  input  line_t push_data,
  // read lookup
  input  pla_t lk_pla,
  output logic lk_hit,
  output line_t lk_data,
  // drain to the PCM channel
  output logic out_valid,
  input  logic out_ready,
  output pla_t out_pla,
  output line_t out_data,
  output logic [$clog2(ENTRIES+1)-1:0] count
);
  localparam int PTR_W = $clog2(ENTRIES);
  localparam int CNT_W = $clog2(ENTRIES + 1);

  pla_t             pla_r  [ENTRIES];
  line_t            data_r [ENTRIES];
  logic             vld    [ENTRIES];
  logic [PTR_W-1:0] wp, rp;

  logic             pop;
  logic             p_hit, l_hit;
  logic [PTR_W-1:0] p_idx, l_idx;
  logic             coalesce, append;

  assign out_valid = (count != '0);
  assign out_pla   = pla_r[rp];
  assign out_data  = data_r[rp];
  assign pop       = out_valid && out_ready;

  always_comb begin
    p_hit = 1'b0;
    p_idx = '0;
    l_hit = 1'b0;
    l_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (vld[i] && pla_r[i] == push_pla) begin
        p_hit = 1'b1;
        p_idx = PTR_W'(i);
      end
      if (vld[i] && pla_r[i] == lk_pla) begin
        l_hit = 1'b1;
        l_idx = PTR_W'(i);
      end
    end
  end

  assign lk_hit     = l_hit;
  assign lk_data    = data_r[l_idx];
  assign coalesce   = push_valid && p_hit && !(pop && p_idx == rp);
  assign push_ready = (p_hit && !(pop && p_idx == rp)) ||
                      (count != CNT_W'(ENTRIES)) || pop;
  assign append     = push_valid && push_ready && !coalesce;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (coalesce) data_r[p_idx] <= push_data;
    if (append) begin
      pla_r[wp]  <= push_pla;
      data_r[wp] <= push_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
      for (int i = 0; i < ENTRIES; i++) vld[i] <= 1'b0;
    end else begin
      if (pop) begin
        vld[rp] <= 1'b0;
        rp      <= inc(rp);
      end
      if (append) begin
        vld[wp] <= 1'b1;
        wp      <= inc(wp);
      end
      if (append && !pop)      count <= count + 1'b1;
      else if (pop && !append) count <= count - 1'b1;
    end
  end

endmodule
