// sync_fifo: request / response queue of the memory controller.
//
// A first-word-fall-through FIFO: `in_valid`/`in_ready` write an entry,
// `out_valid`/`out_ready` read the oldest one, which is visible on `out_data`
// whenever `out_valid` is high. An entry written in cycle 0 is visible at the
// output in cycle 1. Full and empty are told apart with a count; a write and
// a read may happen in the same cycle, also when the FIFO is full.
//
// The controller buffers host requests and their responses in queues, as the
// design description says of its queue management; the depth is not given
// and DEPTH is this implementation's choice.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wp, rp;
  logic [PTR_W:0]   count;

  logic push, pop;
  assign out_valid = (count != '0);
  assign in_ready  = (count != (PTR_W+1)'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

endmodule
