// line_alloc: physical line allocator for the unified DRAM+PCM line space.
//
// Hands out physical line addresses (PLAs) for unique line writes and takes
// back those whose last reference has gone. Lines never used yet are handed
// out by a bump pointer counting up from PLA 0 (the DRAM data partition comes
// first, then PCM); freed lines go onto a LIFO free stack and are reused
// before the bump pointer advances.
//
// Interface: `alloc_ok`/`alloc_pla` show, combinationally, whether a line is
// free and which one `alloc_take` would get; `alloc_take` consumes it at the
// clock edge. `free_valid`/`free_pla` return a line. Both may happen in the
// same cycle. `used_lines` is the number of lines currently allocated (the
// physical space occupation). No reset sweep is needed: the stack is empty
// after reset.
//
// That all PCM and the DRAM left over from metadata and write buffering form
// one physical space for unique lines follows the design description; the
// allocation policy is not described there and is this implementation's own.
module line_alloc
  import caram_pkg::*;
#(
  parameter int unsigned PHYS_LINES = 32'd37224448
) (
  input  logic clk,
  input  logic rst_n,
  output logic alloc_ok,
  output pla_t alloc_pla,
  input  logic alloc_take,
  input  logic free_valid,
  input  pla_t free_pla,
  output pla_t used_lines
);
  localparam int SP_W = $clog2(PHYS_LINES + 1);

  pla_t            stack [PHYS_LINES];
  logic [SP_W-1:0] sp;        // entries on the free stack
  pla_t            next;      // first never-allocated line

  logic from_stack;
  assign from_stack = (sp != '0);
  assign alloc_ok   = from_stack || (next < pla_t'(PHYS_LINES));
  assign alloc_pla  = from_stack ? stack[sp - 1'b1] : next;
  assign used_lines = next - pla_t'(sp);

  logic take;
  assign take = alloc_take && alloc_ok;

  always_ff @(posedge clk) begin
    if (free_valid) begin
      if (take && from_stack) stack[sp - 1'b1] <= free_pla;
      else                    stack[sp]        <= free_pla;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp   <= '0;
      next <= '0;
    end else begin
      if (take && !from_stack) next <= next + 1'b1;
      if (take && from_stack && !free_valid) sp <= sp - 1'b1;
      else if (free_valid && !(take && from_stack)) sp <= sp + 1'b1;
    end
  end

  // A line can only be returned while fewer than all lines are free
  assert property (@(posedge clk) disable iff (!rst_n)
                   free_valid |-> (pla_t'(sp) < next))
    else $error("line_alloc: free stack overflow");

endmodule
