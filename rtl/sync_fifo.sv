// sync_fifo: single-clock first-in first-out buffer.
//
// The attention layer keeps vectors that are read exactly once (the query
// rows, and the skip-connection copy of each input row) in FIFOs, as the
// source describes.  This one is a register array with read and write
// pointers and an occupancy counter.  The head of the queue is always visible
// on rd_data while empty is low (first-word fall-through); a pop removes it at
// the next clock edge.  Pushing when full or popping when empty is a caller
// error and is flagged by assertions.  Depth and width are parameters; the
// structure is this design's own.
//
// Timing: push and pop take effect at the rising clock edge; both may happen
// in the same cycle.  rst_n is an active-low synchronous reset that empties it.
module sync_fifo #(
  parameter int WIDTH = 120,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rp];

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] ptr);
    return (ptr == PW'(DEPTH-1)) ? '0 : ptr + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= wr_data;
        wp      <= nxt(wp);
      end
      if (pop) rp <= nxt(rp);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
