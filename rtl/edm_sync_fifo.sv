// edm_sync_fifo: single-clock show-ahead FIFO.
//
// Used as the host message queue and as the per-link buffers of non-memory
// and memory blocks.  Storage is a register array with read and write
// pointers; the head entry is visible on dout whenever empty is low (show-ahead),
// so a consumer that registers dout sees a pushed entry one cycle after the push.
// push when full and pop when empty are ignored and flagged by assertions.
// Depth and width are this design's choices; the text gives only the buffers'
// roles (and, for the TX non-memory buffer, a depth of 4 blocks).
module edm_sync_fifo #(
  parameter int WIDTH = 66,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rp];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(do_push)) - (($clog2(DEPTH+1))'(do_pop));
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
