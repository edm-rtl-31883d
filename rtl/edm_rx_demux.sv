// edm_rx_demux: receive side of intra-frame preemption.
//
// Sits at the output of the descrambler, before the PCS decoder.  Every block
// is classified by sync header and block type.  EDM blocks (/MS/ /MD/ /MT/
// /MST/ /N/ /G/) leave on mem_* towards the EDM RX logic.  Non-memory blocks
// (those of Ethernet frames, possibly split by memory blocks on the way) are
// written into a frame buffer; received idles are dropped.  A frame is
// released to the decoder only after its /T/ block has been buffered, and then
// its blocks are sent in consecutive cycles, so the decoder and MAC see an
// ordinary frame.  Between frames, and whenever nothing is released, idle
// blocks go to the decoder: memory blocks are thereby replaced by idles.  At
// least one idle follows every released frame.  The buffer holds one
// maximum-size frame (FRAME_BLOCKS, 1518-byte frame plus preamble in 8-byte
// blocks, rounded up) as the text bounds it; a frame longer than that is an
// error (overflow pulses) and the blocks that do not fit are lost.
// Timing: mem_* is registered, one cycle after rx_blk; a frame's first block
// reaches dec_blk two cycles after its /T/ arrives.
module edm_rx_demux
  import edm_pkg::*;
#(
  parameter int FRAME_BLOCKS = 192
) (
  input  logic clk,
  input  logic rst_n,
  input  blk_t rx_blk,
  output logic mem_valid,
  output blk_t mem_blk,
  output blk_t dec_blk,
  output logic overflow
);
  bclass_e cls;
  assign cls = classify(rx_blk);
  wire is_mem = cls inside {C_MS, C_MD, C_MT, C_MST, C_N, C_G};
  wire is_nm  = (cls == C_NONMEM);

  logic fb_push, fb_pop, fb_empty, fb_full;
  blk_t fb_head;
  logic [$clog2(FRAME_BLOCKS+1)-1:0] fb_count;
  logic [7:0] frames;        // complete frames waiting in the buffer
  logic       streaming, gap;

  assign fb_push = is_nm && !fb_full;

  edm_sync_fifo #(.WIDTH(66), .DEPTH(FRAME_BLOCKS)) u_fbuf (
    .clk, .rst_n, .push(fb_push), .din(rx_blk), .pop(fb_pop),
    .dout(fb_head), .empty(fb_empty), .full(fb_full), .count(fb_count));

  assign fb_pop = !fb_empty && !gap && (streaming || frames != 0);

  wire push_t = fb_push && is_term(rx_blk);
  wire pop_t  = fb_pop && is_term(fb_head);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_valid <= 1'b0; mem_blk <= idle_blk(); dec_blk <= idle_blk();
      frames <= '0; streaming <= 1'b0; gap <= 1'b0; overflow <= 1'b0;
    end else begin
      mem_valid <= is_mem;
      mem_blk   <= rx_blk;
      overflow  <= is_nm && fb_full;
      frames    <= frames + 8'(push_t) - 8'(pop_t);
      gap       <= pop_t;
      if (fb_pop) begin
        dec_blk   <= fb_head;
        streaming <= !is_term(fb_head);
      end else begin
        dec_blk   <= idle_blk();
      end
    end
  end
endmodule
