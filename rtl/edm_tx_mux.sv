// edm_tx_mux: transmit side of intra-frame preemption.
//
// Sits at the output of the PCS encoder, before the scrambler.  Non-memory
// blocks from the encoder go into a small buffer (NM_DEPTH = 4 blocks, the
// bound given in the text); idle /E/ blocks from the encoder are not buffered,
// so the inter-frame gap is free for memory blocks.  Each cycle one 66-bit
// block is sent: by default memory and non-memory blocks take turns when both
// are waiting (fair round-robin scheduling, the text's default), or memory
// blocks always go first when STRICT_MEM is set (the alternative the text
// mentions).  With nothing to send an idle block goes out.  A memory block
// may thus be sent in the middle of a non-memory frame (preempt pulses then).
// nm_ready is the back-pressure towards the encoder/MAC: it is low while the
// buffer is full.  mem_ready tells the memory source its block was taken in
// this cycle.  The output tx_blk is registered: a block offered at edge 0 is
// on tx_blk after edge 1 if it wins arbitration.
module edm_tx_mux
  import edm_pkg::*;
#(
  parameter int NM_DEPTH   = 4,
  parameter bit STRICT_MEM = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic nm_valid,
  input  blk_t nm_blk,
  output logic nm_ready,
  input  logic mem_valid,
  input  blk_t mem_blk,
  output logic mem_ready,
  output blk_t tx_blk,
  output logic preempt
);
  blk_t nm_head;
  logic nm_empty, nm_full, nm_pop, nm_push;
  logic [$clog2(NM_DEPTH+1)-1:0] nm_count;
  logic last_mem;      // the previous contended slot went to memory
  logic in_frame;      // a non-memory frame has started but not ended on the wire

  assign nm_push  = nm_valid && nm_ready && (classify(nm_blk) != C_IDLE);
  assign nm_ready = !nm_full;

  edm_sync_fifo #(.WIDTH(66), .DEPTH(NM_DEPTH)) u_nmbuf (
    .clk, .rst_n, .push(nm_push), .din(nm_blk), .pop(nm_pop),
    .dout(nm_head), .empty(nm_empty), .full(nm_full), .count(nm_count));

  logic pick_mem;
  always_comb begin
    if (mem_valid && !nm_empty) pick_mem = STRICT_MEM ? 1'b1 : !last_mem;
    else                        pick_mem = mem_valid;
  end
  assign mem_ready = pick_mem;
  assign nm_pop    = !pick_mem && !nm_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_blk <= idle_blk(); last_mem <= 1'b0; in_frame <= 1'b0; preempt <= 1'b0;
    end else begin
      preempt <= pick_mem && in_frame;
      if (pick_mem) begin
        tx_blk <= mem_blk;
      end else if (!nm_empty) begin
        tx_blk <= nm_head;
        if (nm_head.sync == SYNC_CTRL && nm_head.payload[63:56] == BT_S0) in_frame <= 1'b1;
        if (is_term(nm_head)) in_frame <= 1'b0;
      end else begin
        tx_blk <= idle_blk();
      end
      if (mem_valid && !nm_empty) last_mem <= pick_mem;
    end
  end

  a_mem_block: assert property (@(posedge clk) disable iff (!rst_n)
                                mem_valid |-> classify(mem_blk) inside {C_MS, C_MD, C_MT, C_MST, C_N, C_G});
endmodule
