// edm_msg_state_table: the host message state table.
//
// The table is indexed by <peer port, message id> (plus one bit that keeps a
// memory node's RRES entries apart from the node's own outgoing requests).
// An entry holds what a host needs to finish a message: the remote address and
// data buffer pointer of a WREQ, the local address an RRES must be written to,
// or, on a memory node, where the read data for an RRES waits and whether it
// has arrived.  Three write ports (A from the TX engine, B from the RX parser,
// C from memory-read completion; C wins over B over A on the same index,
// which the host never does, see the assertion) and two registered read ports (1-cycle latency: the "reading from
// the message state table (1 cycle)" step of the text).
module edm_msg_state_table
  import edm_pkg::*;
#(
  parameter int N_PEERS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wa_en,
  input  logic [$clog2(N_PEERS)+ID_W:0] wa_idx,
  input  mst_entry_t  wa_data,
  input  logic        wb_en,
  input  logic [$clog2(N_PEERS)+ID_W:0] wb_idx,
  input  mst_entry_t  wb_data,
  input  logic        wc_en,
  input  logic [$clog2(N_PEERS)+ID_W:0] wc_idx,
  input  mst_entry_t  wc_data,
  input  logic [$clog2(N_PEERS)+ID_W:0] ra_idx,
  output mst_entry_t  ra_data,
  input  logic [$clog2(N_PEERS)+ID_W:0] rb_idx,
  output mst_entry_t  rb_data
);
  localparam int IW = $clog2(N_PEERS) + ID_W + 1;
  localparam int ENTRIES = 1 << IW;
  // Entry contents live in a RAM without reset; only the valid bits are
  // cleared at reset, so the table maps onto memory cells.
  mst_entry_t      tbl [ENTRIES];
  logic [ENTRIES-1:0] vld;
  wire a_ok = wa_en && !(wb_en && wb_idx == wa_idx) && !(wc_en && wc_idx == wa_idx);
  wire b_ok = wb_en && !(wc_en && wc_idx == wb_idx);

  always_ff @(posedge clk) begin
    if (a_ok) tbl[wa_idx] <= wa_data;
    if (b_ok) tbl[wb_idx] <= wb_data;
    if (wc_en) tbl[wc_idx] <= wc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else begin
      if (a_ok) vld[wa_idx] <= wa_data.valid;
      if (b_ok) vld[wb_idx] <= wb_data.valid;
      if (wc_en) vld[wc_idx] <= wc_data.valid;
    end
  end

  mst_entry_t ra_q, rb_q;
  logic       ra_v, rb_v;
  always_ff @(posedge clk) begin
    ra_q <= tbl[ra_idx]; ra_v <= vld[ra_idx];
    rb_q <= tbl[rb_idx]; rb_v <= vld[rb_idx];
  end
  // an entry whose valid bit is clear reads as all zero
  assign ra_data = ra_v ? ra_q : '0;
  assign rb_data = rb_v ? rb_q : '0;

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(wa_en && wb_en && wa_idx == wb_idx) &&
                                  !(wa_en && wc_en && wa_idx == wc_idx) &&
                                  !(wb_en && wc_en && wb_idx == wc_idx));
endmodule
