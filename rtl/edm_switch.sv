// edm_switch: the EDM stack in the PHY of a switch with N_PORTS ports, and its
// scheduler.
//
// RX of each port: edm_rx_demux separates EDM blocks from non-memory blocks
// (1 cycle to identify the block type).  An /N/ block, or a whole RREQ /
// RMWREQ message (/MS/, address and argument words, /MT/), becomes a
// notification for edm_scheduler; the request itself is buffered in the
// notification queue.  /M*/ blocks of WREQ and RRES messages are not parsed:
// each is tagged with the egress port of the virtual circuit the scheduler set
// up when it granted the chunk (a per-ingress FIFO of granted destinations,
// advanced at each chunk's /MT/ or /MST/), and crosses to the TX side through a
// dual-clock FIFO.  RX-to-TX forwarding takes 4 cycles after the
// classification cycle, as in the text.
//
// TX of each port: grants for the host on this port become /G/ blocks
// (1 cycle), or, for the first chunk of a read response, the buffered request
// is sent on to the memory node with its peer field set to the requesting
// compute node.  Forwarded blocks take precedence over these; a multi-block
// sequence (a forwarded chunk, a re-sent request) is never split by another
// memory sequence, except that a one-block /G/ may be placed inside a
// forwarded chunk.  edm_tx_mux then shares the link with non-memory blocks
// coming from the switch's normal Ethernet pipeline (enc_*), whose layer-2
// processing is not part of this design; dec_blk carries received non-memory
// frames to it.
module edm_switch
  import edm_pkg::*;
#(
  parameter int      N_PORTS = 2,
  parameter int      X       = 3,
  parameter int      CHUNK   = 256,
  parameter policy_e POLICY  = POL_SRPT
) (
  input  logic clk,
  input  logic rst_n,
  input  blk_t rx_blk   [N_PORTS],
  output blk_t tx_blk   [N_PORTS],
  input  logic [N_PORTS-1:0] enc_valid,
  input  blk_t enc_blk  [N_PORTS],
  output logic [N_PORTS-1:0] enc_ready,
  output blk_t dec_blk  [N_PORTS],
  input  logic [N_PORTS-1:0] port_disable,
  // events
  output logic [N_PORTS-1:0] grant_issued,
  output logic [N_PORTS-1:0] preempt,
  output logic sched_overflow,
  output logic iter_done
);
  localparam int PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  typedef struct packed {
    logic [PW-1:0] dst;
    blk_t          b;
  } fwd_t;

  logic   [N_PORTS-1:0] notif_valid;
  notif_t notif [N_PORTS];
  logic   [N_PORTS-1:0] grant_valid;
  grant_t grant [N_PORTS];
  logic   [N_PORTS-1:0] src_busy, dst_busy;

  edm_scheduler #(.N_PORTS(N_PORTS), .X(X), .CHUNK(CHUNK), .POLICY(POLICY)) u_sched (
    .clk, .rst_n, .notif_valid, .notif, .port_disable, .grant_valid, .grant,
    .overflow(sched_overflow), .src_busy, .dst_busy, .iter_done);
  assign grant_issued = grant_valid;

  // ingress FIFO heads, seen by all egresses
  fwd_t in_head  [N_PORTS];
  logic [N_PORTS-1:0] in_valid;
  logic [N_PORTS-1:0] in_rd;
  // which egress pops which ingress
  logic [N_PORTS-1:0] pop_by [N_PORTS];   // [egress][ingress]

  always_comb begin
    for (int i = 0; i < N_PORTS; i++) begin
      in_rd[i] = 1'b0;
      for (int e = 0; e < N_PORTS; e++) in_rd[i] = in_rd[i] | pop_by[e][i];
    end
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    // ------------------------------------------------------------ RX
    logic rxm_valid;
    blk_t rxm_blk;
    logic rx_ovf;
    edm_rx_demux u_rx (
      .clk, .rst_n, .rx_blk(rx_blk[p]), .mem_valid(rxm_valid), .mem_blk(rxm_blk),
      .dec_blk(dec_blk[p]), .overflow(rx_ovf));

    bclass_e cls;
    mhdr_t   body;
    assign cls  = rxm_valid ? classify(rxm_blk) : C_IDLE;
    assign body = mhdr_t'(rxm_blk.payload[55:0]);

    logic        capturing;
    mhdr_t       cap_h;
    logic [1:0]  capk;
    logic [63:0] cap_addr, cap_a1, cap_a2;

    // circuit destinations granted to this port as a data source
    logic [PW-1:0] circ_head;
    logic          circ_empty, circ_full, circ_pop;
    logic [3:0]    circ_count;
    edm_sync_fifo #(.WIDTH(PW), .DEPTH(8)) u_circ (
      .clk, .rst_n, .push(grant_valid[p]), .din(PW'(grant[p].peer)), .pop(circ_pop),
      .dout(circ_head), .empty(circ_empty), .full(circ_full), .count(circ_count));

    logic fwd_wr, fwd_full;
    logic is_fwd;
    assign is_fwd = !capturing && ((cls == C_MS && !(body.mtype inside {M_RREQ, M_RMWREQ})) ||
                                   cls == C_MD || cls == C_MT || cls == C_MST);
    assign fwd_wr   = is_fwd;
    assign circ_pop = is_fwd && (cls == C_MT || cls == C_MST);

    always_comb begin
      notif_valid[p] = 1'b0;
      notif[p] = '0;
      if (cls == C_N) begin
        notif_valid[p] = 1'b1;
        notif[p].mtype = M_WREQ; notif[p].dst = body.peer; notif[p].id = body.id;
        notif[p].len = body.len;
      end else if (capturing && cls == C_MT) begin
        notif_valid[p] = 1'b1;
        notif[p].mtype = cap_h.mtype; notif[p].dst = cap_h.peer; notif[p].id = cap_h.id;
        notif[p].len = cap_h.len; notif[p].op = cap_h.op;
        notif[p].addr = cap_addr; notif[p].arg1 = cap_a1;
        notif[p].arg2 = cap_a2;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        capturing <= 1'b0; cap_h <= '0; capk <= '0; cap_addr <= '0; cap_a1 <= '0; cap_a2 <= '0;
      end else begin
        if (!capturing && cls == C_MS && body.mtype inside {M_RREQ, M_RMWREQ}) begin
          capturing <= 1'b1; cap_h <= body; capk <= '0;
        end else if (capturing && cls == C_MD) begin
          capk <= capk + 1'b1;
          if (capk == 2'd0) cap_addr <= rxm_blk.payload;
          if (capk == 2'd1) cap_a1   <= rxm_blk.payload;
          if (capk == 2'd2) cap_a2   <= rxm_blk.payload;
        end else if (capturing && cls == C_MT) begin
          capturing <= 1'b0;
        end
      end
    end

    // RX -> TX clock domain crossing of forwarded blocks
    fwd_t fwd_in, fwd_out;
    assign fwd_in = '{dst: circ_head, b: rxm_blk};
    edm_async_fifo #(.WIDTH($bits(fwd_t)), .DEPTH_LOG2(5), .SYNC_STAGES(1)) u_fwd (
      .wclk(clk), .wrst_n(rst_n), .wr_en(fwd_wr), .wdata(fwd_in), .wfull(fwd_full),
      .rclk(clk), .rrst_n(rst_n), .rd_en(in_rd[p]), .dout(fwd_out), .dvalid(in_valid[p]));
    assign in_head[p] = fwd_out;

    // ------------------------------------------------------------ TX
    // grants for the host on this port
    grant_t cg;
    logic   cg_empty, cg_full, cg_pop;
    logic [2:0] cg_count;
    edm_sync_fifo #(.WIDTH($bits(grant_t)), .DEPTH(4)) u_ctl (
      .clk, .rst_n, .push(grant_valid[p]), .din(grant[p]), .pop(cg_pop),
      .dout(cg), .empty(cg_empty), .full(cg_full), .count(cg_count));

    logic [2:0] ck;          // block index within a re-sent request
    mhdr_t      cg_h;
    blk_t       ctl_blk;
    logic       ctl_multi, ctl_last;
    always_comb begin
      cg_h = '0;
      cg_h.mtype = cg.mtype; cg_h.peer = cg.peer; cg_h.id = cg.id; cg_h.len = cg.len; cg_h.op = cg.op;
      ctl_multi = cg.mtype inside {M_RREQ, M_RMWREQ};
      ctl_last  = !ctl_multi || (ck == ((cg.mtype == M_RMWREQ) ? 3'd4 : 3'd2));
      if (!ctl_multi) ctl_blk = mk_ctrl(BT_G, cg_h);
      else case (ck)
        3'd0: ctl_blk = mk_ctrl(BT_MS, cg_h);
        3'd1: ctl_blk = mk_mdata(cg.addr);
        3'd2: ctl_blk = (cg.mtype == M_RMWREQ) ? mk_mdata(cg.arg1) : mk_ctrl(BT_MT, cg_h);
        3'd3: ctl_blk = mk_mdata(cg.arg2);
        default: ctl_blk = mk_ctrl(BT_MT, cg_h);
      endcase
    end

    // forwarded block for this egress
    logic          fwd_lock;
    logic [PW-1:0] lock_src;
    logic          fv;
    logic [PW-1:0] fsrc;
    always_comb begin
      fv = 1'b0; fsrc = '0;
      if (fwd_lock) begin
        fsrc = lock_src;
        fv   = in_valid[lock_src] && in_head[lock_src].dst == PW'(p);
      end else begin
        for (int i = N_PORTS - 1; i >= 0; i--)
          if (in_valid[i] && in_head[i].dst == PW'(p)) begin fv = 1'b1; fsrc = PW'(i); end
      end
    end

    logic ctl_lock;
    logic use_fwd, use_ctl, mem_valid, mem_ready;
    blk_t mem_blk;
    always_comb begin
      use_fwd = 1'b0; use_ctl = 1'b0;
      if (ctl_lock)                                       use_ctl = !cg_empty;
      else if (fv)                                        use_fwd = 1'b1;
      else if (!cg_empty && (!ctl_multi || !fwd_lock))    use_ctl = 1'b1;
      mem_valid = use_fwd || use_ctl;
      mem_blk   = use_fwd ? in_head[fsrc].b : ctl_blk;
    end
    always_comb begin
      for (int i = 0; i < N_PORTS; i++) pop_by[p][i] = use_fwd && mem_ready && (fsrc == PW'(i));
      cg_pop = use_ctl && mem_ready && ctl_last;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ck <= '0; fwd_lock <= 1'b0; lock_src <= '0; ctl_lock <= 1'b0;
      end else if (mem_ready) begin
        if (use_ctl) begin
          ck       <= ctl_last ? 3'd0 : ck + 1'b1;
          ctl_lock <= ctl_multi && !ctl_last;
        end
        if (use_fwd) begin
          if (classify(in_head[fsrc].b) == C_MS) begin fwd_lock <= 1'b1; lock_src <= fsrc; end
          if (classify(in_head[fsrc].b) inside {C_MT, C_MST}) fwd_lock <= 1'b0;
        end
      end
    end

    edm_tx_mux u_tx (
      .clk, .rst_n, .nm_valid(enc_valid[p]), .nm_blk(enc_blk[p]), .nm_ready(enc_ready[p]),
      .mem_valid, .mem_blk, .mem_ready, .tx_blk(tx_blk[p]), .preempt(preempt[p]));

    a_fwd_room:  assert property (@(posedge clk) disable iff (!rst_n) fwd_wr |-> !fwd_full);
    a_circuit:   assert property (@(posedge clk) disable iff (!rst_n) fwd_wr |-> !circ_empty);
    a_ctl_room:  assert property (@(posedge clk) disable iff (!rst_n) grant_valid[p] |-> !cg_full);
  end
endmodule
