// edm_host_stack: the EDM network stack of a host (compute or memory node),
// placed in the PCS between the encoder and the scrambler (TX) and between the
// descrambler and the decoder (RX).
//
// TX engine.  Requests from the application wait in the message queue.  Each
// dequeued request gets a message id (a per-destination counter) and an entry
// in the message state table, indexed by <destination, id>.  An RREQ or
// RMWREQ is sent at once as /MS/ header, /MD/ address (and, for a
// compare-and-swap, /MD/ compare and /MD/ swap values) and /MT/ tail.  A WREQ
// is announced by one /N/ block and waits for grants.  Grants arrive through
// the grant queue and have precedence over new messages; for each grant the
// engine reads the state table (1 cycle), the data buffer (1 cycle) and sends
// the chunk (header, for WREQ the remote address of the chunk, data words,
// tail).  The first block of a request (or its /N/) is built straight from
// the head of the message queue while the state table is written, so it is
// on tx_blk 2 cycles after the request was accepted (queue 1, block 1, as in
// the text); a grant's first block follows 9 cycles after its /G/ arrived
// (2 RX, 4 grant queue, 1 table read, 1 buffer read, 1 block).  A memory node serves RRES grants the same way, from read data the
// RX side left in the data buffer; a grant whose data has not yet come back
// from memory waits.  At most X notifications per destination are active: a
// request to a destination that already has X waits at the head of the queue.
//
// RX engine.  /G/ blocks go to the grant queue (parse 1 cycle, enqueue 1
// cycle).  At a memory node an RREQ is turned into reads of the local memory
// and into a grant-queue entry for the first RRES chunk (the request is its
// own grant), an RMWREQ into an atomic compare-and-swap, and WREQ data words
// are written to memory at the address carried after the header.  At a
// compute node RRES data words are written to local memory at the address
// kept in the state table (parse, table read, write: 3 cycles); when the last
// byte arrives the message completes (done_*).  A compare-and-swap result
// comes back as one /MST/ block whose aux bit is the success flag.
//
// Non-memory traffic passes through edm_tx_mux / edm_rx_demux (intra-frame
// preemption).  One clock drives TX and RX here; the grant queue is still a
// dual-clock FIFO with its 4-cycle crossing.  Message formats, the block
// layouts and the memory and application interfaces are this design's choices.
module edm_host_stack
  import edm_pkg::*;
#(
  parameter int N_PEERS     = 2,
  parameter int X           = 3,
  parameter int CHUNK       = 256,
  parameter int DBUF_WORDS  = 1024,
  parameter int MSGQ_DEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PORT_W-1:0] my_port,
  // application requests
  input  logic              req_valid,
  input  app_req_t          req,
  output logic              req_ready,
  // application access to the data buffer (WREQ data)
  input  logic              app_dbuf_we,
  input  logic [$clog2(DBUF_WORDS)-1:0] app_dbuf_addr,
  input  logic [63:0]       app_dbuf_wdata,
  // response data written to local memory (compute node)
  output logic              lm_we,
  output logic [63:0]       lm_addr,
  output logic [63:0]       lm_wdata,
  // completions: WREQ fully sent, RRES fully received
  output logic              done_valid,
  output mtype_e            done_mtype,
  output logic [PORT_W-1:0] done_peer,
  output logic [ID_W-1:0]   done_id,
  // memory controller (memory node)
  output logic              mc_valid,
  input  logic              mc_ready,
  output logic              mc_we,
  output logic [63:0]       mc_addr,
  output logic [63:0]       mc_wdata,
  input  logic              mc_rvalid,
  input  logic [63:0]       mc_rdata,
  // PCS
  input  logic              enc_valid,
  input  blk_t              enc_blk,
  output logic              enc_ready,
  output blk_t              tx_blk,
  input  blk_t              rx_blk,
  output blk_t              dec_blk,
  // events
  output logic              preempt,
  output logic              rx_overflow,
  output logic              x_stall
);
  localparam int PW = (N_PEERS > 1) ? $clog2(N_PEERS) : 1;
  localparam int IW = PW + ID_W + 1;
  localparam int DW = $clog2(DBUF_WORDS);

  function automatic logic [IW-1:0] mst_idx(logic resp, logic [PORT_W-1:0] peer, logic [ID_W-1:0] id);
    return {resp, peer[PW-1:0], id};
  endfunction

  // ------------------------------------------------------------ shared parts
  app_req_t   mq_head;
  logic       mq_empty, mq_full, mq_pop;
  logic [$clog2(MSGQ_DEPTH+1)-1:0] mq_count;
  assign req_ready = !mq_full;

  edm_sync_fifo #(.WIDTH($bits(app_req_t)), .DEPTH(MSGQ_DEPTH)) u_msgq (
    .clk, .rst_n, .push(req_valid && !mq_full), .din(req), .pop(mq_pop),
    .dout(mq_head), .empty(mq_empty), .full(mq_full), .count(mq_count));

  logic   gq_wr, gq_full, gq_rd, gq_dvalid;
  mhdr_t  gq_wdata, gq_dout;
  edm_async_fifo #(.WIDTH($bits(mhdr_t)), .DEPTH_LOG2(3), .SYNC_STAGES(3)) u_grantq (
    .wclk(clk), .wrst_n(rst_n), .wr_en(gq_wr), .wdata(gq_wdata), .wfull(gq_full),
    .rclk(clk), .rrst_n(rst_n), .rd_en(gq_rd), .dout(gq_dout), .dvalid(gq_dvalid));

  logic              wa_en, wb_en, wc_en;
  logic [IW-1:0]     wa_idx, wb_idx, wc_idx, ra_idx, rb_idx;
  mst_entry_t        wa_data, wb_data, wc_data, ra_data, rb_data;
  edm_msg_state_table #(.N_PEERS(N_PEERS)) u_mst (
    .clk, .rst_n, .wa_en, .wa_idx, .wa_data, .wb_en, .wb_idx, .wb_data,
    .wc_en, .wc_idx, .wc_data, .ra_idx, .ra_data, .rb_idx, .rb_data);

  logic          db_we, db_re;
  logic [DW-1:0] db_waddr, db_raddr;
  logic [63:0]   db_wdata, db_rdata;
  edm_data_buffer #(.WORDS(DBUF_WORDS)) u_dbuf (
    .clk, .we(db_we), .waddr(db_waddr), .wdata(db_wdata),
    .re(db_re), .raddr(db_raddr), .rdata(db_rdata));

  logic mem_valid, mem_ready;
  blk_t mem_blk;
  edm_tx_mux u_txmux (
    .clk, .rst_n, .nm_valid(enc_valid), .nm_blk(enc_blk), .nm_ready(enc_ready),
    .mem_valid, .mem_blk, .mem_ready, .tx_blk, .preempt);

  logic rxm_valid;
  blk_t rxm_blk;
  edm_rx_demux u_rxdemux (
    .clk, .rst_n, .rx_blk, .mem_valid(rxm_valid), .mem_blk(rxm_blk), .dec_blk,
    .overflow(rx_overflow));

  // active notifications per destination
  localparam int AW = $clog2(X + 1);
  logic [AW-1:0]     active [N_PEERS];
  logic [ID_W-1:0]   next_id [N_PEERS];
  logic              tx_inc, tx_dec, rx_dec;
  logic [PW-1:0]     tx_inc_p, tx_dec_p, rx_dec_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PEERS; i++) begin active[i] <= '0; next_id[i] <= '0; end
    end else begin
      for (int i = 0; i < N_PEERS; i++) begin
        active[i] <= active[i] + AW'(tx_inc && tx_inc_p == PW'(i))
                               - AW'(tx_dec && tx_dec_p == PW'(i))
                               - AW'(rx_dec && rx_dec_p == PW'(i));
        if (tx_inc && tx_inc_p == PW'(i)) next_id[i] <= next_id[i] + 1'b1;
      end
    end
  end

  // ================================================================ TX engine
  typedef enum logic [2:0] {T_IDLE, T_MSG, T_GMST, T_GHDR, T_GADDR, T_GDATA, T_GTAIL} tstate_e;
  tstate_e          ts;
  app_req_t         cur;
  logic [ID_W-1:0]  cur_id;
  logic [2:0]       k;
  mhdr_t            g;
  mst_entry_t       e;
  logic [LEN_W-1:0] wleft;
  logic [DW-1:0]    rdptr;

  wire  [PW-1:0] mq_dst = PW'(mq_head.dst);
  assign x_stall = (ts == T_IDLE) && !gq_dvalid && !mq_empty && (int'(active[mq_dst]) >= X);
  wire  take_msg = (ts == T_IDLE) && !gq_dvalid && !mq_empty && (int'(active[mq_dst]) < X);
  // the first block of a message is sent straight from the queue head
  wire  msg_go   = take_msg && mem_ready;
  assign mq_pop = msg_go;
  assign gq_rd  = (ts == T_IDLE) && gq_dvalid;

  // header of the message being issued
  app_req_t        src;
  logic [ID_W-1:0] src_id;
  assign src    = (ts == T_IDLE) ? mq_head : cur;
  assign src_id = (ts == T_IDLE) ? next_id[mq_dst] : cur_id;
  mhdr_t msg_h;
  always_comb begin
    msg_h = '0;
    msg_h.mtype = src.mtype; msg_h.peer = src.dst; msg_h.id = src_id;
    msg_h.len = (src.mtype == M_RMWREQ) ? LEN_W'(WORD_B) : src.len;
    msg_h.op = src.op;
  end
  mhdr_t chunk_h;
  always_comb begin
    chunk_h = '0;
    chunk_h.mtype = g.mtype; chunk_h.peer = my_port; chunk_h.id = g.id; chunk_h.len = g.len;
    chunk_h.aux = e.aux;
  end

  wire [2:0] msg_last = (cur.mtype == M_RMWREQ) ? 3'd4 : 3'd2;

  always_comb begin
    mem_valid = 1'b0;
    mem_blk   = idle_blk();
    ra_idx    = (ts == T_IDLE) ? mst_idx(gq_dout.mtype == M_RRES, gq_dout.peer, gq_dout.id)
                               : mst_idx(g.mtype == M_RRES, g.peer, g.id);
    wa_en = 1'b0; wa_idx = mst_idx(1'b0, src.dst, src_id); wa_data = '0;
    db_re = 1'b0; db_raddr = rdptr;
    tx_dec = 1'b0; tx_dec_p = PW'(g.peer);
    case (ts)
      T_IDLE: if (take_msg) begin
        mem_valid = 1'b1;
        mem_blk = (src.mtype == M_WREQ) ? mk_ctrl(BT_N, msg_h) : mk_ctrl(BT_MS, msg_h);
        if (mem_ready) begin
          wa_en = 1'b1;
          wa_data.valid = 1'b1; wa_data.mtype = src.mtype; wa_data.len = msg_h.len;
          wa_data.raddr = (src.mtype == M_WREQ) ? src.raddr : src.laddr;
          wa_data.ptr   = src.laddr[15:0];
        end
      end
      T_MSG: begin
        mem_valid = 1'b1;
        case (k)
          3'd1: mem_blk = mk_mdata(cur.raddr);
          3'd2: mem_blk = (cur.mtype == M_RMWREQ) ? mk_mdata(cur.arg1) : mk_ctrl(BT_MT, msg_h);
          3'd3: mem_blk = mk_mdata(cur.arg2);
          default: mem_blk = mk_ctrl(BT_MT, msg_h);
        endcase
      end
      T_GMST: begin
        db_re = 1'b1;
        db_raddr = DW'(ra_data.ptr) + DW'(ra_data.offset >> 3);
      end
      T_GHDR: begin
        mem_valid = 1'b1;
        mem_blk = (e.mtype == M_RMWREQ) ? mk_ctrl(BT_MST, chunk_h) : mk_ctrl(BT_MS, chunk_h);
        if (e.mtype == M_RMWREQ && mem_ready) begin
          wa_en = 1'b1; wa_idx = mst_idx(1'b1, g.peer, g.id); wa_data = '0;
        end
      end
      T_GADDR: begin
        mem_valid = 1'b1;
        mem_blk = mk_mdata(e.raddr + 64'(e.offset));
      end
      T_GDATA: begin
        mem_valid = 1'b1;
        mem_blk = mk_mdata(db_rdata);
        if (mem_ready) begin db_re = 1'b1; db_raddr = rdptr + 1'b1; end
      end
      T_GTAIL: begin
        mem_valid = 1'b1;
        mem_blk = mk_ctrl(BT_MT, chunk_h);
        if (mem_ready) begin
          wa_en = 1'b1; wa_idx = mst_idx(g.mtype == M_RRES, g.peer, g.id);
          wa_data = e; wa_data.offset = e.offset + g.len;
          if (e.offset + g.len >= e.len) begin
            wa_data = '0;
            tx_dec = (g.mtype == M_WREQ);
          end
        end
      end
      default: ;
    endcase
  end
  assign tx_inc   = msg_go;
  assign tx_inc_p = mq_dst;

  // WREQ completion when its last chunk has been sent
  logic tx_done;
  assign tx_done = (ts == T_GTAIL) && mem_ready && (g.mtype == M_WREQ) && (e.offset + g.len >= e.len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; cur <= '0; cur_id <= '0; k <= '0; g <= '0; e <= '0; wleft <= '0; rdptr <= '0;
    end else begin
      case (ts)
        T_IDLE: begin
          if (gq_dvalid) begin
            g <= gq_dout; ts <= T_GMST;
          end else if (msg_go) begin
            // a WREQ notification is a single /N/ block
            cur <= mq_head; cur_id <= next_id[mq_dst]; k <= 3'd1;
            if (mq_head.mtype != M_WREQ) ts <= T_MSG;
          end
        end
        T_MSG: if (mem_ready) begin
          k <= k + 1'b1;
          if (k == msg_last) ts <= T_IDLE;
        end
        T_GMST: begin
          // an RRES waits until its data has been read from memory
          if (ra_data.valid && (g.mtype != M_RRES || ra_data.ready)) begin
            e <= ra_data;
            rdptr <= DW'(ra_data.ptr) + DW'(ra_data.offset >> 3);
            wleft <= nwords(g.len);
            ts <= T_GHDR;
          end
        end
        T_GHDR: if (mem_ready) begin
          if (e.mtype == M_RMWREQ) ts <= T_IDLE;
          else ts <= (g.mtype == M_WREQ) ? T_GADDR : T_GDATA;
        end
        T_GADDR: if (mem_ready) ts <= T_GDATA;
        T_GDATA: if (mem_ready) begin
          rdptr <= rdptr + 1'b1;
          wleft <= wleft - 1'b1;
          if (wleft == LEN_W'(1)) ts <= T_GTAIL;
        end
        T_GTAIL: if (mem_ready) ts <= T_IDLE;
        default: ts <= T_IDLE;
      endcase
    end
  end

  // ================================================================ RX engine
  typedef enum logic [2:0] {R_IDLE, R_CAP, R_WADDR, R_WDATA, R_RDATA} rstate_e;
  rstate_e          rs;
  mhdr_t            rh;
  logic [1:0]       capk;
  logic [63:0]      cap_addr, cap_a1, cap_a2;
  logic [63:0]      waddr;
  logic [LEN_W-1:0] rj;
  logic             mst_pend;
  logic [DW-1:0]    alloc;

  bclass_e rcls;
  mhdr_t   rbody;
  assign rcls  = rxm_valid ? classify(rxm_blk) : C_IDLE;
  assign rbody = mhdr_t'(rxm_blk.payload[55:0]);

  // memory-read jobs of a memory node
  typedef struct packed {
    logic [IW-1:0] idx;
    mst_entry_t    ent;
    logic [63:0]   addr;
    logic          cas;
    logic [63:0]   a1, a2;
  } job_t;
  job_t   job_in, job_head, cpl_head, cur_job;
  logic   job_push, job_pop, job_empty, job_full;
  logic [2:0] job_count, cpl_count;
  logic   cpl_push, cpl_pop, cpl_empty, cpl_full;
  edm_sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(4)) u_jobs (
    .clk, .rst_n, .push(job_push), .din(job_in), .pop(job_pop),
    .dout(job_head), .empty(job_empty), .full(job_full), .count(job_count));
  edm_sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(4)) u_cpl (
    .clk, .rst_n, .push(cpl_push), .din(job_head), .pop(cpl_pop),
    .dout(cpl_head), .empty(cpl_empty), .full(cpl_full), .count(cpl_count));

  // memory-controller request queue
  typedef struct packed {
    mc_op_e      op;
    logic [63:0] addr, wdata, cmp;
    logic [15:0] tag;          // {last word, data buffer pointer}
  } mcreq_t;
  mcreq_t mcq_in, mcq_head;
  logic   mcq_push, mcq_pop, mcq_empty, mcq_full;
  logic [4:0] mcq_count;
  edm_sync_fifo #(.WIDTH($bits(mcreq_t)), .DEPTH(16)) u_mcq (
    .clk, .rst_n, .push(mcq_push), .din(mcq_in), .pop(mcq_pop),
    .dout(mcq_head), .empty(mcq_empty), .full(mcq_full), .count(mcq_count));

  logic        rsp_valid, rsp_cas, rsp_cas_ok, rmw_ready;
  logic [63:0] rsp_data;
  logic [15:0] rsp_tag;
  edm_rmw_unit #(.TAG_W(16), .TAGS(8)) u_rmw (
    .clk, .rst_n, .req_valid(!mcq_empty), .req_ready(rmw_ready), .req_op(mcq_head.op),
    .req_addr(mcq_head.addr), .req_wdata(mcq_head.wdata), .req_cmp(mcq_head.cmp),
    .req_tag(mcq_head.tag), .rsp_valid, .rsp_data, .rsp_tag, .rsp_cas, .rsp_cas_ok,
    .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata);
  assign mcq_pop = !mcq_empty && rmw_ready;

  // RX parse
  logic          wdata_push;
  logic [LEN_W-1:0] iss_j, iss_n;
  logic          iss_busy;
  always_comb begin
    gq_wr = 1'b0; gq_wdata = rbody;
    wb_en = 1'b0; wb_idx = mst_idx(1'b1, rh.peer, rh.id); wb_data = '0;
    job_push = 1'b0; job_in = '0;
    wdata_push = 1'b0;
    rx_dec = 1'b0; rx_dec_p = PW'(rh.peer);
    rb_idx = (rs == R_RDATA || mst_pend) ? mst_idx(1'b0, rh.peer, rh.id)
                                         : mst_idx(1'b0, rbody.peer, rbody.id);
    if (rcls == C_G) gq_wr = 1'b1;
    if (rs == R_CAP && rcls == C_MT) begin
      // whole RREQ / RMWREQ received: it is the grant of the first RRES chunk
      gq_wr = 1'b1;
      gq_wdata = '0; gq_wdata.mtype = M_RRES; gq_wdata.peer = rh.peer; gq_wdata.id = rh.id;
      gq_wdata.len = (rh.mtype == M_RMWREQ) ? LEN_W'(1) :
                     (rh.len > LEN_W'(CHUNK)) ? LEN_W'(CHUNK) : rh.len;
      wb_en = 1'b1;
      wb_data.valid = 1'b1; wb_data.ready = 1'b0;
      wb_data.mtype = (rh.mtype == M_RMWREQ) ? M_RMWREQ : M_RRES;
      wb_data.ptr = 16'(alloc);
      wb_data.len = (rh.mtype == M_RMWREQ) ? LEN_W'(1) : rh.len;
      job_push = 1'b1;
      job_in.idx = wb_idx; job_in.ent = wb_data; job_in.addr = cap_addr;
      job_in.cas = (rh.mtype == M_RMWREQ); job_in.a1 = cap_a1; job_in.a2 = cap_a2;
    end
    if (rs == R_WDATA && rcls == C_MD) wdata_push = 1'b1;
    if (rs == R_RDATA && rcls == C_MT) begin
      wb_en = 1'b1; wb_idx = mst_idx(1'b0, rh.peer, rh.id);
      wb_data = rb_data; wb_data.offset = rb_data.offset + rh.len;
      if (rb_data.offset + rh.len >= rb_data.len) begin
        wb_data = '0; rx_dec = 1'b1;
      end
    end
    if (mst_pend) begin
      wb_en = 1'b1; wb_idx = mst_idx(1'b0, rh.peer, rh.id); wb_data = '0; rx_dec = 1'b1;
    end
  end

  // memory-controller request producers: WREQ data first, then read jobs
  assign job_pop  = !job_empty && !iss_busy && !cpl_full;
  always_comb begin
    mcq_push = 1'b0; mcq_in = '0;
    if (wdata_push) begin
      mcq_push = 1'b1; mcq_in.op = MC_WR; mcq_in.addr = waddr; mcq_in.wdata = rxm_blk.payload;
    end else if (iss_busy && !mcq_full) begin
      mcq_push = 1'b1;
      if (cur_job.cas) begin
        mcq_in.op = MC_CAS; mcq_in.addr = cur_job.addr; mcq_in.cmp = cur_job.a1;
        mcq_in.wdata = cur_job.a2; mcq_in.tag = 16'h8000;
      end else begin
        mcq_in.op = MC_RD; mcq_in.addr = cur_job.addr + 64'(iss_j << 3);
        mcq_in.tag = {(iss_j + 1'b1 == iss_n), 15'(DW'(cur_job.ent.ptr) + DW'(iss_j))};
      end
    end
  end
  assign cpl_push = job_pop;

  // read data into the data buffer; completion marks the table entry ready
  always_comb begin
    db_we = 1'b0; db_waddr = app_dbuf_addr; db_wdata = app_dbuf_wdata;
    wc_en = 1'b0; wc_idx = cpl_head.idx; wc_data = cpl_head.ent;
    cpl_pop = 1'b0;
    if (rsp_valid && !rsp_cas) begin
      db_we = 1'b1; db_waddr = DW'(rsp_tag[14:0]); db_wdata = rsp_data;
    end else if (app_dbuf_we) begin
      db_we = 1'b1;
    end
    if (rsp_valid && (rsp_cas || rsp_tag[15])) begin
      wc_en = 1'b1; cpl_pop = 1'b1;
      wc_data.ready = 1'b1;
      wc_data.aux = {16'd0, rsp_cas && rsp_cas_ok};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; rh <= '0; capk <= '0; cap_addr <= '0; cap_a1 <= '0; cap_a2 <= '0;
      waddr <= '0; rj <= '0; mst_pend <= 1'b0; alloc <= '0;
      iss_busy <= 1'b0; iss_j <= '0; iss_n <= '0; cur_job <= '0;
      lm_we <= 1'b0; lm_addr <= '0; lm_wdata <= '0;
      done_valid <= 1'b0; done_mtype <= M_RRES; done_peer <= '0; done_id <= '0;
    end else begin
      lm_we <= 1'b0;
      done_valid <= 1'b0;
      mst_pend <= 1'b0;
      if (tx_done) begin
        done_valid <= 1'b1; done_mtype <= M_WREQ; done_peer <= g.peer; done_id <= g.id;
      end
      // CAS result (single /MST/ block) at a compute node
      if (mst_pend) begin
        lm_we <= 1'b1; lm_addr <= rb_data.raddr; lm_wdata <= {63'd0, rh.aux[0]};
        done_valid <= 1'b1; done_mtype <= M_RMWREQ; done_peer <= rh.peer; done_id <= rh.id;
      end
      case (rs)
        R_IDLE: begin
          if (rcls == C_MS) begin
            rh <= rbody;
            case (rbody.mtype)
              M_RREQ, M_RMWREQ: begin rs <= R_CAP; capk <= '0; end
              M_WREQ:           rs <= R_WADDR;
              default:          begin rs <= R_RDATA; rj <= '0; end
            endcase
          end else if (rcls == C_MST && rbody.mtype == M_RRES) begin
            rh <= rbody; mst_pend <= 1'b1;
          end
        end
        R_CAP: begin
          if (rcls == C_MD) begin
            capk <= capk + 1'b1;
            if (capk == 2'd0) cap_addr <= rxm_blk.payload;
            if (capk == 2'd1) cap_a1   <= rxm_blk.payload;
            if (capk == 2'd2) cap_a2   <= rxm_blk.payload;
          end else if (rcls == C_MT) begin
            rs <= R_IDLE;
            if (rh.mtype == M_RREQ) alloc <= alloc + DW'(nwords(rh.len));
          end
        end
        R_WADDR: if (rcls == C_MD) begin waddr <= rxm_blk.payload; rs <= R_WDATA; end
        R_WDATA: begin
          if (rcls == C_MD) waddr <= waddr + 64'd8;
          else if (rcls == C_MT) rs <= R_IDLE;
        end
        R_RDATA: begin
          if (rcls == C_MD) begin
            lm_we <= 1'b1;
            lm_addr <= rb_data.raddr + 64'(rb_data.offset) + 64'(rj << 3);
            lm_wdata <= rxm_blk.payload;
            rj <= rj + 1'b1;
          end else if (rcls == C_MT) begin
            rs <= R_IDLE;
            if (rb_data.offset + rh.len >= rb_data.len) begin
              done_valid <= 1'b1; done_mtype <= M_RRES; done_peer <= rh.peer; done_id <= rh.id;
            end
          end
        end
        default: rs <= R_IDLE;
      endcase

      // read-job issuer
      if (job_pop) begin
        cur_job <= job_head; iss_busy <= 1'b1; iss_j <= '0;
        iss_n <= job_head.cas ? LEN_W'(1) : nwords(job_head.ent.len);
      end else if (iss_busy && !wdata_push && !mcq_full) begin
        iss_j <= iss_j + 1'b1;
        if (iss_j + 1'b1 == iss_n) iss_busy <= 1'b0;
      end
    end
  end

  a_no_gq_overflow:  assert property (@(posedge clk) disable iff (!rst_n) gq_wr |-> !gq_full);
  a_no_job_overflow: assert property (@(posedge clk) disable iff (!rst_n) job_push |-> !job_full);
  a_no_mcq_overflow: assert property (@(posedge clk) disable iff (!rst_n) wdata_push |-> !mcq_full);
endmodule
