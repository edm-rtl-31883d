// edm_scheduler: the in-network memory traffic scheduler of the EDM switch.
//
// Demand.  A WREQ is announced by an /N/ notification; an RREQ or RMWREQ is
// itself the notification for its read response (RRES), whose size is the
// number of bytes to read (one byte, sent as a single /MST/ block, for a
// compare-and-swap result).  The scheduler keeps one notification queue per
// destination port d.  Each queue is bounded to X*N entries (X active
// notifications per source-destination pair), and here it is organised as
// N in-order lists of X slots, one per source, so that all N ports can insert
// in the same cycle and messages of one pair stay in order.
//
// Grant.  Priority-based Parallel Iterative Matching, one iteration every 3
// cycles, as in the text:
//   cycle 1 (REQ)    every free destination d picks, among the pair heads of
//                    its queue whose source is free, the one with the best
//                    priority, and requests that source;
//   cycle 2 (GRANT)  every source s picks, among the destinations requesting
//                    it, the one with the best priority;
//   cycle 3 (COMMIT) for each match the grant for a chunk of
//                    l = min(CHUNK, remaining) bytes is issued, remaining is
//                    decremented (the message leaves its queue at 0), and s
//                    and d are marked busy.
// Priority is the remaining byte count (SRPT, smaller first) or the arrival
// time (FCFS); ties go to the lower port number.  SRPT is applied only
// across pairs: within a pair the oldest message always goes first, which
// keeps delivery in order.  A busy source or destination becomes free again
// when the chunk's transmission time has passed since its grant (the chunk's
// block count on the 64-bit data path: header, address for a WREQ, data,
// and tail), so the next chunk can follow back to back.
//
// Where this differs from the text: the text keeps each queue as a hardware
// ordered list and, per source, an ordered array of destinations read through
// a priority encoder.  This design reaches the same 1-cycle decisions with
// all-pairs priority comparisons among the N candidates of each stage, which
// also takes constant time but O(N^2) comparators.  A disabled port (link
// found corrupt) is never matched.  Notifications beyond X per pair are
// dropped and reported on overflow.
// Timing: a notification presented at edge 0 is stored at edge 0; the grant
// is on grant_valid/grant in the COMMIT cycle of the first whole iteration
// that starts after it, i.e. 3 to 5 cycles later (combinational outputs of
// that cycle).
module edm_scheduler
  import edm_pkg::*;
#(
  parameter int      N_PORTS = 2,
  parameter int      X       = 3,
  parameter int      CHUNK   = 256,
  parameter policy_e POLICY  = POL_SRPT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   [N_PORTS-1:0] notif_valid,
  input  notif_t notif [N_PORTS],
  input  logic   [N_PORTS-1:0] port_disable,
  output logic   [N_PORTS-1:0] grant_valid,
  output grant_t grant [N_PORTS],
  output logic   overflow,
  output logic   [N_PORTS-1:0] src_busy,
  output logic   [N_PORTS-1:0] dst_busy,
  output logic   iter_done        // pulses in each COMMIT cycle
);
  localparam int PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;
  localparam int CW = $clog2(X + 1);

  typedef struct packed {
    mtype_e            mtype;     // M_WREQ or M_RRES
    logic              first;     // RRES whose request has not been forwarded yet
    logic [ID_W-1:0]   id;
    logic [LEN_W-1:0]  rem;
    logic [LEN_W-1:0]  total;
    logic [31:0]       ts;
    rmw_op_e           op;
    logic [63:0]       addr, arg1, arg2;
  } slot_t;

  slot_t          slots [N_PORTS][N_PORTS][X];   // [dst][src][k], k = 0 is the head
  logic [CW-1:0]  cnt   [N_PORTS][N_PORTS];
  logic [31:0]    now;
  logic [1:0]     phase;
  logic [15:0]    stimer [N_PORTS];
  logic [15:0]    dtimer [N_PORTS];

  // ---------------------------------------------------------------- insert
  // mapping of an incoming notification to (queue, pair source)
  logic [PW-1:0] ins_q [N_PORTS];
  logic [PW-1:0] ins_s [N_PORTS];
  slot_t         ins_e [N_PORTS];
  always_comb begin
    for (int i = 0; i < N_PORTS; i++) begin
      ins_e[i] = '0;
      ins_e[i].id = notif[i].id; ins_e[i].ts = now; ins_e[i].op = notif[i].op;
      ins_e[i].addr = notif[i].addr; ins_e[i].arg1 = notif[i].arg1; ins_e[i].arg2 = notif[i].arg2;
      ins_e[i].total = notif[i].len;
      if (notif[i].mtype == M_WREQ) begin
        ins_q[i] = PW'(notif[i].dst); ins_s[i] = PW'(i);
        ins_e[i].mtype = M_WREQ; ins_e[i].first = 1'b0; ins_e[i].rem = notif[i].len;
      end else begin
        // RREQ/RMWREQ from compute node i to memory node dst: the demand is the
        // RRES from dst to i
        ins_q[i] = PW'(i); ins_s[i] = PW'(notif[i].dst);
        ins_e[i].mtype = M_RRES; ins_e[i].first = 1'b1;
        ins_e[i].rem = (notif[i].mtype == M_RMWREQ) ? LEN_W'(1) : notif[i].len;
        if (notif[i].mtype == M_RMWREQ) ins_e[i].total = LEN_W'(1);
      end
    end
  end

  // ---------------------------------------------------------------- REQ
  function automatic logic [31:0] prio(slot_t e);
    return (POLICY == POL_SRPT) ? 32'(e.rem) : e.ts;
  endfunction

  logic          cand  [N_PORTS][N_PORTS];   // [d][s]
  logic          req_v_n [N_PORTS];
  logic [PW-1:0] req_s_n [N_PORTS];
  logic [31:0]   req_p_n [N_PORTS];
  always_comb begin
    for (int d = 0; d < N_PORTS; d++) begin
      for (int s = 0; s < N_PORTS; s++)
        cand[d][s] = (cnt[d][s] != 0) && !src_busy[s] && !dst_busy[d] &&
                     !port_disable[s] && !port_disable[d];
      req_v_n[d] = 1'b0; req_s_n[d] = '0; req_p_n[d] = '0;
      for (int s = 0; s < N_PORTS; s++) begin
        logic best;
        best = cand[d][s];
        for (int t = 0; t < N_PORTS; t++) begin
          if (t != s && cand[d][t]) begin
            if (prio(slots[d][t][0]) < prio(slots[d][s][0])) best = 1'b0;
            if (prio(slots[d][t][0]) == prio(slots[d][s][0]) && t < s) best = 1'b0;
          end
        end
        if (best) begin
          req_v_n[d] = 1'b1; req_s_n[d] = PW'(s); req_p_n[d] = prio(slots[d][s][0]);
        end
      end
    end
  end

  logic          req_v [N_PORTS];
  logic [PW-1:0] req_s [N_PORTS];
  logic [31:0]   req_p [N_PORTS];

  // ---------------------------------------------------------------- GRANT
  logic          win_v_n [N_PORTS];
  logic [PW-1:0] win_d_n [N_PORTS];
  always_comb begin
    for (int s = 0; s < N_PORTS; s++) begin
      win_v_n[s] = 1'b0; win_d_n[s] = '0;
      for (int d = 0; d < N_PORTS; d++) begin
        logic best;
        best = req_v[d] && (req_s[d] == PW'(s));
        for (int e = 0; e < N_PORTS; e++) begin
          if (e != d && req_v[e] && req_s[e] == PW'(s)) begin
            if (req_p[e] < req_p[d]) best = 1'b0;
            if (req_p[e] == req_p[d] && e < d) best = 1'b0;
          end
        end
        if (best) begin win_v_n[s] = 1'b1; win_d_n[s] = PW'(d); end
      end
    end
  end

  logic          win_v [N_PORTS];
  logic [PW-1:0] win_d [N_PORTS];

  // ---------------------------------------------------------------- COMMIT
  logic [LEN_W-1:0] chunk_l [N_PORTS];
  logic [15:0]      busy_t  [N_PORTS];
  always_comb begin
    for (int s = 0; s < N_PORTS; s++) begin
      slot_t h;
      h = slots[win_d[s]][s][0];
      grant_valid[s] = (phase == 2'd2) && win_v[s];
      chunk_l[s] = (h.rem > LEN_W'(CHUNK)) ? LEN_W'(CHUNK) : h.rem;
      grant[s].peer = PORT_W'(win_d[s]);
      grant[s].id   = h.id;
      grant[s].op   = h.op;
      grant[s].addr = h.addr;
      grant[s].arg1 = h.arg1;
      grant[s].arg2 = h.arg2;
      if (h.first) begin
        grant[s].mtype = (h.op == OP_CAS) ? M_RMWREQ : M_RREQ;
        grant[s].len   = (h.op == OP_CAS) ? LEN_W'(WORD_B) : h.total;
      end else begin
        grant[s].mtype = h.mtype;
        grant[s].len   = chunk_l[s];
      end
      // blocks the chunk occupies on the data link
      if (h.mtype == M_RRES && h.op == OP_CAS) busy_t[s] = 16'd1;
      else busy_t[s] = 16'(nwords(chunk_l[s])) + ((h.mtype == M_WREQ) ? 16'd3 : 16'd2);
    end
  end
  assign iter_done = (phase == 2'd2);

  // ---------------------------------------------------------------- per-pair update
  logic          pair_deq  [N_PORTS][N_PORTS];
  logic          pair_upd  [N_PORTS][N_PORTS];
  logic          pair_ins  [N_PORTS][N_PORTS];
  logic          pair_room [N_PORTS][N_PORTS];
  logic [CW-1:0] pair_pos  [N_PORTS][N_PORTS];
  logic [CW-1:0] pair_cnt  [N_PORTS][N_PORTS];
  slot_t         pair_head [N_PORTS][N_PORTS];
  slot_t         pair_new  [N_PORTS][N_PORTS];
  always_comb begin
    for (int d = 0; d < N_PORTS; d++) begin
      for (int s = 0; s < N_PORTS; s++) begin
        int c;
        pair_deq[d][s] = 1'b0; pair_upd[d][s] = 1'b0; pair_ins[d][s] = 1'b0;
        pair_head[d][s] = slots[d][s][0]; pair_new[d][s] = '0;
        if (phase == 2'd2 && win_v[s] && win_d[s] == PW'(d)) begin
          pair_upd[d][s] = 1'b1;
          pair_head[d][s].first = 1'b0;
          pair_head[d][s].rem   = slots[d][s][0].rem - chunk_l[s];
          if (slots[d][s][0].rem == chunk_l[s]) pair_deq[d][s] = 1'b1;
        end
        for (int i = 0; i < N_PORTS; i++)
          if (notif_valid[i] && ins_q[i] == PW'(d) && ins_s[i] == PW'(s)) begin
            pair_ins[d][s] = 1'b1; pair_new[d][s] = ins_e[i];
          end
        c = int'(cnt[d][s]) - (pair_deq[d][s] ? 1 : 0);
        pair_room[d][s] = (c < X);
        pair_pos[d][s]  = CW'(c);
        if (pair_ins[d][s] && c < X) c = c + 1;
        pair_cnt[d][s]  = CW'(c);
      end
    end
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0; phase <= '0; overflow <= 1'b0;
      for (int i = 0; i < N_PORTS; i++) begin
        src_busy[i] <= 1'b0; dst_busy[i] <= 1'b0; stimer[i] <= '0; dtimer[i] <= '0;
        req_v[i] <= 1'b0; req_s[i] <= '0; req_p[i] <= '0; win_v[i] <= 1'b0; win_d[i] <= '0;
        for (int j = 0; j < N_PORTS; j++) begin
          cnt[i][j] <= '0;
          for (int k = 0; k < X; k++) slots[i][j][k] <= '0;
        end
      end
    end else begin
      now      <= now + 1;
      phase    <= (phase == 2'd2) ? 2'd0 : phase + 2'd1;
      overflow <= 1'b0;

      // busy timers
      for (int i = 0; i < N_PORTS; i++) begin
        if (stimer[i] > 16'd1) stimer[i] <= stimer[i] - 16'd1;
        else if (stimer[i] == 16'd1) begin stimer[i] <= '0; src_busy[i] <= 1'b0; end
        if (dtimer[i] > 16'd1) dtimer[i] <= dtimer[i] - 16'd1;
        else if (dtimer[i] == 16'd1) begin dtimer[i] <= '0; dst_busy[i] <= 1'b0; end
      end

      if (phase == 2'd0) begin
        for (int d = 0; d < N_PORTS; d++) begin
          req_v[d] <= req_v_n[d]; req_s[d] <= req_s_n[d]; req_p[d] <= req_p_n[d];
        end
      end
      if (phase == 2'd1) begin
        for (int s = 0; s < N_PORTS; s++) begin win_v[s] <= win_v_n[s]; win_d[s] <= win_d_n[s]; end
      end

      // COMMIT and insert share the slot arrays (pair state from pair_*)
      for (int d = 0; d < N_PORTS; d++) begin
        for (int s = 0; s < N_PORTS; s++) begin
          if (pair_deq[d][s]) begin
            for (int k = 0; k < X - 1; k++) slots[d][s][k] <= slots[d][s][k+1];
          end else if (pair_upd[d][s]) begin
            slots[d][s][0] <= pair_head[d][s];
          end
          if (pair_ins[d][s]) begin
            if (pair_room[d][s]) slots[d][s][pair_pos[d][s]] <= pair_new[d][s];
            else overflow <= 1'b1;
          end
          cnt[d][s] <= pair_cnt[d][s];
        end
      end

      if (phase == 2'd2) begin
        for (int s = 0; s < N_PORTS; s++) begin
          if (win_v[s]) begin
            src_busy[s] <= 1'b1; stimer[s] <= busy_t[s];
            dst_busy[win_d[s]] <= 1'b1; dtimer[win_d[s]] <= busy_t[s];
          end
        end
      end
    end
  end

  // matching: no two grants of one iteration go to the same destination
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < N_PORTS; s++)
        for (int t = s + 1; t < N_PORTS; t++)
          a_match: assert (!(grant_valid[s] && grant_valid[t] && grant[s].peer == grant[t].peer));
    end
  end
endmodule
