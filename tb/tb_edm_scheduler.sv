// tb_edm_scheduler: four-port scheduler, SRPT and FCFS instances.
//  * Latency: one notification into an idle scheduler is granted 3 to 5
//    cycles later (one PIM iteration of 3 cycles plus alignment).
//  * Policy: while port 3 sends 2 KB to port 2, writes of 1024 B from port 0
//    and then 64 B from port 1 queue for port 2; SRPT grants port 1 before
//    port 0, FCFS port 0 before port 1.
//  * Read: a 1 KB RREQ gives first a forward-request grant, then three RRES
//    grants of 256 B to the memory port; a CAS gives one forward grant only.
//  * Random traffic (at most X outstanding per pair): for every grant, no two
//    grants of a cycle go to one destination, a source or destination is not
//    granted again before the previous chunk's blocks have been sent, chunks
//    are min(CHUNK, remaining), messages of a pair are granted in order and
//    every message is granted in full.
module tb_edm_scheduler;
  import edm_pkg::*;
  localparam int N = 4, X = 3, CHUNK = 256;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  int unsigned cyc = 0; always @(posedge clk) cyc <= cyc + 1;

  logic [N-1:0] nv; notif_t nt [N];
  logic [N-1:0] gv_s, gv_f; grant_t g_s [N], g_f [N];
  logic   ov_s, ov_f, id_s, id_f;
  logic [N-1:0] sb_s, db_s, sb_f, db_f;
  edm_scheduler #(.N_PORTS(N), .X(X), .CHUNK(CHUNK), .POLICY(POL_SRPT)) u_srpt (
    .clk, .rst_n, .notif_valid(nv), .notif(nt), .port_disable('0), .grant_valid(gv_s), .grant(g_s),
    .overflow(ov_s), .src_busy(sb_s), .dst_busy(db_s), .iter_done(id_s));
  edm_scheduler #(.N_PORTS(N), .X(X), .CHUNK(CHUNK), .POLICY(POL_FCFS)) u_fcfs (
    .clk, .rst_n, .notif_valid(nv), .notif(nt), .port_disable('0), .grant_valid(gv_f), .grant(g_f),
    .overflow(ov_f), .src_busy(sb_f), .dst_busy(db_f), .iter_done(id_f));

  // ---- per-message bookkeeping for the SRPT instance, keyed by {data src, data dst, id}
  typedef struct { int total; int granted; bit is_read; bit cas; bit fwd_seen; int order; } msg_t;
  msg_t msgs [int];
  int   outstanding [N][N];            // messages of a pair not yet fully granted
  int   next_order  [N][N];            // order check within a pair
  int   done_order  [N][N];
  int unsigned src_free [N], dst_free [N];
  int   n_grants = 0;
  function automatic int key(int s, int d, int id); return (s << 16) | (d << 8) | id; endfunction
  function automatic int blocks(mtype_e t, bit cas, int l);
    if (cas) return 1;
    return (l + 7) / 8 + ((t == M_WREQ) ? 3 : 2);
  endfunction

  bit random_phase = 0;
  always @(posedge clk) if (rst_n && random_phase) begin
    for (int s = 0; s < N; s++) if (gv_s[s]) begin
      int d, k, l;
      bit rd;
      d = int'(g_s[s].peer);
      rd = (g_s[s].mtype != M_WREQ);
      k = key(s, d, int'(g_s[s].id));
      n_grants++;
      for (int t = s + 1; t < N; t++) chk(!(gv_s[t] && g_s[t].peer == g_s[s].peer), "one grant per destination");
      chk(cyc >= src_free[s], "source not granted while busy");
      chk(cyc >= dst_free[d], "destination not granted while busy");
      chk(msgs.exists(k), "grant for a known message");
      if (msgs.exists(k)) begin
        msg_t m;
        m = msgs[k];
        chk(m.order == done_order[s][d], "pair order kept");
        if (m.is_read && !m.fwd_seen) begin
          chk(g_s[s].mtype == (m.cas ? M_RMWREQ : M_RREQ), "first grant of a read forwards the request");
          m.fwd_seen = 1;
        end else chk(g_s[s].mtype == (m.is_read ? M_RRES : M_WREQ), "grant type");
        l = (m.total - m.granted > CHUNK) ? CHUNK : m.total - m.granted;
        if (m.is_read && g_s[s].mtype == M_RRES) chk(int'(g_s[s].len) == l, "chunk size");
        if (!m.is_read) chk(int'(g_s[s].len) == l, "chunk size");
        m.granted += l;
        src_free[s] = cyc + 1 + blocks(m.is_read ? M_RRES : M_WREQ, m.cas, l);
        dst_free[d] = cyc + 1 + blocks(m.is_read ? M_RRES : M_WREQ, m.cas, l);
        if (m.granted >= m.total) begin
          msgs.delete(k); outstanding[s][d]--; done_order[s][d]++;
        end else msgs[k] = m;
      end
    end
  end

  task automatic notify(int port, mtype_e t, int dst, int id, int len, rmw_op_e op = OP_NONE);
    nt[port] = '0; nt[port].mtype = t; nt[port].dst = PORT_W'(dst); nt[port].id = ID_W'(id);
    nt[port].len = LEN_W'(len); nt[port].op = op; nt[port].addr = 64'(id);
    nv[port] = 1;
  endtask
  task automatic clear(); for (int i = 0; i < N; i++) nv[i] = 0; endtask

  initial begin repeat (100000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int ids [N][N];
    clear();
    for (int i = 0; i < N; i++) begin nt[i] = '0; src_free[i] = 0; dst_free[i] = 0; end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      outstanding[i][j] = 0; next_order[i][j] = 0; done_order[i][j] = 0; ids[i][j] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- latency
    @(negedge clk); notify(0, M_WREQ, 1, 0, 64);
    @(negedge clk); clear();
    begin
      int n;
      n = 0;
      while (!gv_s[0] && n < 10) begin n++; @(negedge clk); end
      // n = clock edges after the notification edge until the grant is shown
      $display("notification to grant: %0d cycles", n + 1);
      chk(n + 1 >= 3 && n + 1 <= 5, "grant 3..5 cycles after notification");
      chk(g_s[0].mtype == M_WREQ && g_s[0].peer == 1 && g_s[0].len == 64, "grant fields");
    end
    repeat (20) @(negedge clk);

    // ---- policy
    begin
      int first_s, first_f;
      first_s = -1; first_f = -1;
      // port 3 keeps destination 2 busy while the two writes queue up
      @(negedge clk); notify(3, M_WREQ, 2, 1, 2048);
      @(negedge clk); clear(); notify(0, M_WREQ, 2, 1, 1024);
      @(negedge clk); clear(); notify(1, M_WREQ, 2, 1, 64);
      @(negedge clk); clear();
      for (int t = 0; t < 800; t++) begin
        for (int s = 0; s < 2; s++) begin
          if (gv_s[s] && first_s < 0) first_s = s;
          if (gv_f[s] && first_f < 0) first_f = s;
        end
        @(negedge clk);
      end
      chk(first_s == 1, "SRPT grants the shorter message first");
      chk(first_f == 0, "FCFS grants the older message first");
      repeat (100) @(negedge clk);
    end

    // ---- read: forward grant then RRES chunks to the memory port 3, data to port 0
    begin
      int nfwd, nres, bytes, ncas;
      nfwd = 0; nres = 0; bytes = 0; ncas = 0;
      @(negedge clk); notify(0, M_RREQ, 3, 5, 1024);
      @(negedge clk); clear();
      for (int t = 0; t < 400; t++) begin
        if (gv_s[3]) begin
          chk(g_s[3].peer == 0 && g_s[3].id == 5, "read grant to memory port for compute port");
          if (g_s[3].mtype == M_RREQ) begin nfwd++; chk(g_s[3].len == 1024, "forwarded length"); bytes += CHUNK; end
          if (g_s[3].mtype == M_RRES) begin nres++; chk(g_s[3].len == CHUNK, "RRES chunk"); bytes += int'(g_s[3].len); end
        end
        @(negedge clk);
      end
      chk(nfwd == 1 && nres == 3 && bytes == 1024, "1 KB read = forward + 3 RRES chunks");
      @(negedge clk); notify(1, M_RMWREQ, 3, 6, 8, OP_CAS);
      @(negedge clk); clear();
      for (int t = 0; t < 40; t++) begin
        if (gv_s[3]) begin chk(g_s[3].mtype == M_RMWREQ && g_s[3].peer == 1, "CAS forward grant"); ncas++; end
        @(negedge clk);
      end
      chk(ncas == 1, "CAS granted once");
    end

    // ---- random traffic
    random_phase = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear();
      for (int p = 0; p < N; p++) if ($urandom_range(0, 9) == 0) begin
        int d, r, len, s_, d_;
        mtype_e ty;
        d = $urandom_range(0, N - 2); if (d >= p) d++;
        r = $urandom_range(0, 9);
        ty = (r < 5) ? M_WREQ : (r < 9) ? M_RREQ : M_RMWREQ;
        len = (ty == M_RMWREQ) ? 8 : 8 * $urandom_range(1, 160);
        // data source and destination of the message
        s_ = (ty == M_WREQ) ? p : d; d_ = (ty == M_WREQ) ? d : p;
        if (outstanding[s_][d_] < X) begin
          msg_t m;
          m.total = (ty == M_RMWREQ) ? 1 : len; m.granted = 0; m.is_read = (ty != M_WREQ);
          m.cas = (ty == M_RMWREQ); m.fwd_seen = 0; m.order = next_order[s_][d_];
          msgs[key(s_, d_, ids[s_][d_])] = m;
          notify(p, ty, d, ids[s_][d_], len, ty == M_RMWREQ ? OP_CAS : OP_NONE);
          ids[s_][d_] = (ids[s_][d_] + 1) % 256;
          outstanding[s_][d_]++; next_order[s_][d_]++;
        end
      end
    end
    @(negedge clk) clear();
    repeat (2000) @(negedge clk);
    chk(msgs.size() == 0, "every message granted in full");
    chk(!ov_s, "no overflow");
    $display("random phase grants: %0d", n_grants);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
