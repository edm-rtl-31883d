// tb_edm_host_stack: two host stacks driven as the switch would drive them.
// Memory node (port 1, with the memory model):
//   * a 64 B RREQ from port 0 is answered with one RRES chunk (MS, 8 data,
//     MT) carrying the memory words, and peer = 1;
//   * a CAS is answered by a single /MST/ block with the success flag and
//     the memory word is swapped;
//   * a WREQ chunk writes its 8 words into memory.
// Compute node (port 0):
//   * a RREQ from the application leaves as MS, MD(address), MT, its first
//     block 2 cycles after the request was accepted;
//   * a WREQ leaves as a single /N/; a /G/ for it brings out the data chunk
//     (MS, MD address, 8 data, MT) 9 cycles after the /G/ arrives (2 RX +
//     7 TX);
//   * an RRES chunk arriving for the read is written to local memory, the
//     first word 3 cycles after its /MS/, and the read completes.
module tb_edm_host_stack;
  import edm_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  int unsigned cyc = 0; always @(posedge clk) cyc <= cyc + 1;

  // ---- memory node
  blk_t m_tx, m_rx, m_dec;
  logic mc_valid, mc_ready, mc_we, mc_rvalid; logic [63:0] mc_addr, mc_wdata, mc_rdata;
  edm_host_stack u_m (.clk, .rst_n, .my_port(PORT_W'(1)), .req_valid(1'b0), .req('0), .req_ready(),
    .app_dbuf_we(1'b0), .app_dbuf_addr('0), .app_dbuf_wdata('0), .lm_we(), .lm_addr(), .lm_wdata(),
    .done_valid(), .done_mtype(), .done_peer(), .done_id(),
    .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata,
    .enc_valid(1'b0), .enc_blk(idle_blk()), .enc_ready(), .tx_blk(m_tx), .rx_blk(m_rx), .dec_blk(m_dec),
    .preempt(), .rx_overflow(), .x_stall());
  edm_mem_model #(.AW(10), .LATENCY(8)) u_mem (.clk, .rst_n, .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata);

  // ---- compute node
  blk_t c_tx, c_rx, c_dec;
  logic rq_v = 0, rq_r, dbw = 0, lm_we, dn_v; app_req_t rq; logic [9:0] dba = '0; logic [63:0] dbd = '0;
  logic [63:0] lm_addr, lm_wdata; mtype_e dn_t; logic [PORT_W-1:0] dn_p; logic [ID_W-1:0] dn_i;
  edm_host_stack u_c (.clk, .rst_n, .my_port(PORT_W'(0)), .req_valid(rq_v), .req(rq), .req_ready(rq_r),
    .app_dbuf_we(dbw), .app_dbuf_addr(dba), .app_dbuf_wdata(dbd), .lm_we, .lm_addr, .lm_wdata,
    .done_valid(dn_v), .done_mtype(dn_t), .done_peer(dn_p), .done_id(dn_i),
    .mc_valid(), .mc_ready(1'b1), .mc_we(), .mc_addr(), .mc_wdata(), .mc_rvalid(1'b0), .mc_rdata('0),
    .enc_valid(1'b0), .enc_blk(idle_blk()), .enc_ready(), .tx_blk(c_tx), .rx_blk(c_rx), .dec_blk(c_dec),
    .preempt(), .rx_overflow(), .x_stall());

  function automatic blk_t hdr(logic [7:0] bt, mtype_e t, int peer, int id, int len, rmw_op_e op = OP_NONE);
    mhdr_t h;
    h = '0; h.mtype = t; h.peer = PORT_W'(peer); h.id = ID_W'(id); h.len = LEN_W'(len); h.op = op;
    return mk_ctrl(bt, h);
  endfunction
  function automatic mhdr_t hd(blk_t b); mhdr_t h; h = b.payload[55:0]; return h; endfunction

  blk_t mq [$], cq [$]; int unsigned ct [$];
  logic [63:0] lmem [logic [63:0]];
  int unsigned first_lm = 0; bit lm_seen = 0; int n_done = 0; int unsigned acc_t = 0;
  always @(posedge clk) if (rst_n) begin
    if (classify(m_tx) != C_IDLE) mq.push_back(m_tx);
    if (classify(c_tx) != C_IDLE) begin cq.push_back(c_tx); ct.push_back(cyc); end
    if (lm_we) begin lmem[lm_addr] = lm_wdata; if (!lm_seen) begin lm_seen = 1; first_lm = cyc; end end
    if (dn_v) n_done++;
    if (rq_v && rq_r) acc_t = cyc;
  end
  task automatic sendm(blk_t b); m_rx = b; @(negedge clk); m_rx = idle_blk(); endtask
  task automatic sendc(blk_t b); c_rx = b; @(negedge clk); c_rx = idle_blk(); endtask

  initial begin repeat (20000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int unsigned t0;
    m_rx = idle_blk(); c_rx = idle_blk(); rq = '0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 64'h7700_0000_0000_0000 | 64'(i);
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);

    // ---- memory node: RREQ
    sendm(hdr(BT_MS, M_RREQ, 0, 3, 64)); sendm(mk_mdata(64'd16 * 8)); sendm(hdr(BT_MT, M_RREQ, 0, 3, 64));
    repeat (60) @(negedge clk);
    chk(mq.size() == 10, "RRES is one chunk of ten blocks");
    if (mq.size() == 10) begin
      chk(classify(mq[0]) == C_MS && hd(mq[0]).mtype == M_RRES && hd(mq[0]).peer == 1 && hd(mq[0]).id == 3 &&
          hd(mq[0]).len == 64, "RRES header");
      for (int i = 0; i < 8; i++) chk(mq[i+1] == mk_mdata(64'h7700_0000_0000_0000 | 64'(16 + i)), "RRES data");
      chk(classify(mq[9]) == C_MT, "RRES tail");
    end
    mq.delete();
    // ---- memory node: CAS, success then failure
    u_mem.mem[5] = 64'd10;
    sendm(hdr(BT_MS, M_RMWREQ, 0, 4, 8, OP_CAS)); sendm(mk_mdata(64'd5 * 8)); sendm(mk_mdata(64'd10));
    sendm(mk_mdata(64'd20)); sendm(hdr(BT_MT, M_RMWREQ, 0, 4, 8, OP_CAS));
    repeat (60) @(negedge clk);
    chk(mq.size() == 1 && classify(mq[0]) == C_MST && hd(mq[0]).aux[0] == 1'b1, "CAS success on one /MST/");
    chk(u_mem.mem[5] == 64'd20, "CAS swapped");
    mq.delete();
    sendm(hdr(BT_MS, M_RMWREQ, 0, 5, 8, OP_CAS)); sendm(mk_mdata(64'd5 * 8)); sendm(mk_mdata(64'd10));
    sendm(mk_mdata(64'd30)); sendm(hdr(BT_MT, M_RMWREQ, 0, 5, 8, OP_CAS));
    repeat (60) @(negedge clk);
    chk(mq.size() == 1 && classify(mq[0]) == C_MST && hd(mq[0]).aux[0] == 1'b0, "CAS failure on one /MST/");
    chk(u_mem.mem[5] == 64'd20, "failed CAS left memory");
    mq.delete();
    // ---- memory node: WREQ chunk
    sendm(hdr(BT_MS, M_WREQ, 0, 6, 64)); sendm(mk_mdata(64'd100 * 8));
    for (int i = 0; i < 8; i++) sendm(mk_mdata(64'hAB00 + 64'(i)));
    sendm(hdr(BT_MT, M_WREQ, 0, 6, 64));
    repeat (30) @(negedge clk);
    begin
      int bad; bad = 0;
      for (int i = 0; i < 8; i++) if (u_mem.mem[100 + i] != 64'hAB00 + 64'(i)) bad++;
      chk(bad == 0, "WREQ chunk written to memory");
    end
    chk(mq.size() == 0, "memory node sends nothing for a write");

    // ---- compute node: RREQ
    rq = '0; rq.mtype = M_RREQ; rq.dst = PORT_W'(1); rq.len = 16'd64; rq.raddr = 64'h40; rq.laddr = 64'h9000;
    rq_v = 1; @(negedge clk); rq_v = 0;
    repeat (10) @(negedge clk);
    chk(cq.size() == 3, "RREQ is three blocks");
    if (cq.size() == 3) begin
      chk(classify(cq[0]) == C_MS && hd(cq[0]).mtype == M_RREQ && hd(cq[0]).peer == 1, "RREQ header");
      chk(cq[1] == mk_mdata(64'h40) && classify(cq[2]) == C_MT, "RREQ address and tail");
      $display("compute TX of RREQ: %0d cycles", ct[0] - acc_t);
      chk(ct[0] - acc_t == 2, "RREQ first block 2 cycles after acceptance");
    end
    // its RRES (id 0)
    t0 = cyc;
    sendc(hdr(BT_MS, M_RRES, 1, int'(hd(cq[0]).id), 64));
    for (int i = 0; i < 8; i++) sendc(mk_mdata(64'h5500 + 64'(i)));
    sendc(hdr(BT_MT, M_RRES, 1, int'(hd(cq[0]).id), 64));
    repeat (10) @(negedge clk);
    begin
      int bad; bad = 0;
      for (int i = 0; i < 8; i++) if (!lmem.exists(64'h9000 + 64'(8*i)) || lmem[64'h9000 + 64'(8*i)] != 64'h5500 + 64'(i)) bad++;
      chk(bad == 0, "RRES data in local memory");
    end
    $display("compute RX of RRES: %0d cycles", first_lm - t0);
    chk(first_lm - t0 == 3, "first RRES word written 3 cycles after /MS/");
    chk(n_done == 1, "read completed");
    cq.delete(); ct.delete();

    // ---- compute node: WREQ, /G/, chunk
    for (int i = 0; i < 8; i++) begin dbw = 1; dba = 10'(64 + i); dbd = 64'hCC00 + 64'(i); @(negedge clk); end
    dbw = 0;
    rq = '0; rq.mtype = M_WREQ; rq.dst = PORT_W'(1); rq.len = 16'd64; rq.raddr = 64'h800; rq.laddr = 64'd64;
    rq_v = 1; @(negedge clk); rq_v = 0;
    repeat (10) @(negedge clk);
    chk(cq.size() == 1 && classify(cq[0]) == C_N && hd(cq[0]).mtype == M_WREQ && hd(cq[0]).len == 64, "WREQ notification");
    if (cq.size() == 1) begin
      int id;
      id = int'(hd(cq[0]).id);
      cq.delete(); ct.delete();
      t0 = cyc;
      sendc(hdr(BT_G, M_WREQ, 1, id, 64));
      repeat (30) @(negedge clk);
      chk(cq.size() == 11, "WREQ chunk is eleven blocks");
      if (cq.size() == 11) begin
        chk(classify(cq[0]) == C_MS && hd(cq[0]).peer == 0 && hd(cq[0]).mtype == M_WREQ, "chunk header");
        chk(cq[1] == mk_mdata(64'h800), "chunk address");
        for (int i = 0; i < 8; i++) chk(cq[i+2] == mk_mdata(64'hCC00 + 64'(i)), "chunk data");
        chk(classify(cq[10]) == C_MT, "chunk tail");
        $display("compute /G/ in to chunk out: %0d cycles", ct[0] - t0);
        chk(ct[0] - t0 == 9, "chunk 9 cycles after the grant (2 RX + 7 TX)");
      end
      chk(n_done == 2, "write completed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
