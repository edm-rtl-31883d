// tb_edm_switch: the two-port switch stack driven directly with blocks as
// the hosts would send them (port 0 compute node, port 1 memory node).
//  1. RREQ on port 0: it must leave port 1 with the compute node as peer, the
//     same address, 6..8 cycles after its /MT/ arrived (1 RX + 5 TX + up to 2
//     for the scheduling round).
//  2. The memory node's 64 B RRES chunk on port 1 is forwarded to port 0,
//     block for block, 5 cycles after arrival (1 RX + 4 TX).
//  3. /N/ on port 0 is answered by a /G/ on port 0; the WREQ chunk that
//     follows is forwarded to port 1 in 5 cycles.
//  4. A non-memory frame entering port 0 with memory blocks inside it leaves
//     on dec_blk[0] whole and in consecutive cycles.
module tb_edm_switch;
  import edm_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  int unsigned cyc = 0; always @(posedge clk) cyc <= cyc + 1;
  blk_t rx [2], tx [2], eb [2], db [2];
  logic [1:0] ev = '0, er, gi, pre; logic ovf, itd;
  edm_switch dut (.clk, .rst_n, .rx_blk(rx), .tx_blk(tx), .enc_valid(ev), .enc_blk(eb), .enc_ready(er),
    .dec_blk(db), .port_disable(2'b00), .grant_issued(gi), .preempt(pre), .sched_overflow(ovf), .iter_done(itd));

  function automatic blk_t hdr(logic [7:0] bt, mtype_e t, int peer, int id, int len, rmw_op_e op = OP_NONE);
    mhdr_t h;
    h = '0; h.mtype = t; h.peer = PORT_W'(peer); h.id = ID_W'(id); h.len = LEN_W'(len); h.op = op;
    return mk_ctrl(bt, h);
  endfunction
  function automatic mhdr_t hd(blk_t b); mhdr_t h; h = b.payload[55:0]; return h; endfunction

  // output capture per port: non-idle blocks with their cycle
  blk_t oq [2][$]; int unsigned ot [2][$];
  always @(posedge clk) if (rst_n) for (int p = 0; p < 2; p++)
    if (classify(tx[p]) != C_IDLE) begin oq[p].push_back(tx[p]); ot[p].push_back(cyc); end
  int unsigned in_t;
  task automatic send(int p, blk_t b);
    rx[p] = b; @(negedge clk); rx[p] = idle_blk();
  endtask
  task automatic clear_q(); for (int p = 0; p < 2; p++) begin oq[p].delete(); ot[p].delete(); end endtask

  // decoder-side frame check
  localparam int FL = 10;
  blk_t frame [FL];
  int fpos = 0, ferr = 0, fdone = 0;
  always @(posedge clk) if (rst_n) begin
    if (classify(db[0]) == C_NONMEM) begin
      if (db[0] != frame[fpos]) ferr++;
      fpos++;
      if (fpos == FL) begin fpos = 0; fdone++; end
    end else if (fpos != 0) ferr++;
  end

  initial begin repeat (20000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int p = 0; p < 2; p++) begin rx[p] = idle_blk(); eb[p] = idle_blk(); end
    frame[0] = '{sync: SYNC_CTRL, payload: {BT_S0, 56'h55_5555_5555_55D5}};
    for (int i = 1; i < FL - 1; i++) frame[i] = '{sync: SYNC_DATA, payload: 64'hFACE_0000_0000_0000 | 64'(i)};
    frame[FL-1] = '{sync: SYNC_CTRL, payload: {BT_T0, 56'd0}};
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);

    // ---- 1. RREQ compute -> memory
    clear_q();
    send(0, hdr(BT_MS, M_RREQ, 1, 7, 64));
    send(0, mk_mdata(64'h1000));
    in_t = cyc;                      // the /MT/ is sampled at the next edge
    send(0, hdr(BT_MT, M_RREQ, 1, 7, 64));
    repeat (20) @(negedge clk);
    chk(oq[1].size() == 3, "forwarded RREQ is three blocks");
    if (oq[1].size() == 3) begin
      chk(classify(oq[1][0]) == C_MS && hd(oq[1][0]).mtype == M_RREQ && hd(oq[1][0]).peer == 0 &&
          hd(oq[1][0]).id == 7 && hd(oq[1][0]).len == 64, "forwarded RREQ header");
      chk(oq[1][1] == mk_mdata(64'h1000), "forwarded RREQ address");
      chk(classify(oq[1][2]) == C_MT, "forwarded RREQ tail");
      $display("RREQ /MT/ in to /MS/ out: %0d cycles", ot[1][0] - in_t);
      chk(ot[1][0] - in_t >= 6 && ot[1][0] - in_t <= 8, "RREQ through the switch in 6..8 cycles");
    end
    chk(oq[0].size() == 0, "nothing sent to the compute port");

    // ---- 2. RRES memory -> compute
    clear_q();
    in_t = cyc;
    send(1, hdr(BT_MS, M_RRES, 1, 7, 64));
    for (int i = 0; i < 8; i++) send(1, mk_mdata(64'hD0 + 64'(i)));
    send(1, hdr(BT_MT, M_RRES, 1, 7, 64));
    repeat (20) @(negedge clk);
    chk(oq[0].size() == 10, "forwarded RRES is ten blocks");
    if (oq[0].size() == 10) begin
      chk(classify(oq[0][0]) == C_MS && hd(oq[0][0]).mtype == M_RRES, "RRES header");
      for (int i = 0; i < 8; i++) chk(oq[0][i+1] == mk_mdata(64'hD0 + 64'(i)), "RRES data");
      chk(classify(oq[0][9]) == C_MT, "RRES tail");
      $display("RRES forwarding: %0d cycles", ot[0][0] - in_t);
      chk(ot[0][0] - in_t == 5, "RRES forwarded in 1 + 4 cycles");
    end

    // ---- 3. WREQ notify, grant, data
    clear_q();
    send(0, hdr(BT_N, M_WREQ, 1, 9, 64));
    repeat (20) @(negedge clk);
    chk(oq[0].size() == 1 && classify(oq[0][0]) == C_G && hd(oq[0][0]).mtype == M_WREQ &&
        hd(oq[0][0]).id == 9 && hd(oq[0][0]).len == 64 && hd(oq[0][0]).peer == 1, "grant for the WREQ");
    clear_q();
    in_t = cyc;
    send(0, hdr(BT_MS, M_WREQ, 0, 9, 64));
    send(0, mk_mdata(64'h2000));
    for (int i = 0; i < 8; i++) send(0, mk_mdata(64'hE0 + 64'(i)));
    send(0, hdr(BT_MT, M_WREQ, 0, 9, 64));
    repeat (20) @(negedge clk);
    chk(oq[1].size() == 11, "forwarded WREQ chunk is eleven blocks");
    if (oq[1].size() == 11) begin
      chk(oq[1][1] == mk_mdata(64'h2000) && oq[1][2] == mk_mdata(64'hE0), "WREQ address and data");
      chk(ot[1][0] - in_t == 5, "WREQ forwarded in 1 + 4 cycles");
    end

    // ---- 4. frame with memory blocks inside
    clear_q();
    for (int i = 0; i < FL; i++) begin
      send(0, frame[i]);
      if (i == 3) send(0, hdr(BT_N, M_WREQ, 1, 10, 8));
    end
    repeat (40) @(negedge clk);
    chk(fdone == 1 && ferr == 0, "frame delivered whole and consecutive");
    chk(oq[0].size() == 1 && classify(oq[0][0]) == C_G, "notification inside the frame granted");
    chk(!ovf, "no scheduler overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
