// tb_edm_testbed_top: end-to-end test of the EDM testbed (compute node,
// two-port switch, memory node) with every parameter at its default.
//
// The links between NICs and switch are modelled as LINK_D-cycle delay lines
// of 66-bit blocks, the memory controller by edm_mem_model.  The test runs:
//   1. one unloaded 64-byte read, checking the data and the cycle count of
//      each hop against the per-hop cycle budget of the design;
//   2. one unloaded 64-byte write (notify, grant, data), the same way;
//   3. a 1 KB read (four 256-byte RRES chunks: a request-as-grant, then /G/s);
//   4. compare-and-swap, once succeeding and once failing;
//   5. a burst of reads and writes (more than X active per destination, so
//      the host holds requests back) while a long non-memory frame is sent
//      from the compute node, so memory blocks preempt it; the frame must
//      leave the switch's RX frame buffer intact and in consecutive cycles.
// Every mechanism is counted and a failure is counted for one that never
// happened.
module tb_edm_testbed_top;
  import edm_pkg::*;

  localparam int LINK_D = 2;
  localparam int MC_LAT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;          // one period stands for the 2.56 ns PCS clock of 25 GbE

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  // DUT signals
  logic        app_req_valid = 1'b0, app_req_ready;
  app_req_t    app_req;
  logic        app_dbuf_we = 1'b0;
  logic [9:0]  app_dbuf_addr = '0;
  logic [63:0] app_dbuf_wdata = '0;
  logic        lm_we; logic [63:0] lm_addr, lm_wdata;
  logic        done_valid; mtype_e done_mtype; logic [PORT_W-1:0] done_peer; logic [ID_W-1:0] done_id;
  logic        mc_valid, mc_ready, mc_we, mc_rvalid;
  logic [63:0] mc_addr, mc_wdata, mc_rdata;
  blk_t        host_tx_blk [2], host_rx_blk [2], sw_tx_blk [2], sw_rx_blk [2];
  logic [1:0]  host_enc_valid = '0, host_enc_ready, sw_enc_valid = '0, sw_enc_ready;
  blk_t        host_enc_blk [2], host_dec_blk [2], sw_enc_blk [2], sw_dec_blk [2];
  logic [1:0]  host_preempt, sw_preempt, grant_issued;
  logic        x_stall, sched_overflow, rx_overflow;

  edm_testbed_top dut (.*, .port_disable(2'b00));

  edm_mem_model #(.AW(12), .LATENCY(MC_LAT)) u_mem (
    .clk, .rst_n, .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata);

  // links
  blk_t up [2][LINK_D];
  blk_t dn [2][LINK_D];
  initial for (int i = 0; i < 2; i++) for (int j = 0; j < LINK_D; j++) begin
    up[i][j] = idle_blk(); dn[i][j] = idle_blk();
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < 2; i++) begin
      up[i][0] <= host_tx_blk[i]; dn[i][0] <= sw_tx_blk[i];
      for (int j = 1; j < LINK_D; j++) begin up[i][j] <= up[i][j-1]; dn[i][j] <= dn[i][j-1]; end
    end
  end
  always_comb for (int i = 0; i < 2; i++) begin
    sw_rx_blk[i] = up[i][LINK_D-1]; host_rx_blk[i] = dn[i][LINK_D-1];
  end
  initial begin
    host_enc_blk[0] = idle_blk(); host_enc_blk[1] = idle_blk();
    sw_enc_blk[0] = idle_blk(); sw_enc_blk[1] = idle_blk();
    app_req = '0;
  end

  // local memory of the compute node (RRES data lands here)
  logic [63:0] lmem [logic [63:0]];
  always @(posedge clk) if (rst_n && lm_we) lmem[lm_addr] = lm_wdata;

  // completions
  int n_done_rres = 0, n_done_wreq = 0, n_done_cas = 0;
  always_ff @(posedge clk) if (rst_n && done_valid) begin
    if (done_mtype == M_RRES) n_done_rres <= n_done_rres + 1;
    if (done_mtype == M_WREQ) n_done_wreq <= n_done_wreq + 1;
    if (done_mtype == M_RMWREQ) n_done_cas <= n_done_cas + 1;
  end

  function automatic mtype_e hdr_type(blk_t b);
    mhdr_t h;
    h = b.payload[55:0];
    return h.mtype;
  endfunction

  // mechanism counters
  int n_preempt = 0, n_xstall = 0, n_grant = 0, n_gblk = 0, n_rreq_fwd = 0, n_mst = 0, n_frames = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (|host_preempt || |sw_preempt) n_preempt <= n_preempt + 1;
    if (x_stall) n_xstall <= n_xstall + 1;
    n_grant <= n_grant + $countones(grant_issued);
    if (classify(sw_tx_blk[0]) == C_G || classify(sw_tx_blk[1]) == C_G) n_gblk <= n_gblk + 1;
    if (classify(sw_tx_blk[1]) == C_MS && hdr_type(sw_tx_blk[1]) == M_RREQ)
      n_rreq_fwd <= n_rreq_fwd + 1;
    if (classify(sw_tx_blk[0]) == C_MST) n_mst <= n_mst + 1;
  end
  always @(posedge clk) if (rst_n) begin
    check(!sched_overflow, "scheduler notification queue overflow");
    check(!rx_overflow, "RX frame buffer overflow");
  end

  // first cycle of hop events after mark
  int unsigned mark;
  int unsigned ev [12];
  bit          seen [12];
  bit          armed = 1'b0;
  // the next accepted application request starts a new measurement
  task automatic arm();
    armed = 1'b1;
  endtask
  function automatic bit is_c(blk_t b, bclass_e c); return classify(b) == c; endfunction
  always @(posedge clk) begin
    bit c [12];
    c[0]  = is_c(host_tx_blk[0], C_MS) || is_c(host_tx_blk[0], C_N);   // compute TX first block
    c[1]  = is_c(sw_rx_blk[0], C_MT)   || is_c(sw_rx_blk[0], C_N);    // switch RX: last block of request / notify
    c[2]  = is_c(sw_tx_blk[1], C_MS)   || is_c(sw_tx_blk[0], C_G);    // switch TX: forwarded request / grant
    c[3]  = is_c(host_rx_blk[0], C_G);                                 // compute RX grant
    c[4]  = is_c(host_tx_blk[0], C_MS);                                // compute TX data chunk
    c[5]  = is_c(sw_rx_blk[0], C_MS)   || is_c(sw_rx_blk[1], C_MS);   // switch RX data chunk
    c[6]  = (is_c(sw_tx_blk[1], C_MS) && hdr_type(sw_tx_blk[1]) == M_WREQ) ||
            is_c(sw_tx_blk[0], C_MS);                                  // switch TX forwarded chunk
    c[7]  = is_c(host_rx_blk[1], C_MT);                                // memory RX request tail
    c[8]  = mc_valid;                                                  // memory controller request
    c[9]  = is_c(host_tx_blk[1], C_MS);                                // memory TX RRES
    c[10] = is_c(host_rx_blk[0], C_MS);                                // compute RX RRES
    c[11] = lm_we;                                                     // compute writes RRES data
    if (armed && app_req_valid && app_req_ready) begin
      armed = 1'b0; mark = cyc;
      for (int i = 0; i < 12; i++) seen[i] = 1'b0;
    end else if (!armed) for (int i = 0; i < 12; i++) if (!seen[i] && c[i]) begin seen[i] = 1'b1; ev[i] = cyc - mark; end
  end

  task automatic tick(int n = 1); repeat (n) @(posedge clk); endtask

  int n_acc = 0, n_enc_acc = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (app_req_valid && app_req_ready) n_acc <= n_acc + 1;
    if (host_enc_valid[0] && host_enc_ready[0]) n_enc_acc <= n_enc_acc + 1;
  end

  task automatic issue(input mtype_e t, input int len, input logic [63:0] raddr,
                       input logic [63:0] laddr, input rmw_op_e op = OP_NONE,
                       input logic [63:0] a1 = 0, input logic [63:0] a2 = 0);
    @(negedge clk);
    app_req = '0;
    app_req.mtype = t; app_req.dst = PORT_W'(1); app_req.len = LEN_W'(len);
    app_req.raddr = raddr; app_req.laddr = laddr; app_req.op = op;
    app_req.arg1 = a1; app_req.arg2 = a2;
    begin
      int n0 = n_acc;
      app_req_valid = 1'b1;
      do @(negedge clk); while (n_acc == n0);
      app_req_valid = 1'b0;
    end
  endtask

  task automatic wait_done(input int target_rres, input int target_wreq, input int target_cas);
    int t = 0;
    while ((n_done_rres < target_rres || n_done_wreq < target_wreq || n_done_cas < target_cas) && t < 20000) begin
      tick(); t++;
    end
    check(t < 20000, "operations complete");
  endtask

  function automatic logic [63:0] pattern(int i); return 64'hC0DE_0000_0000_0000 | 64'(i) * 64'h1_0001; endfunction

  // non-memory frame from the compute node, and its check at the switch decoder side
  localparam int FRAME_D = 120;
  blk_t frame [FRAME_D + 2];
  initial begin
    frame[0] = '{sync: SYNC_CTRL, payload: {BT_S0, 56'h55_5555_5555_55D5}};
    for (int i = 1; i <= FRAME_D; i++) frame[i] = '{sync: SYNC_DATA, payload: 64'hF00D_0000_0000_0000 | 64'(i)};
    frame[FRAME_D+1] = '{sync: SYNC_CTRL, payload: {BT_T0, 56'd0}};
  end
  task automatic send_frame();
    int n0 = n_enc_acc;
    @(negedge clk);
    while (n_enc_acc - n0 < FRAME_D + 2) begin
      host_enc_blk[0] = frame[n_enc_acc - n0]; host_enc_valid[0] = 1'b1;
      @(negedge clk);
    end
    host_enc_valid[0] = 1'b0; host_enc_blk[0] = idle_blk();
  endtask
  int rx_pos = 0, rx_gap_err = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (classify(sw_dec_blk[0]) == C_NONMEM) begin
      if (sw_dec_blk[0] != frame[rx_pos]) rx_gap_err <= rx_gap_err + 1;
      if (rx_pos == FRAME_D + 1) begin rx_pos <= 0; n_frames <= n_frames + 1; end
      else rx_pos <= rx_pos + 1;
    end else if (rx_pos != 0) rx_gap_err <= rx_gap_err + 1;   // frame not in consecutive cycles
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = pattern(i);
    tick(5); rst_n = 1'b1; tick(5);

    // ---------------------------------------------------------- 1. read
    arm();
    issue(M_RREQ, 64, 64'h100 * 8, 64'h8000_0000);
    wait_done(1, 0, 0);
    tick(5);
    for (int i = 0; i < 8; i++)
      check(lmem.exists(64'h8000_0000 + 64'(i*8)) && lmem[64'h8000_0000 + 64'(i*8)] == pattern(256 + i),
            $sformatf("read word %0d", i));
    $display("read hops (cycles after the request is accepted): compute TX %0d, switch RX tail %0d, switch TX %0d, memory RX tail %0d, MC %0d, memory TX %0d, compute RX %0d, data %0d",
             ev[0], ev[1], ev[2], ev[7], ev[8], ev[9], ev[10], ev[11]);
    check(ev[0] == 2, "compute TX of RREQ takes 2 cycles");
    // a scheduling round is three cycles, so a notification waits 0..2 cycles for the next one
    check(ev[2] - ev[1] >= 6 && ev[2] - ev[1] <= 8, "switch RX (1) + TX (5) of RREQ take 6 cycles plus round alignment");
    check(ev[11] - ev[10] == 3, "compute RX of RRES takes 3 cycles to the first data write");
    check(ev[10] - ev[9] == 2 * LINK_D + 5, "switch forwards RRES in 1 + 4 cycles");

    // ---------------------------------------------------------- 2. write
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      app_dbuf_we = 1'b1; app_dbuf_addr = 10'(i); app_dbuf_wdata = 64'hBEEF_0000_0000_0000 | 64'(i);
    end
    @(negedge clk);
    app_dbuf_we = 1'b0;
    arm();
    issue(M_WREQ, 64, 64'h200 * 8, 64'd0);
    wait_done(1, 1, 0);
    tick(40);
    for (int i = 0; i < 8; i++)
      check(u_mem.mem[512 + i] == (64'hBEEF_0000_0000_0000 | 64'(i)), $sformatf("write word %0d", i));
    $display("write hops: notify TX %0d, switch RX %0d, grant TX %0d, compute RX grant %0d, compute TX chunk %0d, switch TX chunk %0d",
             ev[0], ev[1], ev[2], ev[3], ev[4], ev[6]);
    check(ev[0] == 2, "compute TX of /N/ takes 2 cycles");
    check(ev[2] - ev[1] >= 6 && ev[2] - ev[1] <= 8, "switch RX (1) + grant TX (5) take 6 cycles plus round alignment");
    check(ev[4] - ev[3] == 9, "compute RX of /G/ (2) + WREQ TX (7) take 9 cycles");
    check(ev[6] - ev[4] == LINK_D + 5, "switch forwards WREQ in 1 + 4 cycles");

    // ---------------------------------------------------------- 3. 1 KB read
    issue(M_RREQ, 1024, 64'h400 * 8, 64'h9000_0000);
    wait_done(2, 1, 0);
    tick(5);
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 128; i++)
        if (!lmem.exists(64'h9000_0000 + 64'(i*8)) || lmem[64'h9000_0000 + 64'(i*8)] != pattern(1024 + i)) bad++;
      check(bad == 0, "1 KB read data");
    end

    // ---------------------------------------------------------- 4. CAS
    u_mem.mem[7] = 64'd41;
    issue(M_RMWREQ, 8, 64'd7 * 8, 64'hA000_0000, OP_CAS, 64'd41, 64'd99);
    wait_done(2, 1, 1);
    tick(30);
    check(u_mem.mem[7] == 64'd99, "CAS swapped");
    check(lmem[64'hA000_0000] == 64'd1, "CAS reported success");
    issue(M_RMWREQ, 8, 64'd7 * 8, 64'hA000_0008, OP_CAS, 64'd41, 64'd5);
    wait_done(2, 1, 2);
    tick(30);
    check(u_mem.mem[7] == 64'd99, "failed CAS left memory unchanged");
    check(lmem[64'hA000_0008] == 64'd0, "CAS reported failure");

    // ---------------------------------------------------------- 5. burst + frame
    fork
      send_frame();
      begin
        for (int r = 0; r < 6; r++) begin
          issue(M_RREQ, 128, 64'(2048 + r * 16) * 8, 64'hB000_0000 + 64'(r) * 128);
          issue(M_WREQ, 64, 64'(3072 + r * 8) * 8, 64'd0);
        end
      end
    join
    wait_done(8, 7, 2);
    tick(100);
    begin
      int bad;
      bad = 0;
      for (int r = 0; r < 6; r++)
        for (int i = 0; i < 16; i++)
          if (lmem[64'hB000_0000 + 64'(r) * 128 + 64'(i*8)] != pattern(2048 + r * 16 + i)) bad++;
      check(bad == 0, "burst read data");
      bad = 0;
      for (int r = 0; r < 6; r++)
        for (int i = 0; i < 8; i++)
          if (u_mem.mem[3072 + r * 8 + i] != (64'hBEEF_0000_0000_0000 | 64'(i))) bad++;
      check(bad == 0, "burst write data");
    end
    check(n_frames == 1 && rx_gap_err == 0, "non-memory frame delivered whole, in consecutive cycles");

    $display("mechanisms: preempt=%0d x_stall=%0d grants=%0d /G/=%0d rreq_forward=%0d mst=%0d frames=%0d",
             n_preempt, n_xstall, n_grant, n_gblk, n_rreq_fwd, n_mst, n_frames);
    check(n_preempt > 0, "intra-frame preemption happened");
    check(n_xstall > 0, "X-per-destination limit held a request back");
    check(n_gblk > 0, "grant blocks sent");
    check(n_rreq_fwd > 0, "requests forwarded as implicit grants");
    check(n_mst > 0, "single-block /MST/ response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
