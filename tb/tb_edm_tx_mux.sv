// tb_edm_tx_mux: an encoder stream of frames (S, data, T, with idles between)
// and a random stream of memory blocks are offered together.  The output,
// split by block class, must give back the memory blocks in order and the
// frame blocks in order with the encoder idles removed; memory blocks must
// appear inside frames (preemption) and preempt must pulse exactly then.  An
// idle mux must send a memory block on the cycle after it is offered.
module tb_edm_tx_mux;
  import edm_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  logic nm_valid = 0, nm_ready, mem_valid = 0, mem_ready, preempt;
  blk_t nm_blk, mem_blk, tx_blk;
  edm_tx_mux dut (.*);
  blk_t nq [$], mq [$];
  int inframe = 0, n_pre = 0, n_pre_exp = 0;
  function automatic blk_t nm_b(int i, int len);
    if (i == 0) return '{sync: SYNC_CTRL, payload: {BT_S0, 56'h55_5555_5555_55D5}};
    if (i == len - 1) return '{sync: SYNC_CTRL, payload: {BT_T0, 56'd0}};
    return '{sync: SYNC_DATA, payload: {$urandom, $urandom}};
  endfunction
  // accepted inputs, in order
  int n_nm = 0;
  bit enc_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (nm_valid && nm_ready) begin
      if (classify(nm_blk) != C_IDLE) nq.push_back(nm_blk);   // encoder idles are dropped
      n_nm++;
    end
    if (mem_valid && mem_ready) mq.push_back(mem_blk);
  end
  // output checker
  always @(posedge clk) if (rst_n) begin
    bclass_e c;
    c = classify(tx_blk);
    if (c == C_NONMEM) begin
      chk(nq.size() > 0 && tx_blk == nq[0], $sformatf("non-memory block order %h %h %0d", tx_blk, nq.size() > 0 ? nq[0] : 0, nq.size()));
      if (nq.size() > 0) void'(nq.pop_front());
      if (tx_blk.sync == SYNC_CTRL && tx_blk.payload[63:56] == BT_S0) inframe = 1;
      if (is_term(tx_blk)) inframe = 0;
    end else if (c != C_IDLE) begin
      chk(mq.size() > 0 && tx_blk == mq[0], "memory block order");
      if (mq.size() > 0) void'(mq.pop_front());
      if (inframe) n_pre_exp++;
    end
    if (preempt) n_pre++;
  end
  initial begin repeat (50000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // encoder side
  initial begin
    nm_blk = idle_blk();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      int len, i;
      len = $urandom_range(3, 20); i = 0;
      while (i < len) begin
        int n0;
        n0 = n_nm;
        nm_blk = nm_b(i, len); nm_valid = 1;
        @(negedge clk);
        if (n_nm != n0) i++;
      end
      nm_blk = idle_blk();
      repeat ($urandom_range(0, 3)) begin @(posedge clk); @(negedge clk); end  // encoder idles
    end
    nm_valid = 0;
    enc_done = 1;
  end
  // memory side
  initial begin
    mem_blk = idle_blk();
    repeat (3) @(negedge clk);
    for (int k = 0; k < 300; k++) begin
      mem_valid = $urandom_range(0, 2) != 0;
      mem_blk = $urandom_range(0, 1) ? mk_mdata({$urandom, $urandom}) : mk_ctrl(BT_MS, 56'($urandom));
      @(negedge clk);
    end
    mem_valid = 0;
    wait (enc_done);
    repeat (30) @(negedge clk);
    chk(nq.size() == 0 && mq.size() == 0, "all blocks sent");
    chk(n_pre_exp > 0, "memory blocks sent inside frames");
    chk(n_pre == n_pre_exp, "preempt pulses once per memory block inside a frame");
    // latency through an idle mux
    mem_blk = mk_mdata(64'hABCD); mem_valid = 1;
    #0; chk(mem_ready, "idle mux takes memory block at once");
    @(negedge clk); mem_valid = 0;
    chk(tx_blk == mk_mdata(64'hABCD), "memory block on tx_blk one cycle later");
    repeat (3) @(negedge clk);
    $display("preempted blocks %0d", n_pre);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
