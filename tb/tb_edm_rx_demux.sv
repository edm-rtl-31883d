// tb_edm_rx_demux: a receive stream in which frames are split by memory
// blocks at random points, with idles between.  Memory blocks must leave on
// mem_* one cycle after arriving, in order; each frame must reach dec_blk
// whole, in order, and in consecutive cycles (no idle inside a frame).
module tb_edm_rx_demux;
  import edm_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  blk_t rx_blk, mem_blk, dec_blk, last_in;
  logic mem_valid, overflow;
  edm_rx_demux dut (.*);
  blk_t fq [$], mq [$];
  int frames_out = 0, in_dec = 0;
  bit last_mem = 0;
  always @(posedge clk) if (rst_n) begin
    // memory path: block seen on rx_blk in the previous cycle
    if (last_mem) chk(mem_valid && mem_blk == last_in, "memory block one cycle later");
    else chk(!mem_valid, "no spurious memory block");
    last_in = rx_blk;
    last_mem = classify(rx_blk) != C_NONMEM && classify(rx_blk) != C_IDLE;
    chk(!overflow, "no overflow");
    if (classify(dec_blk) == C_NONMEM) begin
      chk(fq.size() > 0 && dec_blk == fq[0], "frame block order");
      if (fq.size() > 0) void'(fq.pop_front());
      in_dec = !is_term(dec_blk);
      if (is_term(dec_blk)) frames_out++;
    end else begin
      chk(in_dec == 0, "frame blocks consecutive at decoder");
      chk(classify(dec_blk) == C_IDLE, "only idles between frames");
    end
  end
  initial begin repeat (50000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rx_blk = idle_blk();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      int len;
      len = $urandom_range(3, 60);
      for (int i = 0; i < len; i++) begin
        blk_t b;
        if (i == 0) b = '{sync: SYNC_CTRL, payload: {BT_S0, 56'h55_5555_5555_55D5}};
        else if (i == len - 1) b = '{sync: SYNC_CTRL, payload: {BT_T0, 56'd0}};
        else b = '{sync: SYNC_DATA, payload: {$urandom, $urandom}};
        while ($urandom_range(0, 3) == 0) begin   // memory blocks preempting the frame
          rx_blk = $urandom_range(0, 1) ? mk_mdata({$urandom, $urandom}) : mk_ctrl(BT_MT, 56'($urandom));
          @(negedge clk);
        end
        rx_blk = b; fq.push_back(b);
        @(negedge clk);
      end
      rx_blk = idle_blk();
      repeat ($urandom_range(1, 4)) @(negedge clk);
    end
    repeat (200) @(negedge clk);
    chk(frames_out == 30 && fq.size() == 0, "all frames delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
