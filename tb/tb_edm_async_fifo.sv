// tb_edm_async_fifo: (1) two unrelated clocks, random writes and reads, every
// word must come out once and in order; (2) one clock for both sides: a word
// written into the empty FIFO is valid at the output SYNC_STAGES+1 = 4 cycles
// later (the grant queue's clock-crossing latency of the design).
module tb_edm_async_fifo;
  localparam int W = 64;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #3 wclk = ~wclk;
  always #5 rclk = ~rclk;
  logic wr_en = 0, wfull, rd_en = 0, dvalid; logic [W-1:0] wdata = '0, dout;
  edm_async_fifo #(.WIDTH(W)) dut (.wclk, .wrst_n(rst_n), .wr_en, .wdata, .wfull,
    .rclk, .rrst_n(rst_n), .rd_en, .dout, .dvalid);
  // same-clock instance for the latency check
  logic c2 = 0; always #1 c2 = ~c2;
  logic w2 = 0, d2v, f2; logic [W-1:0] w2d = '0, d2;
  edm_async_fifo #(.WIDTH(W)) dut2 (.wclk(c2), .wrst_n(rst_n), .wr_en(w2), .wdata(w2d), .wfull(f2),
    .rclk(c2), .rrst_n(rst_n), .rd_en(d2v), .dout(d2), .dvalid(d2v));
  logic [W-1:0] q [$];
  int sent = 0, got = 0;
  initial begin #200000; $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // writer
  initial begin
    #20 rst_n = 1;
    while (sent < 500) begin
      @(negedge wclk);
      wr_en = ($urandom_range(0, 99) < 70) && !wfull;
      wdata = {$urandom, $urandom};
      @(posedge wclk);
      if (wr_en) begin q.push_back(wdata); sent++; end
    end
    @(negedge wclk) wr_en = 0;
  end
  // reader
  initial begin
    #20;
    while (got < 500) begin
      @(negedge rclk);
      rd_en = dvalid && ($urandom_range(0, 99) < 60);
      if (rd_en) begin
        chk(q.size() > 0 && dout == q[0], "data in order");
        if (q.size() > 0) void'(q.pop_front());
        got++;
      end
    end
    @(negedge rclk) rd_en = 0;
    // latency: single clock
    @(negedge c2); w2 = 1; w2d = 64'h1234_5678_9ABC_DEF0;
    @(negedge c2); w2 = 0;
    begin
      int n = 0;   // clock edges after the one that wrote the word
      while (!d2v && n < 20) begin @(negedge c2); n++; end
      $display("same-clock write-to-valid latency: %0d cycles", n);
      chk(n == 4, "latency is SYNC_STAGES+1 = 4 cycles");
      chk(d2 == 64'h1234_5678_9ABC_DEF0, "latency word data");
    end
    @(negedge c2);
    chk(!d2v, "single word read out once");
    chk(got == 500, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
