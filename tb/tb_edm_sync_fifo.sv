// tb_edm_sync_fifo: random push/pop traffic against a queue reference model.
// Checks dout (show-ahead head), empty, full and count every cycle, and that
// a word pushed into an empty FIFO is visible one cycle later.
module tb_edm_sync_fifo;
  localparam int W = 66, D = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic push = 0, pop = 0; logic [W-1:0] din = '0, dout; logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  edm_sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  logic [W-1:0] q [$];
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  initial begin repeat (20000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // compare state with the model
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(dout == q[0], "head data");
      push = ($urandom_range(0, 99) < 55) && (q.size() < D);
      pop  = ($urandom_range(0, 99) < 50) && (q.size() > 0);
      din  = {$urandom, $urandom, 2'($urandom)};
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
