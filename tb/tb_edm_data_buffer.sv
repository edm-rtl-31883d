// tb_edm_data_buffer: random writes and reads against an array model; a read
// address presented with re returns its word one cycle later (registered
// read), and rdata holds when re is low.
module tb_edm_data_buffer;
  localparam int WORDS = 1024;
  logic clk = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  logic we = 0, re = 0; logic [9:0] waddr = '0, raddr = '0; logic [63:0] wdata = '0, rdata;
  edm_data_buffer #(.WORDS(WORDS)) dut (.*);
  logic [63:0] m [WORDS];
  bit          wr [WORDS];
  logic [63:0] exp_q; bit exp_v = 0;
  initial begin repeat (20000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < WORDS; i++) wr[i] = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (exp_v) chk(rdata == exp_q, "read data one cycle after re");
      we = $urandom_range(0, 1); waddr = 10'($urandom_range(0, 63)); wdata = {$urandom, $urandom};
      re = $urandom_range(0, 1); raddr = 10'($urandom_range(0, 63));
      if (re && wr[raddr] && !(we && waddr == raddr)) begin exp_v = 1; exp_q = m[raddr]; end
      else if (!re) ; // rdata holds: keep the previous expectation
      else exp_v = 0;
      @(posedge clk);
      if (we) begin m[waddr] = wdata; wr[waddr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
