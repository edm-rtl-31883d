// tb_edm_msg_state_table: after reset every entry reads as invalid (zero);
// random writes on the three write ports (distinct indexes in one cycle, as
// the host guarantees) are read back on both read ports one cycle later.
module tb_edm_msg_state_table;
  import edm_pkg::*;
  localparam int IW = 1 + ID_W + 1;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  logic wa_en = 0, wb_en = 0, wc_en = 0;
  logic [IW-1:0] wa_idx = '0, wb_idx = '0, wc_idx = '0, ra_idx = '0, rb_idx = '0;
  mst_entry_t wa_data = '0, wb_data = '0, wc_data = '0, ra_data, rb_data;
  edm_msg_state_table #(.N_PEERS(2)) dut (.*);
  mst_entry_t m [1 << IW];
  function automatic mst_entry_t rnd();
    mst_entry_t e;
    e = {$urandom, $urandom, $urandom, $urandom, $urandom};
    e.valid = 1'b1;
    return e;
  endfunction
  mst_entry_t ea, eb;
  initial begin repeat (20000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < (1 << IW); i++) m[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t > 0) begin chk(ra_data == ea, "read port a"); chk(rb_data == eb, "read port b"); end
      wa_en = $urandom_range(0, 1); wb_en = $urandom_range(0, 1); wc_en = $urandom_range(0, 1);
      wa_idx = IW'($urandom_range(0, 31)); wb_idx = IW'($urandom_range(32, 63)); wc_idx = IW'($urandom_range(64, 95));
      if ($urandom_range(0, 1)) wc_idx = IW'($urandom_range(0, 31)) | IW'(512);
      wa_data = rnd(); wb_data = rnd(); wc_data = rnd();
      if ($urandom_range(0, 7) == 0) wb_data = '0;   // clear an entry
      ra_idx = IW'($urandom_range(0, 95)); rb_idx = IW'($urandom_range(0, 95));
      if ($urandom_range(0, 1)) rb_idx = IW'($urandom_range(0, 31)) | IW'(512);
      ea = m[ra_idx]; eb = m[rb_idx];
      @(posedge clk);
      if (wa_en) m[wa_idx] = wa_data;
      if (wb_en) m[wb_idx] = wb_data;
      if (wc_en) m[wc_idx] = wc_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
