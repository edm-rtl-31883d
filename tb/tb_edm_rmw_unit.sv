// tb_edm_rmw_unit: random reads, writes and compare-and-swaps (half of them
// matching) through the unit to the memory model.  A reference memory is
// updated in request order; every read response must carry the value and tag
// expected at the time of its request, every CAS its old value and success
// flag, and the final memory must equal the reference.
module tb_edm_rmw_unit;
  import edm_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", s, $time); end endtask
  logic req_valid = 0, req_ready; mc_op_e req_op = MC_RD;
  logic [63:0] req_addr = '0, req_wdata = '0, req_cmp = '0; logic [15:0] req_tag = '0;
  logic rsp_valid, rsp_cas, rsp_cas_ok; logic [63:0] rsp_data; logic [15:0] rsp_tag;
  logic mc_valid, mc_ready, mc_we, mc_rvalid; logic [63:0] mc_addr, mc_wdata, mc_rdata;
  edm_rmw_unit dut (.*);
  edm_mem_model #(.AW(4), .LATENCY(6)) u_mem (.clk, .rst_n, .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata);
  logic [63:0] ref_m [16];
  typedef struct { logic [63:0] d; logic [15:0] tag; bit cas; bit ok; } exp_t;
  exp_t q [$];
  int n_cas_ok = 0, n_cas_fail = 0;
  always @(posedge clk) if (rst_n && rsp_valid) begin
    chk(q.size() > 0, "response expected");
    if (q.size() > 0) begin
      exp_t e;
      e = q.pop_front();
      chk(rsp_data == e.d && rsp_tag == e.tag && rsp_cas == e.cas, "response data/tag/kind");
      if (e.cas) begin chk(rsp_cas_ok == e.ok, "CAS success flag"); if (e.ok) n_cas_ok++; else n_cas_fail++; end
    end
  end
  // reference model, updated in request order at each accepted request
  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    exp_t e;
    int a;
    a = int'(req_addr[6:3]);
    e.tag = req_tag; e.d = ref_m[a]; e.cas = (req_op == MC_CAS); e.ok = 0;
    if (req_op == MC_WR) ref_m[a] = req_wdata;
    else begin
      if (req_op == MC_CAS && ref_m[a] == req_cmp) begin e.ok = 1; ref_m[a] = req_wdata; end
      q.push_back(e);
    end
  end
  initial begin repeat (50000) @(posedge clk); $display("FAIL watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 16; i++) begin ref_m[i] = 64'(i) * 3; u_mem.mem[i] = 64'(i) * 3; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int a, r;
      @(negedge clk);
      a = $urandom_range(0, 15); r = $urandom_range(0, 9);
      req_valid = $urandom_range(0, 3) != 0;
      req_op = (r < 5) ? MC_RD : (r < 8) ? MC_WR : MC_CAS;
      req_addr = 64'(a) << 3; req_wdata = {$urandom, $urandom};
      req_cmp = $urandom_range(0, 1) ? ref_m[a] : ~ref_m[a];
      req_tag = 16'($urandom);
    end
    @(negedge clk) req_valid = 0;
    repeat (40) @(negedge clk);
    chk(q.size() == 0, "all responses returned");
    for (int i = 0; i < 16; i++) chk(u_mem.mem[i] == ref_m[i], "final memory");
    chk(n_cas_ok > 0 && n_cas_fail > 0, "both CAS outcomes seen");
    $display("CAS ok=%0d fail=%0d", n_cas_ok, n_cas_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
