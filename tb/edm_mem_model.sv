// edm_mem_model: behavioural model of the memory node's memory controller and
// DRAM, for testbenches only.  Always ready; every read returns its word
// LATENCY cycles after the request, in order.  Requests are ignored while
// rst_n is low.  Word address = addr[3 +: AW].
module edm_mem_model #(
  parameter int AW      = 12,
  parameter int LATENCY = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mc_valid,
  output logic        mc_ready,
  input  logic        mc_we,
  input  logic [63:0] mc_addr,
  input  logic [63:0] mc_wdata,
  output logic        mc_rvalid,
  output logic [63:0] mc_rdata
);
  logic [63:0] mem [1 << AW];
  logic [LATENCY-1:0] vpipe = '0;
  logic [63:0] dpipe [LATENCY];
  int unsigned reads = 0, writes = 0;
  assign mc_ready  = 1'b1;
  assign mc_rvalid = vpipe[LATENCY-1];
  assign mc_rdata  = dpipe[LATENCY-1];
  initial for (int i = 0; i < LATENCY; i++) dpipe[i] = '0;
  always_ff @(posedge clk) begin
    vpipe <= {vpipe[LATENCY-2:0], rst_n && mc_valid && !mc_we};
    dpipe[0] <= mem[mc_addr[3 +: AW]];
    for (int i = 1; i < LATENCY; i++) dpipe[i] <= dpipe[i-1];
    if (rst_n && mc_valid && mc_we) begin mem[mc_addr[3 +: AW]] <= mc_wdata; writes <= writes + 1; end
    if (rst_n && mc_valid && !mc_we) reads <= reads + 1;
  end
endmodule
