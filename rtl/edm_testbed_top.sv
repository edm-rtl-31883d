// edm_testbed_top: the EDM testbed - a compute node, a memory node and an
// EDM switch with two ports.
//
// The compute node's NIC (host stack, port number COMPUTE_PORT) is linked to
// switch port COMPUTE_PORT and the memory node's NIC to switch port
// MEMORY_PORT, as in the three-FPGA testbed.  Everything below the EDM logic
// on each link end (scrambler, gearbox, PMA/PMD, SerDes and the cable) is
// standard PHY outside this design, so each link end is brought out as a pair
// of 66-bit block ports: *_tx_blk leaves an EDM TX, *_rx_blk enters an EDM RX.
// The same holds for the parts above: the compute node's application
// (requests, data buffer writes, local-memory writes), the memory node's
// memory controller, and the non-memory Ethernet traffic (encoder input and
// decoder output) of all four link ends.  One clock drives all three devices.
//
// Lint reports rst_n as used both as an asynchronous reset and as a
// synchronous signal.  The only synchronous use is the scheduler's matching
// assertion, which is enabled by rst_n; no register is reset synchronously.
module edm_testbed_top
  import edm_pkg::*;
#(
  parameter int      X            = 3,
  parameter int      CHUNK        = 256,
  parameter policy_e POLICY       = POL_SRPT,
  parameter int      DBUF_WORDS   = 1024,
  parameter int      COMPUTE_PORT = 0,
  parameter int      MEMORY_PORT  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // compute node application
  input  logic        app_req_valid,
  input  app_req_t    app_req,
  output logic        app_req_ready,
  input  logic        app_dbuf_we,
  input  logic [$clog2(DBUF_WORDS)-1:0] app_dbuf_addr,
  input  logic [63:0] app_dbuf_wdata,
  output logic        lm_we,
  output logic [63:0] lm_addr,
  output logic [63:0] lm_wdata,
  output logic        done_valid,
  output mtype_e      done_mtype,
  output logic [PORT_W-1:0] done_peer,
  output logic [ID_W-1:0]   done_id,
  // memory node memory controller
  output logic        mc_valid,
  input  logic        mc_ready,
  output logic        mc_we,
  output logic [63:0] mc_addr,
  output logic [63:0] mc_wdata,
  input  logic        mc_rvalid,
  input  logic [63:0] mc_rdata,
  // link ends: [0] compute node, [1] memory node
  output blk_t        host_tx_blk [2],
  input  blk_t        host_rx_blk [2],
  output blk_t        sw_tx_blk   [2],
  input  blk_t        sw_rx_blk   [2],
  // non-memory traffic: hosts [0] compute, [1] memory; switch per port
  input  logic [1:0]  host_enc_valid,
  input  blk_t        host_enc_blk [2],
  output logic [1:0]  host_enc_ready,
  output blk_t        host_dec_blk [2],
  input  logic [1:0]  sw_enc_valid,
  input  blk_t        sw_enc_blk [2],
  output logic [1:0]  sw_enc_ready,
  output blk_t        sw_dec_blk [2],
  input  logic [1:0]  port_disable,
  // events
  output logic [1:0]  host_preempt,
  output logic [1:0]  sw_preempt,
  output logic [1:0]  grant_issued,
  output logic        x_stall,
  output logic        sched_overflow,
  output logic        rx_overflow
);
  logic [1:0] rx_ovf;
  logic [1:0] xst;
  assign rx_overflow = |rx_ovf;
  assign x_stall     = xst[0];

  // compute node
  edm_host_stack #(.N_PEERS(2), .X(X), .CHUNK(CHUNK), .DBUF_WORDS(DBUF_WORDS)) u_compute (
    .clk, .rst_n, .my_port(PORT_W'(COMPUTE_PORT)),
    .req_valid(app_req_valid), .req(app_req), .req_ready(app_req_ready),
    .app_dbuf_we, .app_dbuf_addr, .app_dbuf_wdata,
    .lm_we, .lm_addr, .lm_wdata,
    .done_valid, .done_mtype, .done_peer, .done_id,
    .mc_valid(), .mc_ready(1'b1), .mc_we(), .mc_addr(), .mc_wdata(),
    .mc_rvalid(1'b0), .mc_rdata(64'd0),
    .enc_valid(host_enc_valid[0]), .enc_blk(host_enc_blk[0]), .enc_ready(host_enc_ready[0]),
    .tx_blk(host_tx_blk[0]), .rx_blk(host_rx_blk[0]), .dec_blk(host_dec_blk[0]),
    .preempt(host_preempt[0]), .rx_overflow(rx_ovf[0]), .x_stall(xst[0]));

  // memory node
  app_req_t no_req;
  assign no_req = '0;
  edm_host_stack #(.N_PEERS(2), .X(X), .CHUNK(CHUNK), .DBUF_WORDS(DBUF_WORDS)) u_memory (
    .clk, .rst_n, .my_port(PORT_W'(MEMORY_PORT)),
    .req_valid(1'b0), .req(no_req), .req_ready(),
    .app_dbuf_we(1'b0), .app_dbuf_addr('0), .app_dbuf_wdata(64'd0),
    .lm_we(), .lm_addr(), .lm_wdata(),
    .done_valid(), .done_mtype(), .done_peer(), .done_id(),
    .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata, .mc_rvalid, .mc_rdata,
    .enc_valid(host_enc_valid[1]), .enc_blk(host_enc_blk[1]), .enc_ready(host_enc_ready[1]),
    .tx_blk(host_tx_blk[1]), .rx_blk(host_rx_blk[1]), .dec_blk(host_dec_blk[1]),
    .preempt(host_preempt[1]), .rx_overflow(rx_ovf[1]), .x_stall(xst[1]));

  // switch
  logic iter_done;
  edm_switch #(.N_PORTS(2), .X(X), .CHUNK(CHUNK), .POLICY(POLICY)) u_switch (
    .clk, .rst_n, .rx_blk(sw_rx_blk), .tx_blk(sw_tx_blk),
    .enc_valid(sw_enc_valid), .enc_blk(sw_enc_blk), .enc_ready(sw_enc_ready),
    .dec_blk(sw_dec_blk), .port_disable, .grant_issued, .preempt(sw_preempt),
    .sched_overflow, .iter_done);
endmodule
