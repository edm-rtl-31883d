// edm_rmw_unit: memory-node port to the local memory controller, with atomic
// read-modify-write.
//
// Requests come from the host RX engine one 64-bit word at a time: a read
// (an RREQ word), a write (a WREQ word) or a compare-and-swap (an RMWREQ).
// Reads and writes go straight to the controller; up to TAGS reads may be
// outstanding and their responses come back in order with the caller's tag.
// For a compare-and-swap the unit, as the text describes, issues the read,
// compares the value read with the compare argument, writes the swap argument
// if they are equal, and only then answers; while it does so it takes no other
// request (req_ready low), so the three steps are not interleaved with other
// memory requests.  Before starting a compare-and-swap it waits until all
// earlier reads have returned.  The response of a compare-and-swap carries the
// old value and a success flag.  The controller interface (valid/ready
// requests, in-order read data) is this design's choice; the prototype uses an
// AXI4 bus to a DDR4 controller.
module edm_rmw_unit
  import edm_pkg::*;
#(
  parameter int TAG_W = 16,
  parameter int TAGS  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // request side
  input  logic             req_valid,
  output logic             req_ready,
  input  mc_op_e           req_op,
  input  logic [63:0]      req_addr,
  input  logic [63:0]      req_wdata,    // write data, or swap value for CAS
  input  logic [63:0]      req_cmp,      // compare value for CAS
  input  logic [TAG_W-1:0] req_tag,
  // response side (reads and CAS)
  output logic             rsp_valid,
  output logic [63:0]      rsp_data,
  output logic [TAG_W-1:0] rsp_tag,
  output logic             rsp_cas,
  output logic             rsp_cas_ok,
  // memory controller
  output logic             mc_valid,
  input  logic             mc_ready,
  output logic             mc_we,
  output logic [63:0]      mc_addr,
  output logic [63:0]      mc_wdata,
  input  logic             mc_rvalid,
  input  logic [63:0]      mc_rdata
);
  typedef enum logic [1:0] {S_PASS, S_CAS_RD, S_CAS_WAIT, S_CAS_WR} state_e;
  state_e state;

  logic [63:0]      cas_addr, cas_cmp, cas_swap, cas_old;
  logic [TAG_W-1:0] cas_tag;

  // tags of outstanding plain reads
  logic             tq_empty, tq_full;
  logic [TAG_W-1:0] tq_head;
  logic [$clog2(TAGS+1)-1:0] tq_count;
  logic             tq_push, tq_pop;

  edm_sync_fifo #(.WIDTH(TAG_W), .DEPTH(TAGS)) u_tags (
    .clk, .rst_n, .push(tq_push), .din(req_tag), .pop(tq_pop),
    .dout(tq_head), .empty(tq_empty), .full(tq_full), .count(tq_count));

  always_comb begin
    req_ready = 1'b0;
    mc_valid  = 1'b0;
    mc_we     = 1'b0;
    mc_addr   = req_addr;
    mc_wdata  = req_wdata;
    tq_push   = 1'b0;
    case (state)
      S_PASS: begin
        if (req_op == MC_CAS) begin
          req_ready = tq_empty;                 // accept CAS once reads drained
        end else begin
          req_ready = mc_ready && !(req_op == MC_RD && tq_full);
          mc_valid  = req_valid && !(req_op == MC_RD && tq_full);
          mc_we     = (req_op == MC_WR);
          tq_push   = req_valid && req_ready && (req_op == MC_RD);
        end
      end
      S_CAS_RD: begin
        mc_valid = 1'b1; mc_we = 1'b0; mc_addr = cas_addr;
      end
      S_CAS_WR: begin
        mc_valid = 1'b1; mc_we = 1'b1; mc_addr = cas_addr; mc_wdata = cas_swap;
      end
      default: ;
    endcase
  end

  assign tq_pop = mc_rvalid && (state == S_PASS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_PASS; rsp_valid <= 1'b0; rsp_data <= '0; rsp_tag <= '0;
      rsp_cas <= 1'b0; rsp_cas_ok <= 1'b0;
      cas_addr <= '0; cas_cmp <= '0; cas_swap <= '0; cas_old <= '0; cas_tag <= '0;
    end else begin
      rsp_valid <= 1'b0;
      rsp_cas   <= 1'b0;
      case (state)
        S_PASS: begin
          if (mc_rvalid) begin
            rsp_valid <= 1'b1; rsp_data <= mc_rdata; rsp_tag <= tq_head;
          end
          if (req_valid && req_ready && req_op == MC_CAS) begin
            cas_addr <= req_addr; cas_cmp <= req_cmp; cas_swap <= req_wdata;
            cas_tag <= req_tag; state <= S_CAS_RD;
          end
        end
        S_CAS_RD:   if (mc_ready) state <= S_CAS_WAIT;
        S_CAS_WAIT: if (mc_rvalid) begin
          cas_old <= mc_rdata;
          if (mc_rdata == cas_cmp) state <= S_CAS_WR;
          else begin
            state <= S_PASS;
            rsp_valid <= 1'b1; rsp_cas <= 1'b1; rsp_cas_ok <= 1'b0;
            rsp_data <= mc_rdata; rsp_tag <= cas_tag;
          end
        end
        S_CAS_WR: if (mc_ready) begin
          state <= S_PASS;
          rsp_valid <= 1'b1; rsp_cas <= 1'b1; rsp_cas_ok <= 1'b1;
          rsp_data <= cas_old; rsp_tag <= cas_tag;
        end
        default: state <= S_PASS;
      endcase
    end
  end

  a_cas_atomic: assert property (@(posedge clk) disable iff (!rst_n)
                                 (state != S_PASS) |-> !req_ready);
endmodule
