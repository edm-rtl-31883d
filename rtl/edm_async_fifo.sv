// edm_async_fifo: dual-clock FIFO used as the EDM grant queue (and for the
// switch's RX-to-TX forwarding path).
//
// The design moves grants from the RX clock domain of a link to its TX clock
// domain, and states that reading a grant from the queue takes 4 clock cycles
// and that switch forwarding takes 4 cycles "to account for the movement of
// data from the RX to the TX clock domain".  This is the classic Gray-coded
// pointer FIFO: the write pointer is synchronised into the read domain through
// three flops, and the head entry is loaded into an output register.  An entry
// written at write edge 0 appears on dout with dvalid after read edge 4 when
// the two clocks are the same (edges 1-3: synchroniser, 4: output register);
// the three-stage synchroniser is this design's way of meeting the 4 cycles.
// SYNC_STAGES sets the synchroniser depth (latency SYNC_STAGES + 1); the switch
// forwarding path uses fewer stages so that, with its classification and
// output registers, RX-to-TX forwarding stays at the 1 + 4 cycles given.  rd_en consumes the entry shown on dout.
module edm_async_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH_LOG2 = 3,
  parameter int SYNC_STAGES = 3
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             dvalid
);
  localparam int D = 1 << DEPTH_LOG2;
  logic [WIDTH-1:0] mem [D];
  logic [DEPTH_LOG2:0] wbin, wgray, rbin, rgray;
  logic [DEPTH_LOG2:0] rgray_s1, rgray_s2;
  logic [DEPTH_LOG2:0] wsync [SYNC_STAGES];

  function automatic logic [DEPTH_LOG2:0] b2g(logic [DEPTH_LOG2:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [DEPTH_LOG2:0] g2b(logic [DEPTH_LOG2:0] gc);
    logic [DEPTH_LOG2:0] b;
    b[DEPTH_LOG2] = gc[DEPTH_LOG2];
    for (int k = DEPTH_LOG2 - 1; k >= 0; k--) b[k] = b[k+1] ^ gc[k];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [DEPTH_LOG2:0] rbin_w;
  assign rbin_w = g2b(rgray_s2);
  assign wfull  = (wbin[DEPTH_LOG2] != rbin_w[DEPTH_LOG2]) &&
                  (wbin[DEPTH_LOG2-1:0] == rbin_w[DEPTH_LOG2-1:0]);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
    end else begin
      rgray_s1 <= rgray; rgray_s2 <= rgray_s1;
      if (wr_en && !wfull) begin
        wbin  <= wbin + 1'b1;
        wgray <= b2g(wbin + 1'b1);
      end
    end
  end
  always_ff @(posedge wclk) if (wr_en && !wfull) mem[wbin[DEPTH_LOG2-1:0]] <= wdata;

  // ---------------- read domain ----------------
  logic [DEPTH_LOG2:0] wbin_r;
  logic                 ram_nonempty, load;
  assign wbin_r       = g2b(wsync[SYNC_STAGES-1]);
  assign ram_nonempty = (wbin_r != rbin);
  assign load         = ram_nonempty && (!dvalid || rd_en);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0;
      for (int i = 0; i < SYNC_STAGES; i++) wsync[i] <= '0;
      dvalid <= 1'b0; dout <= '0;
    end else begin
      wsync[0] <= wgray;
      for (int i = 1; i < SYNC_STAGES; i++) wsync[i] <= wsync[i-1];
      if (load) begin
        dout   <= mem[rbin[DEPTH_LOG2-1:0]];
        dvalid <= 1'b1;
        rbin   <= rbin + 1'b1;
        rgray  <= b2g(rbin + 1'b1);
      end else if (rd_en) begin
        dvalid <= 1'b0;
      end
    end
  end

  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) wr_en |-> !wfull);
  a_rd_valid:    assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> dvalid);
endmodule
