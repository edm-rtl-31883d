// edm_data_buffer: host data buffer of 64-bit words.
//
// On a compute node it holds the data of WREQ messages (written by the
// application before the WREQ is queued); on a memory node it receives the
// words read by the memory controller for an RREQ until the RRES chunks that
// carry them are sent.  It is a simple dual-port RAM: one write port and one
// read port with a one-cycle registered read, which is the "reading from the
// data buffer (1 cycle)" step of RRES/WREQ block generation.  The size is this
// design's choice; the text does not give one.
module edm_data_buffer #(
  parameter int WORDS = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [63:0]              wdata,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [63:0]              rdata
);
  logic [63:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
