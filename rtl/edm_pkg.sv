// edm_pkg: types and constants shared by the EDM PHY-level memory fabric.
//
// A 66-bit PCS block is {sync[1:0], payload[63:0]}.  Following the text of the
// design, a control block has sync header 2'b01 and carries an 8-bit block type
// followed by 56 payload bits; a data block has sync header 2'b10.  The memory
// data block /MD/ is "identical to /D/ except that it carries memory data"; the
// way it is told apart is not specified, so this design gives it the sync
// header 2'b11, which standard Ethernet never uses.  The standard block types
// (/E/ idle 0x1E, /S/ 0x78, /T/ 0x87..0xFF) are the IEEE 802.3 Clause 49
// values; the EDM control types (/MS/ /MT/ /MST/ /N/ /G/) are unused values
// chosen here.  The 56-bit body of every EDM control block is one memory header
// (mhdr_t): message type, peer port, message id, length and opcode.
package edm_pkg;

  localparam int PORT_W   = 9;    // port number width (cluster of 512)
  localparam int ID_W     = 8;    // message id width
  localparam int LEN_W    = 16;   // message / chunk size in bytes
  localparam int ADDR_W   = 64;   // remote memory address
  localparam int WORD_B   = 8;    // bytes carried by one data block

  localparam logic [1:0] SYNC_CTRL  = 2'b01;
  localparam logic [1:0] SYNC_DATA  = 2'b10;
  localparam logic [1:0] SYNC_MDATA = 2'b11;

  // IEEE 802.3 Clause 49 block types used here
  localparam logic [7:0] BT_IDLE = 8'h1E;
  localparam logic [7:0] BT_S0   = 8'h78;
  localparam logic [7:0] BT_T0   = 8'h87;
  // EDM block types (values not given by the design; chosen unused ones)
  localparam logic [7:0] BT_MS   = 8'h11;
  localparam logic [7:0] BT_MT   = 8'h22;
  localparam logic [7:0] BT_MST  = 8'h44;
  localparam logic [7:0] BT_N    = 8'h5A;
  localparam logic [7:0] BT_G    = 8'hA5;

  typedef enum logic [1:0] {
    M_RREQ   = 2'd0,
    M_WREQ   = 2'd1,
    M_RMWREQ = 2'd2,
    M_RRES   = 2'd3
  } mtype_e;

  typedef enum logic [3:0] {
    OP_NONE = 4'd0,
    OP_CAS  = 4'd1
  } rmw_op_e;

  // requests from the memory-node RX engine to the memory controller port
  typedef enum logic [1:0] {
    MC_RD  = 2'd0,
    MC_WR  = 2'd1,
    MC_CAS = 2'd2
  } mc_op_e;

  typedef enum logic {
    POL_FCFS = 1'b0,
    POL_SRPT = 1'b1
  } policy_e;

  // 56-bit body of /MS/, /MST/, /N/ and /G/ blocks
  typedef struct packed {
    mtype_e             mtype;
    logic [PORT_W-1:0]  peer;
    logic [ID_W-1:0]    id;
    logic [LEN_W-1:0]   len;
    rmw_op_e            op;
    logic [16:0]        aux;   // short payload of an /MST/ block
  } mhdr_t;

  typedef struct packed {
    logic [1:0]  sync;
    logic [63:0] payload;
  } blk_t;

  // Block classes seen on a receive path
  typedef enum logic [2:0] {
    C_IDLE, C_NONMEM, C_MS, C_MD, C_MT, C_MST, C_N, C_G
  } bclass_e;

  function automatic blk_t mk_ctrl(logic [7:0] bt, logic [55:0] body);
    mk_ctrl = '{sync: SYNC_CTRL, payload: {bt, body}};
  endfunction

  function automatic blk_t mk_mdata(logic [63:0] w);
    mk_mdata = '{sync: SYNC_MDATA, payload: w};
  endfunction

  function automatic blk_t idle_blk();
    idle_blk = '{sync: SYNC_CTRL, payload: {BT_IDLE, 56'd0}};
  endfunction

  function automatic bclass_e classify(blk_t b);
    if (b.sync == SYNC_MDATA) return C_MD;
    if (b.sync == SYNC_DATA)  return C_NONMEM;
    if (b.sync != SYNC_CTRL)  return C_NONMEM;
    case (b.payload[63:56])
      BT_IDLE: return C_IDLE;
      BT_MS:   return C_MS;
      BT_MT:   return C_MT;
      BT_MST:  return C_MST;
      BT_N:    return C_N;
      BT_G:    return C_G;
      default: return C_NONMEM;
    endcase
  endfunction

  function automatic logic is_term(blk_t b);
    // any /T/ block type of Clause 49
    is_term = (b.sync == SYNC_CTRL) &&
              (b.payload[63:56] inside {8'h87, 8'h99, 8'hAA, 8'hB4, 8'hCC, 8'hD2, 8'hE1, 8'hFF});
  endfunction

  // A demand notification as the switch RX hands it to the scheduler: an /N/
  // block (WREQ) or a whole RREQ / RMWREQ message.
  typedef struct packed {
    mtype_e             mtype;
    logic [PORT_W-1:0]  dst;     // destination port of the notifying message
    logic [ID_W-1:0]    id;
    logic [LEN_W-1:0]   len;
    rmw_op_e            op;
    logic [63:0]        addr;
    logic [63:0]        arg1;    // CAS compare value
    logic [63:0]        arg2;    // CAS swap value
  } notif_t;

  // A grant for one source port.  mtype M_WREQ / M_RRES: send a /G/ block;
  // M_RREQ / M_RMWREQ: forward the buffered request (the first, implicit grant
  // of its RRES).  peer is the port the granted data goes to.
  typedef struct packed {
    mtype_e             mtype;
    logic [PORT_W-1:0]  peer;
    logic [ID_W-1:0]    id;
    logic [LEN_W-1:0]   len;     // chunk size; whole read size for a forwarded request
    rmw_op_e            op;
    logic [63:0]        addr;
    logic [63:0]        arg1;
    logic [63:0]        arg2;
  } grant_t;

  // A memory operation handed to a host's EDM stack by the application
  // (compute node).  laddr: for WREQ the data buffer word pointer of the data,
  // for RREQ / RMWREQ the local address the response is written to.
  typedef struct packed {
    mtype_e             mtype;
    logic [PORT_W-1:0]  dst;
    logic [LEN_W-1:0]   len;
    logic [63:0]        raddr;
    logic [63:0]        laddr;
    rmw_op_e            op;
    logic [63:0]        arg1;
    logic [63:0]        arg2;
  } app_req_t;

  // One entry of the host message state table
  typedef struct packed {
    logic              valid;
    logic              ready;    // memory node: read data is in the data buffer
    mtype_e            mtype;
    logic [ADDR_W-1:0] raddr;    // remote address (WREQ) / local address (RREQ, RMWREQ)
    logic [15:0]       ptr;      // data buffer word pointer
    logic [LEN_W-1:0]  len;      // message size in bytes
    logic [LEN_W-1:0]  offset;   // bytes already sent or received
    logic [16:0]       aux;    // short result (compare-and-swap outcome)
  } mst_entry_t;

  // number of 8-byte data blocks needed for len bytes
  function automatic logic [LEN_W-1:0] nwords(logic [LEN_W-1:0] len);
    nwords = (len + LEN_W'(WORD_B - 1)) >> 3;
  endfunction

endpackage
