// apenet_pkg: types and constants shared by the APEnet+ node.
//
// The node moves 128-bit words everywhere (the on-chip bus is 128 bits at
// 250 MHz).  A packet is a fixed-size envelope, one header word and one
// footer word, around a variable number of payload words.  Inside the node a
// word travels as a flit: the word plus start-of-packet and end-of-packet
// flags.  The header and footer layouts, the 3D coordinate width, the port
// numbering and the control-word encoding of the link protocol are choices
// of this design; the paper fixes only the envelope idea, the 7-port router,
// the 6 torus directions, the 2 virtual channels and the CRC-32.
package apenet_pkg;

  localparam int unsigned WORD_W  = 128;  // datapath / link word width
  localparam int unsigned NPORT   = 7;    // router ports: 6 torus links + local
  localparam int unsigned NLINK   = 6;
  localparam int unsigned NVC     = 2;    // virtual channels per link
  localparam int unsigned NLANE   = 4;    // bonded lanes per link
  localparam int unsigned LANE_W  = 32;   // parallel width of one lane
  localparam int unsigned COORD_W = 8;    // bits per torus coordinate

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [COORD_W-1:0] coord_t;
  typedef coord_t [2:0]       xyz_t;      // index 0 = X, 1 = Y, 2 = Z

  // Router port numbers.  Port 2d is the + link of dimension d, 2d+1 the -.
  typedef enum logic [2:0] {
    P_XP = 3'd0, P_XM = 3'd1, P_YP = 3'd2, P_YM = 3'd3,
    P_ZP = 3'd4, P_ZM = 3'd5, P_LOC = 3'd6
  } port_e;

  // Packet operations carried in the header.
  typedef enum logic [7:0] {
    OP_PUT  = 8'h01,
    OP_GET  = 8'h02,
    OP_SEND = 8'h03
  } op_e;

  typedef struct packed {
    logic [47:0] addr;     // destination buffer address (bytes)
    logic [7:0]  rsvd;
    logic [7:0]  op;       // op_e
    logic [15:0] len;      // payload length in words
    xyz_t        src;      // [47:24]
    xyz_t        dst;      // [23:0]
  } hdr_t;

  typedef struct packed {
    logic [95:0] rsvd;
    logic [15:0] len;      // payload length echoed
    logic [14:0] rsvd2;
    logic        perr;     // payload CRC error seen by a receiving link
  } ftr_t;

  typedef struct packed {
    logic  sop;            // header word
    logic  eop;            // footer word
    word_t data;
  } flit_t;

  // ---- link protocol (word stuffing) -------------------------------------
  // A link word whose top 32 bits equal K_MAGIC is a control word, unless it
  // directly follows an ESC control word; a data word that happens to start
  // with K_MAGIC is sent after an ESC (word stuffing).
  localparam logic [31:0] K_MAGIC = 32'hBCBC_BCBC;

  typedef enum logic [7:0] {
    C_IDLE   = 8'h00,
    C_ESC    = 8'h02,
    C_HCRC   = 8'h03,   // arg[31:0] header CRC, arg[32] VC
    C_FCRC   = 8'h04,   // arg[31:0] footer CRC, arg[63:32] payload CRC
    C_ACKH   = 8'h05,
    C_NAKH   = 8'h06,
    C_ACKF   = 8'h07,
    C_NAKF   = 8'h08,
    C_CREDIT = 8'h09,   // arg[15:0] credits VC0, arg[31:16] credits VC1
    C_ALIGN  = 8'hBC    // K_MAGIC on all four lanes: lane alignment marker
  } ctrl_e;

  localparam word_t ALIGN_WORD = {NLANE{K_MAGIC}};
  // Last word of the training sequence.  Each lane finds its own copy of
  // ALIGN_END_LANE; the lanes are aligned on it.  It is not a control word:
  // lane_align drops it by raising 'locked' only in the cycle after it.
  localparam logic [31:0] ALIGN_END_LANE = 32'hE0E0_E0E0;
  localparam word_t ALIGN_END = {NLANE{ALIGN_END_LANE}};

  function automatic word_t ctrl_word(ctrl_e t, logic [87:0] arg);
    return {K_MAGIC, 8'(t), arg};
  endfunction

  function automatic logic is_k(word_t w);
    return w[127:96] == K_MAGIC;
  endfunction

  localparam logic [31:0] CRC_INIT = 32'hFFFF_FFFF;

  // ---- network interface ---------------------------------------------------
  // A transfer request from the host side: send len words to node dst,
  // to be written there from address addr on.
  typedef struct packed {
    xyz_t        dst;
    logic [7:0]  op;
    logic [47:0] addr;
    logic [23:0] len;      // words
  } cmd_t;

  // One received packet, reported when its footer has been taken.
  typedef struct packed {
    xyz_t        src;
    logic [7:0]  op;
    logic [47:0] addr;
    logic [15:0] len;
    logic        perr;
  } rx_event_t;

endpackage
