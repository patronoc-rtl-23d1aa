// axi_pkg: AXI4 widths, channel structs and constants shared by every block of the NoC.
//
// The NoC carries full AXI4 end to end, so every link is a bundle of five channels (AW, W, B,
// AR, R), each with its own valid/ready handshake. The bundle is kept as two structs: req_t
// (everything a master drives) and resp_t (everything a slave drives).
//
// Widths are those of the slim NoC the paper evaluates: 32-bit addresses, 32-bit data, 4-bit
// IDs (16 unique IDs for the 16 masters of a 4x4 mesh). The paper's wide NoC is obtained by
// setting DataWidth to 512; any power of two from 8 to 1024 is allowed. Inside a crosspoint the crossbar widens IDs by the index of the ingress port; the
// *_wide_t types carry that widened ID (IdWidth + XbarIdExtra bits, enough for five ports).
// The user signal width (1 bit) and the choice to keep widths here rather than as type
// parameters are this design's own.
package axi_pkg;

  localparam int unsigned AddrWidth   = 32;
  localparam int unsigned DataWidth   = 32;
  localparam int unsigned IdWidth     = 4;
  localparam int unsigned UserWidth   = 1;
  localparam int unsigned StrbWidth   = DataWidth / 8;
  // Up to five ports per crosspoint (local + N, E, S, W): three extra ID bits.
  localparam int unsigned MaxXpPorts  = 5;
  localparam int unsigned XbarIdExtra = 3;
  localparam int unsigned IdWideWidth = IdWidth + XbarIdExtra;

  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [StrbWidth-1:0]   strb_t;
  typedef logic [IdWidth-1:0]     id_t;
  typedef logic [IdWideWidth-1:0] id_wide_t;
  typedef logic [UserWidth-1:0]   user_t;
  typedef logic [7:0]             len_t;
  typedef logic [2:0]             size_t;

  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } burst_e;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_e;

  // AW and AR carry the same fields.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    len_t       len;
    size_t      size;
    burst_e     burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
    user_t      user;
  } ax_chan_t;

  typedef struct packed {
    id_wide_t   id;
    addr_t      addr;
    len_t       len;
    size_t      size;
    burst_e     burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
    user_t      user;
  } ax_wide_chan_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
    user_t user;
  } w_chan_t;

  typedef struct packed {
    id_t   id;
    resp_e resp;
    user_t user;
  } b_chan_t;

  typedef struct packed {
    id_wide_t id;
    resp_e    resp;
    user_t    user;
  } b_wide_chan_t;

  typedef struct packed {
    id_t   id;
    data_t data;
    resp_e resp;
    logic  last;
    user_t user;
  } r_chan_t;

  typedef struct packed {
    id_wide_t id;
    data_t    data;
    resp_e    resp;
    logic     last;
    user_t    user;
  } r_wide_chan_t;

  typedef struct packed {
    ax_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ax_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    ar_ready;
    logic    w_ready;
    logic    b_valid;
    b_chan_t b;
    logic    r_valid;
    r_chan_t r;
  } resp_t;

  typedef struct packed {
    ax_wide_chan_t aw;
    logic          aw_valid;
    w_chan_t       w;
    logic          w_valid;
    logic          b_ready;
    ax_wide_chan_t ar;
    logic          ar_valid;
    logic          r_ready;
  } req_wide_t;

  typedef struct packed {
    logic         aw_ready;
    logic         ar_ready;
    logic         w_ready;
    logic         b_valid;
    b_wide_chan_t b;
    logic         r_valid;
    r_wide_chan_t r;
  } resp_wide_t;

  // One entry of an address-based routing table: [start_addr, end_addr) goes to port idx.
  typedef struct packed {
    logic [7:0] idx;
    addr_t      start_addr;
    addr_t      end_addr;
  } xbar_rule_t;

  // Register-slice selection, one bit per channel: {R, AR, B, W, AW}.
  localparam logic [4:0] CUT_ALL  = 5'b11111;
  localparam logic [4:0] CUT_NONE = 5'b00000;

endpackage
