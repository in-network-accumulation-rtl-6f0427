// ina_pkg: constants and types shared by the in-network-accumulation (INA) mesh.
//
// A link carries a 128-bit flit plus three sideband bits (flit type and the virtual
// channel it travels on). Head flits carry a header (packet type, destination,
// source, tag); body and tail flits carry payload in 32-bit slots. The flit size,
// payload width, VC count and buffer depth follow the paper's network table; the
// header layout, the sideband bits and the configuration record are this design's
// own choices.
package ina_pkg;
  parameter int unsigned FLIT_W    = 128; // flit size, bits
  parameter int unsigned PAYLOAD_W = 32;  // one gather / psum payload, bits
  parameter int unsigned NUM_VC    = 2;   // virtual channels per port
  parameter int unsigned BUF_DEPTH = 4;   // flits per VC buffer
  parameter int unsigned NUM_PORTS = 5;   // L, N, S, E, W
  parameter int unsigned COORD_W   = 4;   // mesh coordinate width (up to 16x16)
  parameter int unsigned TAG_W     = 16;  // psum / gather-group tag
  parameter int unsigned SLOTS     = FLIT_W / PAYLOAD_W; // 32-bit slots per flit

  // Port numbering. y grows towards S, x grows towards E.
  typedef enum logic [2:0] {PORT_L = 3'd0, PORT_N = 3'd1, PORT_S = 3'd2,
                            PORT_E = 3'd3, PORT_W = 3'd4} port_e;

  typedef enum logic [1:0] {FT_HEAD = 2'd0, FT_BODY = 2'd1, FT_TAIL = 2'd2,
                            FT_HEADTAIL = 2'd3} ftype_e;

  typedef enum logic [1:0] {PKT_UNICAST = 2'd0, PKT_GATHER = 2'd1,
                            PKT_INA = 2'd2} pkt_e;

  // Flit on a link: sideband + 128-bit flit.
  typedef struct packed {
    ftype_e             ftype;
    logic               vc;
    logic [FLIT_W-1:0]  data;
  } flit_t;

  // Header carried in the data field of a head flit.
  typedef struct packed {
    pkt_e               ptype;
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic [TAG_W-1:0]   tag;
    logic [FLIT_W-2-4*COORD_W-TAG_W-1:0] rsvd;
  } head_t;

  // Role of a node in psum accumulation, set by the controller per layer.
  typedef enum logic [1:0] {ROLE_NONE = 2'd0, ROLE_INA_INIT = 2'd1,
                            ROLE_INA_MEMBER = 2'd2} role_e;

  // Per-node configuration written by the (external) central controller.
  typedef struct packed {
    role_e              role;          // INA role of this node
    logic [COORD_W-1:0] ina_dst_x;     // where an initiated INA packet is sent
    logic [COORD_W-1:0] ina_dst_y;
    logic               gather_init;   // this node starts the gather packet
    logic               gather_member; // this node loads into a passing gather packet
    logic [TAG_W-1:0]   gather_grp;    // gather group (tag of the gather packet)
    logic [3:0]         gather_slot;   // node slot within the gather packet
    logic [3:0]         gather_body;   // body flits of the gather packet
    logic [COORD_W-1:0] gather_dst_x;  // where the gather packet is sent
    logic [COORD_W-1:0] gather_dst_y;
    logic [13:0]        nweights;      // weights held per PE for this layer (x)
  } cfg_t;

  function automatic logic is_head(ftype_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(ftype_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction
endpackage
