// metro_pkg: types and constants shared by the METRO network-on-chip.
//
// The network is a 2D mesh of routers without virtual channels. A message
// (a whole data chunk) travels as one packet: a head flit that carries the
// routing and priority control bits, any number of body flits, and a tail
// flit that releases the channels the head set up. Every flit is a DATA_W
// payload word (1024 bits in the main configuration) plus a 2-bit type.
//
// The head flit's control bits sit in the low bits of the payload word and
// are laid out by head_t:
//   msg_id   - message id, the key of the per-router routing tables
//   prio     - message priority, larger wins a channel conflict
//   crit     - list of "critical nodes" for segment routing, crit[0] first
//   crit_cnt - number of valid entries left in crit
// The field widths, the list length and the port numbering are choices of
// this implementation; the paper gives the fields but not their widths.
package metro_pkg;

  // Router ports. Port 0 is the local port to the network interface.
  localparam int unsigned NPORTS = 5;
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_NORTH = 1;
  localparam int unsigned P_EAST  = 2;
  localparam int unsigned P_SOUTH = 3;
  localparam int unsigned P_WEST  = 4;

  typedef logic [NPORTS-1:0] port_mask_t;

  // Node coordinates: 4 bits each, so meshes up to 16x16.
  localparam int unsigned COORD_W  = 4;
  localparam int unsigned MAX_K    = 1 << COORD_W;

  typedef struct packed {
    logic [COORD_W-1:0] y;   // row, grows toward south
    logic [COORD_W-1:0] x;   // column, grows toward east
  } node_t;

  localparam int unsigned MSG_ID_W = 12;
  localparam int unsigned PRIO_W   = 12;
  localparam int unsigned MAX_CRIT = 8;
  localparam int unsigned CNT_W    = 4;

  typedef logic [MSG_ID_W-1:0] msg_id_t;
  typedef logic [PRIO_W-1:0]   prio_t;

  typedef struct packed {
    logic [CNT_W-1:0]           crit_cnt;
    node_t [MAX_CRIT-1:0]       crit;
    prio_t                      prio;
    msg_id_t                    msg_id;
  } head_t;

  localparam int unsigned HDR_W = $bits(head_t);

  typedef enum logic [1:0] {
    FT_BODY = 2'd0,
    FT_HEAD = 2'd1,
    FT_TAIL = 2'd2
  } flit_type_e;

  // Main configuration of the paper (Table 2).
  localparam int unsigned DEF_MESH_K = 16;
  localparam int unsigned DEF_DATA_W = 1024;

endpackage
