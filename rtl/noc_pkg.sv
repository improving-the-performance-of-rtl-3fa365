// noc_pkg -- shared constants and flit formats of the gather-capable CNN NoC.
//
// A flit is 98 bits. Its two most significant bits are the flit type (FT).
// A header flit carries, MSB first, FT, the packet type PT, the available
// payload space counter ASpace, the source and destination coordinates, the
// multicast bit string MDst and reserved bits, in the order of the packet
// format figure. Body and tail flits carry FT and a 96-bit data field, which
// holds three 32-bit gather payload slots (slot k in data[32k +: 32]).
// A gather packet is a header plus three data flits, so it holds
// GATHER_SLOTS = 9 payloads; a unicast packet is a header plus one tail.
//
// Field widths the paper does not print are this design's choice: FT and PT
// use 2 bits each, ASpace counts free 32-bit slots in 4 bits, a coordinate is
// a 3-bit row and a 4-bit column (column MESH_COLS addresses the global
// buffer beyond the right edge of a row), MDst has one bit per node of an
// 8x8 mesh, and the remaining 12 bits are reserved.
package noc_pkg;

  // Network configuration (Table I values where the paper gives them).
  localparam int unsigned FLIT_W        = 98;  // bits per flit
  localparam int unsigned NUM_VC        = 4;   // virtual channels per port
  localparam int unsigned BUF_DEPTH     = 4;   // flits per VC buffer
  localparam int unsigned PAYLOAD_W     = 32;  // gather payload width
  localparam int unsigned GATHER_FLITS  = 4;   // flits per gather packet
  localparam int unsigned UNICAST_FLITS = 2;   // flits per other packet
  localparam int unsigned T_MAC         = 5;   // MAC latency in cycles
  localparam int unsigned DELTA_DEFAULT = 5;   // delta timeout in cycles

  // Mesh size limits set by the header field widths.
  localparam int unsigned MAX_ROWS  = 8;
  localparam int unsigned MAX_COLS  = 8;
  localparam int unsigned ROW_W     = 3;
  localparam int unsigned COL_W     = 4;   // one more code for the buffer column
  localparam int unsigned MDST_W    = MAX_ROWS * MAX_COLS;

  localparam int unsigned FT_W      = 2;
  localparam int unsigned PT_W      = 2;
  localparam int unsigned ASPACE_W  = 4;
  localparam int unsigned DATA_W    = FLIT_W - FT_W;                // 96
  localparam int unsigned SLOTS_PER_FLIT = DATA_W / PAYLOAD_W;      // 3
  localparam int unsigned GATHER_SLOTS   = (GATHER_FLITS - 1) * SLOTS_PER_FLIT; // 9
  localparam int unsigned RSV_W     = FLIT_W - FT_W - PT_W - ASPACE_W
                                      - 2 * (ROW_W + COL_W) - MDST_W; // 12

  localparam int unsigned VC_W      = $clog2(NUM_VC);

  // Router ports.
  localparam int unsigned NUM_PORTS = 5;
  typedef enum logic [2:0] {
    PORT_LOCAL = 3'd0,
    PORT_NORTH = 3'd1,
    PORT_EAST  = 3'd2,
    PORT_SOUTH = 3'd3,
    PORT_WEST  = 3'd4
  } port_e;

  typedef enum logic [FT_W-1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3   // single-flit packet, not used by this design's traffic
  } flit_type_e;

  typedef enum logic [PT_W-1:0] {
    PT_UNICAST   = 2'd0,
    PT_MULTICAST = 2'd1,
    PT_GATHER    = 2'd2
  } pkt_type_e;

  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } coord_t;

  typedef struct packed {
    flit_type_e          ft;
    pkt_type_e           pt;
    logic [ASPACE_W-1:0] aspace;
    coord_t              src;
    coord_t              dst;
    logic [MDST_W-1:0]   mdst;
    logic [RSV_W-1:0]    rsv;
  } header_t;

  typedef struct packed {
    flit_type_e        ft;
    logic [DATA_W-1:0] data;
  } data_flit_t;

  typedef logic [FLIT_W-1:0] flit_t;

  // One direction of a router-to-router link: a flit and the VC it uses.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  // Credit returned upstream when a flit leaves a VC buffer.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  function automatic flit_type_e flit_ft(flit_t f);
    return flit_type_e'(f[FLIT_W-1 -: FT_W]);
  endfunction

endpackage
