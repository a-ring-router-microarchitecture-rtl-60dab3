// ring_pkg: types and constants shared by the ring router.
//
// A ring router is built from five identical three-port exchanges. Each
// exchange port is called A, B or E: A and B face the neighbouring
// exchanges of the in-router ring, E faces the outside (a neighbouring
// router or the local core). The five exchanges are numbered in ring order,
// core -> north -> south -> east -> west -> core, so that port A of exchange i
// drives port B of exchange (i+1) mod 5 and port B of exchange i drives port
// A of exchange (i+4) mod 5.
//
// A flit is 128 bits wide, as in the evaluated configuration. Its upper bits
// carry the lookahead exit port (the port the flit will leave by in the
// exchange it is about to enter) and the destination coordinates; the rest is
// payload. The field layout, the 3-bit coordinates and the coordinate
// convention (x grows eastwards, y grows northwards) are this design's own
// choices.
package ring_pkg;

  localparam int FLIT_W    = 128;  // flit, link and buffer width
  localparam int COORD_W   = 3;    // enough for an 8x8 mesh
  localparam int VC_NUM    = 2;    // virtual channels per buffer
  localparam int VC_DEPTH  = 8;    // flits per virtual channel
  localparam int NPORT     = 3;    // ports per exchange
  localparam int NXC       = 5;    // exchanges per router
  localparam int PAYLOAD_W = FLIT_W - 2 - 2 * COORD_W;

  // Exchange ports.
  typedef enum logic [1:0] {
    PORT_A = 2'd0,
    PORT_B = 2'd1,
    PORT_E = 2'd2
  } port_e;

  // Exchange identities, in ring order (port A side is the next one).
  typedef enum logic [2:0] {
    XC_CORE  = 3'd0,
    XC_NORTH = 3'd1,
    XC_SOUTH = 3'd2,
    XC_EAST  = 3'd3,
    XC_WEST  = 3'd4
  } xc_e;

  typedef struct packed {
    port_e                la_port;  // exit port in the exchange being entered
    logic [COORD_W-1:0]   dst_x;
    logic [COORD_W-1:0]   dst_y;
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  // Space flags a receiver reports, one per exit-port buffer (index port_e).
  typedef logic [NPORT-1:0] space_t;

endpackage
