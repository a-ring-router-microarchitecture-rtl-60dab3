// ring_router: the router as a small ring network of five exchanges.
//
// Each of the router's five input/output pairs (core, north, south, east,
// west) connects to the E port of its own exchange. The exchanges form a ring
// in the order core -> north -> south -> east -> west -> core: port A of each
// drives port B of the next (the clockwise ring) and port B drives port A of
// the previous one (the counter-clockwise ring). The order puts north next to
// south and east next to west, so a flit that goes straight through the
// router visits two exchanges and takes two cycles.
//
// The route computation never sends a flit through the core exchange from A
// to B or back: this logical disjoint breaks the cycle of the ring and with
// it the risk of deadlock. Only a flit injected by the core may come back to
// the core, after going once round the ring (six exchanges). North to west
// has to go the long way, through south and east (four exchanges). With XY
// routing all other through-paths take two or three exchanges.
//
// Ports are indexed by exchange (xc_e: 0 core, 1 north, 2 south, 3 east,
// 4 west) and use the exchange link protocol (valid/flit forward, acc/space
// back). Flits arriving from neighbouring routers already carry their
// lookahead exit port for this router; flits from the core do not, so the
// router computes it for them (core_rc), a job the network interface could
// equally do. my_x/my_y are the router's mesh coordinates.
// Ring order and port naming follow the paper's figure of the ring router;
// the core-injection route unit and the link signals are this design's own.
module ring_router
  import ring_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               in_valid  [NXC],
  input  flit_t              in_flit   [NXC],
  output logic               in_acc    [NXC],
  output space_t             in_space  [NXC],
  output logic               out_valid [NXC],
  output flit_t              out_flit  [NXC],
  input  logic               out_acc   [NXC],
  input  space_t             out_space [NXC]
);

  // Per exchange, per port.
  logic   x_in_valid  [NXC][NPORT];
  flit_t  x_in_flit   [NXC][NPORT];
  logic   x_in_acc    [NXC][NPORT];
  space_t x_space     [NXC];
  logic   x_out_valid [NXC][NPORT];
  flit_t  x_out_flit  [NXC][NPORT];
  logic   x_out_acc   [NXC][NPORT];
  space_t x_out_space [NXC][NPORT];

  port_e  core_la;
  flit_t  core_flit;

  // Lookahead route for flits injected by the core.
  route_computation core_rc (
    .xc_id(XC_CORE), .entry(PORT_E), .cur_x(my_x), .cur_y(my_y),
    .dst_x(in_flit[XC_CORE].dst_x), .dst_y(in_flit[XC_CORE].dst_y),
    .exit_port(core_la)
  );

  always_comb begin
    core_flit         = in_flit[XC_CORE];
    core_flit.la_port = core_la;
  end

  for (genvar i = 0; i < NXC; i++) begin : g_xc
    localparam int NX = (i + 1) % NXC;        // A side neighbour
    localparam int PV = (i + NXC - 1) % NXC;  // B side neighbour

    // Ring links: A of i <-> B of NX, B of i <-> A of PV.
    assign x_in_valid[i][PORT_A]  = x_out_valid[NX][PORT_B];
    assign x_in_flit[i][PORT_A]   = x_out_flit[NX][PORT_B];
    assign x_in_valid[i][PORT_B]  = x_out_valid[PV][PORT_A];
    assign x_in_flit[i][PORT_B]   = x_out_flit[PV][PORT_A];
    assign x_out_acc[i][PORT_A]   = x_in_acc[NX][PORT_B];
    assign x_out_space[i][PORT_A] = x_space[NX];
    assign x_out_acc[i][PORT_B]   = x_in_acc[PV][PORT_A];
    assign x_out_space[i][PORT_B] = x_space[PV];

    // External port.
    assign x_in_valid[i][PORT_E]  = in_valid[i];
    assign x_in_flit[i][PORT_E]   = (i == XC_CORE) ? core_flit : in_flit[i];
    assign in_acc[i]              = x_in_acc[i][PORT_E];
    assign in_space[i]            = x_space[i];
    assign out_valid[i]           = x_out_valid[i][PORT_E];
    assign out_flit[i]            = x_out_flit[i][PORT_E];
    assign x_out_acc[i][PORT_E]   = out_acc[i];
    assign x_out_space[i][PORT_E] = out_space[i];

    exchange #(.XC_ID(xc_e'(i))) u_xc (
      .clk, .rst_n, .my_x, .my_y,
      .in_valid(x_in_valid[i]), .in_flit(x_in_flit[i]), .in_acc(x_in_acc[i]),
      .space(x_space[i]),
      .out_valid(x_out_valid[i]), .out_flit(x_out_flit[i]),
      .out_acc(x_out_acc[i]), .out_space(x_out_space[i])
    );
  end : g_xc

endmodule
