// ring_mesh: a 2D mesh network-on-chip built from ring routers.
//
// MESH_X x MESH_Y routers (8 x 8 by default, the network the ring router
// was evaluated on), one per core. Router (x, y) has node number
// n = y * MESH_X + x; x grows eastwards and y northwards. The east exchange
// of a router is linked to the west exchange of its eastern neighbour and
// the north exchange to the south exchange of its northern neighbour, both
// ways. Ports at the edge of the mesh are tied off: nothing arrives on them
// and XY routing never sends anything to them.
//
// Core side, per node n:
//   inj_valid/inj_flit/inj_acc - the core offers a flit (dst_x, dst_y and
//     payload; la_port is ignored) and holds it until inj_acc is high; the
//     flit is taken at that clock edge.
//   ej_valid/ej_flit/ej_ready  - the router offers a flit for the core; it
//     leaves the router at an edge where ej_valid and ej_ready are both high.
// Packets are one flit long. The mesh and XY routing follow the paper; the
// node numbering, the coordinate directions and the core-side handshake are
// this design's own.
module ring_mesh
  import ring_pkg::*;
#(
  parameter int MESH_X = 8,
  parameter int MESH_Y = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inj_valid [MESH_X*MESH_Y],
  input  flit_t inj_flit  [MESH_X*MESH_Y],
  output logic  inj_acc   [MESH_X*MESH_Y],
  output logic  ej_valid  [MESH_X*MESH_Y],
  output flit_t ej_flit   [MESH_X*MESH_Y],
  input  logic  ej_ready  [MESH_X*MESH_Y]
);

  localparam int N = MESH_X * MESH_Y;

  logic   r_in_valid  [N][NXC];
  flit_t  r_in_flit   [N][NXC];
  logic   r_in_acc    [N][NXC];
  space_t r_in_space  [N][NXC];
  logic   r_out_valid [N][NXC];
  flit_t  r_out_flit  [N][NXC];
  logic   r_out_acc   [N][NXC];
  space_t r_out_space [N][NXC];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int n  = y * MESH_X + x;
      localparam int nN = (y + 1) * MESH_X + x;
      localparam int nS = (y - 1) * MESH_X + x;
      localparam int nE = y * MESH_X + x + 1;
      localparam int nW = y * MESH_X + x - 1;

      // Core port.
      assign r_in_valid[n][XC_CORE]  = inj_valid[n];
      assign r_in_flit[n][XC_CORE]   = inj_flit[n];
      assign inj_acc[n]              = r_in_acc[n][XC_CORE];
      assign ej_valid[n]             = r_out_valid[n][XC_CORE];
      assign ej_flit[n]              = r_out_flit[n][XC_CORE];
      assign r_out_acc[n][XC_CORE]   = ej_ready[n];
      assign r_out_space[n][XC_CORE] = '1;

      // North side.
      if (y + 1 < MESH_Y) begin : g_n
        assign r_in_valid[n][XC_NORTH]  = r_out_valid[nN][XC_SOUTH];
        assign r_in_flit[n][XC_NORTH]   = r_out_flit[nN][XC_SOUTH];
        assign r_out_acc[n][XC_NORTH]   = r_in_acc[nN][XC_SOUTH];
        assign r_out_space[n][XC_NORTH] = r_in_space[nN][XC_SOUTH];
      end else begin : g_n_edge
        assign r_in_valid[n][XC_NORTH]  = 1'b0;
        assign r_in_flit[n][XC_NORTH]   = '0;
        assign r_out_acc[n][XC_NORTH]   = 1'b0;
        assign r_out_space[n][XC_NORTH] = '0;
      end

      // South side.
      if (y > 0) begin : g_s
        assign r_in_valid[n][XC_SOUTH]  = r_out_valid[nS][XC_NORTH];
        assign r_in_flit[n][XC_SOUTH]   = r_out_flit[nS][XC_NORTH];
        assign r_out_acc[n][XC_SOUTH]   = r_in_acc[nS][XC_NORTH];
        assign r_out_space[n][XC_SOUTH] = r_in_space[nS][XC_NORTH];
      end else begin : g_s_edge
        assign r_in_valid[n][XC_SOUTH]  = 1'b0;
        assign r_in_flit[n][XC_SOUTH]   = '0;
        assign r_out_acc[n][XC_SOUTH]   = 1'b0;
        assign r_out_space[n][XC_SOUTH] = '0;
      end

      // East side.
      if (x + 1 < MESH_X) begin : g_e
        assign r_in_valid[n][XC_EAST]  = r_out_valid[nE][XC_WEST];
        assign r_in_flit[n][XC_EAST]   = r_out_flit[nE][XC_WEST];
        assign r_out_acc[n][XC_EAST]   = r_in_acc[nE][XC_WEST];
        assign r_out_space[n][XC_EAST] = r_in_space[nE][XC_WEST];
      end else begin : g_e_edge
        assign r_in_valid[n][XC_EAST]  = 1'b0;
        assign r_in_flit[n][XC_EAST]   = '0;
        assign r_out_acc[n][XC_EAST]   = 1'b0;
        assign r_out_space[n][XC_EAST] = '0;
      end

      // West side.
      if (x > 0) begin : g_w
        assign r_in_valid[n][XC_WEST]  = r_out_valid[nW][XC_EAST];
        assign r_in_flit[n][XC_WEST]   = r_out_flit[nW][XC_EAST];
        assign r_out_acc[n][XC_WEST]   = r_in_acc[nW][XC_EAST];
        assign r_out_space[n][XC_WEST] = r_in_space[nW][XC_EAST];
      end else begin : g_w_edge
        assign r_in_valid[n][XC_WEST]  = 1'b0;
        assign r_in_flit[n][XC_WEST]   = '0;
        assign r_out_acc[n][XC_WEST]   = 1'b0;
        assign r_out_space[n][XC_WEST] = '0;
      end

      ring_router u_router (
        .clk, .rst_n,
        .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_valid(r_in_valid[n]), .in_flit(r_in_flit[n]),
        .in_acc(r_in_acc[n]), .in_space(r_in_space[n]),
        .out_valid(r_out_valid[n]), .out_flit(r_out_flit[n]),
        .out_acc(r_out_acc[n]), .out_space(r_out_space[n])
      );
    end : g_x
  end : g_y

endmodule
