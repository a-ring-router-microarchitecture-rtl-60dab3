// route_computation: lookahead route computation for one exchange buffer.
//
// Buffering in the ring router happens at the exit side of an exchange, so
// the route of a flit is computed one exchange ahead: while a flit is being
// written into a buffer, this unit works out which port the flit will leave
// by in the exchange downstream of that buffer. The result travels with the
// flit (flit_t.la_port) and steers the 2:1 mux and buffer arbiter there.
//
// The unit first applies XY dimension-order routing at the downstream
// router: x first, then y, then the core. That names the exchange the flit
// must leave the router by. It then maps this onto the ring. With the
// logical disjoint at the core exchange, the ring behaves as a line
//   (core.A) north - south - east - west (core.B)
// so between two direction exchanges there is one path only. A flit entering
// an exchange over the ring keeps its direction (enters by B -> leaves by A,
// enters by A -> leaves by B) until it reaches the exchange it must leave
// from. A flit entering by E picks the direction: from the core exchange,
// north and south lie on the A side and east and west on the B side; a flit
// from the core back to the core goes round the whole ring by A. These give
// the stops and hop counts of the paper's routing table (for example north to
// west through south and east, four hops). The coordinate convention (x grows
// eastwards, y northwards) is this design's own.
//
// Interface: purely combinational. xc_id and entry name the downstream
// exchange and the port the flit enters it by; cur_x/cur_y are the
// coordinates of the router that holds it.
module route_computation
  import ring_pkg::*;
(
  input  xc_e                xc_id,
  input  port_e              entry,
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  output port_e              exit_port
);

  xc_e target;  // exchange the flit must leave this router by

  // Position on the line north(0) - south(1) - east(2) - west(3).
  function automatic logic [1:0] line_pos(xc_e id);
    return 2'(id - XC_NORTH);
  endfunction

  always_comb begin
    if (dst_x > cur_x)      target = XC_EAST;
    else if (dst_x < cur_x) target = XC_WEST;
    else if (dst_y > cur_y) target = XC_NORTH;
    else if (dst_y < cur_y) target = XC_SOUTH;
    else                    target = XC_CORE;
  end

  always_comb begin
    if (target == xc_id && !(xc_id == XC_CORE && entry == PORT_E)) begin
      exit_port = PORT_E;                         // arrived: leave the router
    end else if (entry == PORT_B) begin
      exit_port = PORT_A;                         // keep going forward
    end else if (entry == PORT_A) begin
      exit_port = PORT_B;                         // keep going backward
    end else if (xc_id == XC_CORE) begin
      // Injection: east/west on the B side, north/south/core on the A side.
      exit_port = (target == XC_EAST || target == XC_WEST) ? PORT_B : PORT_A;
    end else if (target == XC_CORE) begin
      exit_port = (line_pos(xc_id) <= 2'd1) ? PORT_B : PORT_A;
    end else begin
      exit_port = (line_pos(target) > line_pos(xc_id)) ? PORT_A : PORT_B;
    end
  end

endmodule
