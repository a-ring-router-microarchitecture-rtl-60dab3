// exchange: one node of the ring inside the router.
//
// An exchange has three bidirectional ports: A and B link it to the two
// neighbouring exchanges of the router's ring, E links it to a neighbouring
// router or to the core. Each exit port p owns:
//   - a 2:1 mux that picks the flit from one of the two other entry ports
//     (a flit never leaves by the port it came in by, so no wider mux is
//     needed and there is no crossbar),
//   - a buffer arbiter (round robin) that decides which entry port may write,
//   - a route computation unit that, before the flit is written, computes
//     its exit port in the exchange downstream of p (lookahead routing),
//   - a buffer of NVC virtual channels,
//   - an output arbiter (round robin) that picks the virtual channel whose
//     head flit is sent downstream.
//
// Link protocol, per port, same for ring and external links:
//   sender   -> receiver: valid, flit (flit.la_port = exit port in receiver)
//   receiver -> sender:   acc   (the flit is written at the next edge)
//                         space (one bit per receiver buffer: room for a flit)
// acc is combinational from valid; space comes from registers only. A sender
// only offers a flit whose target buffer reports space, and keeps offering
// it until acc. A flit written at one edge can be offered downstream in the
// next cycle and written there at the following edge: one cycle per
// exchange, as in the paper.
//
// XC_ID says which exchange of the router this is; it tells the route
// computation units which exchange lies downstream of each port (A side:
// next in ring order, B side: previous, E side: the facing exchange of the
// neighbouring router). my_x/my_y are the router's mesh coordinates.
// The exchange structure follows the paper's block diagram; the link
// signals and the single-edge timing are this design's own.
module exchange
  import ring_pkg::*;
#(
  parameter xc_e XC_ID = XC_CORE,
  parameter int  NVC   = ring_pkg::VC_NUM,
  parameter int  DEPTH = ring_pkg::VC_DEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // entry side of the three ports (index: port_e)
  input  logic               in_valid  [NPORT],
  input  flit_t              in_flit   [NPORT],
  output logic               in_acc    [NPORT],
  output space_t             space,
  // exit side of the three ports
  output logic               out_valid [NPORT],
  output flit_t              out_flit  [NPORT],
  input  logic               out_acc   [NPORT],
  input  space_t             out_space [NPORT]
);

  logic [1:0] wr_gnt [NPORT];  // per buffer: grant to its two entry ports

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    localparam int Q0 = (p + 1) % NPORT;  // the two entry ports that may
    localparam int Q1 = (p + 2) % NPORT;  // write buffer p

    // Exchange and router downstream of exit port p.
    localparam xc_e DS_ID =
        (p == PORT_A) ? xc_e'((int'(XC_ID) + 1) % NXC) :
        (p == PORT_B) ? xc_e'((int'(XC_ID) + NXC - 1) % NXC) :
        (XC_ID == XC_NORTH) ? XC_SOUTH :
        (XC_ID == XC_SOUTH) ? XC_NORTH :
        (XC_ID == XC_EAST)  ? XC_WEST  :
        (XC_ID == XC_WEST)  ? XC_EAST  : XC_CORE;
    localparam port_e DS_ENTRY =
        (p == PORT_A) ? PORT_B : (p == PORT_B) ? PORT_A : PORT_E;

    logic [COORD_W-1:0] ds_x, ds_y;
    logic [1:0]         req;
    flit_t              mux_flit, wr_flit;
    port_e              la;
    logic               buf_space;
    logic               head_valid [NVC];
    flit_t              head_flit  [NVC];
    logic [FLIT_W-1:0]  head_data  [NVC];
    logic               pop        [NVC];
    logic [NVC-1:0]     oreq, ognt;

    always_comb begin
      ds_x = my_x;
      ds_y = my_y;
      if (p == PORT_E) begin
        unique case (XC_ID)
          XC_NORTH: ds_y = my_y + 1'b1;
          XC_SOUTH: ds_y = my_y - 1'b1;
          XC_EAST:  ds_x = my_x + 1'b1;
          XC_WEST:  ds_x = my_x - 1'b1;
          default: ;
        endcase
      end
    end

    // Write side: requests, buffer arbiter, 2:1 mux, lookahead routing.
    assign req[0] = in_valid[Q0] && (in_flit[Q0].la_port == port_e'(p));
    assign req[1] = in_valid[Q1] && (in_flit[Q1].la_port == port_e'(p));

    buffer_arbiter u_barb (
      .clk, .rst_n, .req, .en(buf_space), .gnt(wr_gnt[p])
    );

    assign mux_flit = wr_gnt[p][1] ? in_flit[Q1] : in_flit[Q0];

    route_computation u_rc (
      .xc_id(DS_ID), .entry(DS_ENTRY), .cur_x(ds_x), .cur_y(ds_y),
      .dst_x(mux_flit.dst_x), .dst_y(mux_flit.dst_y), .exit_port(la)
    );

    always_comb begin
      wr_flit         = mux_flit;
      wr_flit.la_port = la;
    end

    vc_buffer #(.NVC(NVC), .DEPTH(DEPTH), .W(FLIT_W)) u_buf (
      .clk, .rst_n,
      .wr_en(wr_gnt[p] != 2'b00), .wr_data(wr_flit), .space(buf_space),
      .head_valid, .head_data, .pop
    );

    // Read side: output arbiter over the virtual channels.
    always_comb begin
      for (int v = 0; v < NVC; v++) begin
        head_flit[v] = flit_t'(head_data[v]);
        oreq[v]      = head_valid[v] && out_space[p][head_flit[v].la_port];
      end
    end

    output_arbiter #(.NVC(NVC)) u_oarb (
      .clk, .rst_n, .req(oreq), .acc(out_acc[p]), .gnt(ognt)
    );

    always_comb begin
      out_valid[p] = (ognt != '0);
      out_flit[p]  = head_flit[0];
      for (int v = 0; v < NVC; v++) begin
        if (ognt[v]) out_flit[p] = head_flit[v];
        pop[v] = ognt[v] && out_acc[p];
      end
    end

    assign space[p] = buf_space;
  end : g_port

  // Entry side: a port's flit is accepted when the buffer it targets grants.
  for (genvar q = 0; q < NPORT; q++) begin : g_acc
    // q is entry 0 of buffer (q+2)%3 and entry 1 of buffer (q+1)%3.
    assign in_acc[q] = wr_gnt[(q + 2) % NPORT][0] || wr_gnt[(q + 1) % NPORT][1];
  end

  // A flit may not ask to leave by the port it arrived on.
  logic [NPORT-1:0] loopback;
  for (genvar q = 0; q < NPORT; q++) begin : g_chk
    assign loopback[q] = in_valid[q] && (in_flit[q].la_port == port_e'(q));
  end
  assert property (@(posedge clk) disable iff (!rst_n) loopback == '0);

endmodule
