// tb_route_computation: checks the lookahead route computation against the
// in-router routing table of the ring router.
//
// The testbench walks a flit through the five exchanges of one router,
// asking the unit at every exchange for the exit port, and compares the
// exchanges visited and the hop count with the table (core->core: north,
// south, east, west, 6 hops; north->west: south, east, 4 hops; ...), in both
// directions of every pair. Random destinations and entry exchanges then
// check that every walk ends at the exchange XY routing asks for, never
// sends a flit back out of the port it came in by, and never passes through
// the core exchange.
module tb_route_computation;
  import ring_pkg::*;

  int checks = 0, failures = 0;

  xc_e                xc_id;
  port_e              entry;
  logic [COORD_W-1:0] cur_x, cur_y, dst_x, dst_y;
  port_e              exit_port;

  route_computation dut (.*);

  // Destination coordinates that make XY routing pick each output, with
  // the router at (3,3).
  task automatic dest_for(xc_e d);
    dst_x = 3; dst_y = 3;
    case (d)
      XC_NORTH: dst_y = 4;
      XC_SOUTH: dst_y = 2;
      XC_EAST:  dst_x = 4;
      XC_WEST:  dst_x = 2;
      default: ;
    endcase
  endtask

  // Walk from exchange src (entering by E) until the flit leaves by E.
  // Returns the list of exchanges visited, including first and last.
  task automatic walk(input xc_e src, output xc_e path[$], output bit bad);
    xc_e   cur = src;
    port_e ent = PORT_E;
    bad = 0;
    path = {};
    for (int step = 0; step < 8; step++) begin
      path.push_back(cur);
      xc_id = cur; entry = ent;
      #1;
      if (exit_port == ent) bad = 1;                       // loopback
      if (cur == XC_CORE && ent != PORT_E && exit_port != PORT_E) bad = 1;
      if (exit_port == PORT_E) return;
      if (exit_port == PORT_A) begin cur = xc_e'((int'(cur) + 1) % 5); ent = PORT_B; end
      else                     begin cur = xc_e'((int'(cur) + 4) % 5); ent = PORT_A; end
    end
    bad = 1;  // did not leave within 8 exchanges
  endtask

  task automatic check_row(xc_e src, xc_e dst, xc_e stops[$], int hops);
    xc_e path[$], want[$];
    bit  bad;
    cur_x = 3; cur_y = 3;
    dest_for(dst);
    #1;
    walk(src, path, bad);
    want = {src};
    foreach (stops[i]) want.push_back(stops[i]);
    want.push_back(dst);
    checks++;
    if (bad || path != want || path.size() != hops) begin
      failures++;
      $display("FAIL %s->%s: got %p (%0d hops, bad=%0d), want %p (%0d hops)",
               src.name(), dst.name(), path, path.size(), bad, want, hops);
    end
  endtask

  task automatic check_pair(xc_e a, xc_e b, xc_e stops[$], int hops);
    xc_e rev[$];
    check_row(a, b, stops, hops);
    if (a != b) begin
      rev = stops;
      rev.reverse();
      check_row(b, a, rev, hops);
    end
  endtask

  initial begin
    xc_e path[$];
    bit  bad;
    xc_e want_d;

    // The routing table of the ring router.
    check_pair(XC_CORE,  XC_CORE,  '{XC_NORTH, XC_SOUTH, XC_EAST, XC_WEST}, 6);
    check_pair(XC_CORE,  XC_NORTH, '{}, 2);
    check_pair(XC_CORE,  XC_EAST,  '{XC_WEST}, 3);
    check_pair(XC_CORE,  XC_SOUTH, '{XC_NORTH}, 3);
    check_pair(XC_CORE,  XC_WEST,  '{}, 2);
    check_pair(XC_NORTH, XC_EAST,  '{XC_SOUTH}, 3);
    check_pair(XC_NORTH, XC_SOUTH, '{}, 2);
    check_pair(XC_NORTH, XC_WEST,  '{XC_SOUTH, XC_EAST}, 4);
    check_pair(XC_EAST,  XC_SOUTH, '{}, 2);
    check_pair(XC_EAST,  XC_WEST,  '{}, 2);
    check_pair(XC_SOUTH, XC_WEST,  '{XC_EAST}, 3);

    // Random coordinates: the walk must end where XY routing says.
    for (int i = 0; i < 2000; i++) begin
      xc_e src;
      cur_x = COORD_W'($urandom); cur_y = COORD_W'($urandom);
      dst_x = COORD_W'($urandom); dst_y = COORD_W'($urandom);
      src   = xc_e'($urandom_range(4, 0));
      if      (dst_x > cur_x) want_d = XC_EAST;
      else if (dst_x < cur_x) want_d = XC_WEST;
      else if (dst_y > cur_y) want_d = XC_NORTH;
      else if (dst_y < cur_y) want_d = XC_SOUTH;
      else                    want_d = XC_CORE;
      if (src == want_d && src != XC_CORE) continue;  // no U-turns in XY
      walk(src, path, bad);
      checks++;
      if (bad || path[$] != want_d || path.size() > 6) begin
        failures++;
        if (failures < 10)
          $display("FAIL random src=%s cur=(%0d,%0d) dst=(%0d,%0d): %p",
                   src.name(), cur_x, cur_y, dst_x, dst_y, path);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
