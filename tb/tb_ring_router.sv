// tb_ring_router: end-to-end test of one ring router at mesh position (3,3).
//
// Directed part: for every source/destination pair of the in-router routing
// table (both directions, plus core to core) a single flit is sent into an
// idle router. The number of clock edges from the edge that takes the flit
// in to the edge that hands it out must equal the table's hop count: one
// cycle per exchange (2 straight through, 3 with a turn, 4 north to west,
// 6 core back to core).
// Random part: all five inputs offer flits for random legal outputs (no
// U-turn) while the outputs apply random back-pressure. Every flit must leave
// by the right output, exactly once, with its destination intact.
// Flits from neighbouring routers carry the lookahead port of their first
// exchange, which the testbench takes from the first step of the table's
// path; flits from the core carry none (the router computes it).
module tb_ring_router;
  import ring_pkg::*;

  int checks = 0, failures = 0;

  logic               clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = 3, my_y = 3;
  logic               in_valid  [NXC];
  flit_t              in_flit   [NXC];
  logic               in_acc    [NXC];
  space_t             in_space  [NXC];
  logic               out_valid [NXC];
  flit_t              out_flit  [NXC];
  logic               out_acc   [NXC];
  space_t             out_space [NXC];

  ring_router dut (.*);

  always #5 clk = ~clk;

  // Routing table: stops between source and destination, and hop count.
  int hops_t [NXC][NXC];
  int first_t[NXC][NXC];  // exchange visited after the source

  task automatic row(xc_e a, xc_e b, xc_e stops[$], int hops);
    xc_e path[$];
    path = {a};
    foreach (stops[i]) path.push_back(stops[i]);
    path.push_back(b);
    hops_t[a][b] = hops; first_t[a][b] = path[1];
    if (a != b) begin
      path.reverse();
      hops_t[b][a] = hops; first_t[b][a] = path[1];
    end
  endtask

  function automatic flit_t make_flit(xc_e src, xc_e dst, int id);
    flit_t f = '0;
    f.dst_x = 3; f.dst_y = 3;
    case (dst)
      XC_NORTH: f.dst_y = 3'($urandom_range(7, 4));
      XC_SOUTH: f.dst_y = 3'($urandom_range(2, 0));
      XC_EAST:  begin f.dst_x = 3'($urandom_range(7, 4)); f.dst_y = 3'($urandom); end
      XC_WEST:  begin f.dst_x = 3'($urandom_range(2, 0)); f.dst_y = 3'($urandom); end
      default: ;
    endcase
    if (src == XC_CORE) f.la_port = PORT_E;  // ignored by the router
    else f.la_port = (first_t[src][dst] == (src + 1) % NXC) ? PORT_A : PORT_B;
    f.payload = PAYLOAD_W'(id);
    return f;
  endfunction

  // Scoreboard.
  int exp_dst [int];      // id -> output
  int t_in    [int];      // id -> edge count when taken in
  int cyc = 0;
  int received = 0, sent = 0;
  int lat_seen [int];
  bit random_ds = 0;
  int backpressure = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NXC; i++) begin
      if (in_valid[i] && in_acc[i]) t_in[int'(in_flit[i].payload)] = cyc;
      if (out_valid[i] && !out_acc[i]) backpressure++;
      if (out_valid[i] && out_acc[i]) begin
        int id;
        id = int'(out_flit[i].payload);
        received++;
        checks++;
        if (!exp_dst.exists(id) || exp_dst[id] != i) begin
          failures++;
          if (failures < 10) $display("FAIL flit %0d left by %0d", id, i);
        end else begin
          lat_seen[id] = cyc - t_in[id];
          exp_dst.delete(id);
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < NXC; i++) begin
      logic r;
      r = random_ds ? ($urandom_range(99) < 75) : 1'b1;
      out_acc[i]   = r;
      out_space[i] = (i == XC_CORE) ? {NPORT{r}} : (random_ds ? space_t'($urandom) | space_t'(r) : '1);
    end
  end

  int nid = 1;

  task automatic send(xc_e src, xc_e dst);
    int id = nid++;
    in_flit[src]  = make_flit(src, dst, id);
    exp_dst[id]   = dst;
    in_valid[src] = 1;
    sent++;
    do @(posedge clk); while (!in_acc[src]);
    @(negedge clk);
    in_valid[src] = 0;
  endtask

  for (genvar s = 0; s < NXC; s++) begin : g_src
    initial begin
      wait (random_ds);
      while (random_ds) begin
        int d;
        d = $urandom_range(NXC - 1);
        if ((d != s || s == XC_CORE) && $urandom_range(99) < 50) send(xc_e'(s), xc_e'(d));
        else @(negedge clk);
      end
    end
  end

  initial begin
    int loopbacks = 0, long_turns = 0;
    foreach (in_valid[i]) begin in_valid[i] = 0; in_flit[i] = '0; end
    row(XC_CORE,  XC_CORE,  '{XC_NORTH, XC_SOUTH, XC_EAST, XC_WEST}, 6);
    row(XC_CORE,  XC_NORTH, '{}, 2);
    row(XC_CORE,  XC_EAST,  '{XC_WEST}, 3);
    row(XC_CORE,  XC_SOUTH, '{XC_NORTH}, 3);
    row(XC_CORE,  XC_WEST,  '{}, 2);
    row(XC_NORTH, XC_EAST,  '{XC_SOUTH}, 3);
    row(XC_NORTH, XC_SOUTH, '{}, 2);
    row(XC_NORTH, XC_WEST,  '{XC_SOUTH, XC_EAST}, 4);
    row(XC_EAST,  XC_SOUTH, '{}, 2);
    row(XC_EAST,  XC_WEST,  '{}, 2);
    row(XC_SOUTH, XC_WEST,  '{XC_EAST}, 3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Directed: one flit at a time, latency against the table.
    for (int s = 0; s < NXC; s++) begin
      for (int d = 0; d < NXC; d++) begin
        int id;
        if (d == s && s != XC_CORE) continue;
        id = nid;
        send(xc_e'(s), xc_e'(d));
        repeat (10) @(negedge clk);
        checks++;
        if (!lat_seen.exists(id) || lat_seen[id] != hops_t[s][d]) begin
          failures++;
          $display("FAIL %s->%s latency %0d, table says %0d", xc_e'(s), xc_e'(d),
                   lat_seen.exists(id) ? lat_seen[id] : -1, hops_t[s][d]);
        end
        if (s == XC_CORE && d == XC_CORE) loopbacks++;
        if (hops_t[s][d] == 4) long_turns++;
      end
    end

    // Random traffic with back-pressure.
    random_ds = 1;
    repeat (3000) @(negedge clk);
    random_ds = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (exp_dst.size() != 0 || received != sent) begin
      failures++;
      $display("FAIL sent %0d received %0d, %0d missing", sent, received, exp_dst.size());
    end
    checks++;
    if (loopbacks == 0 || long_turns < 2 || backpressure == 0) begin
      failures++; $display("FAIL mechanism not exercised");
    end
    $display("flits=%0d loopbacks=%0d four_hop=%0d backpressure_cycles=%0d",
             received, loopbacks, long_turns, backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
