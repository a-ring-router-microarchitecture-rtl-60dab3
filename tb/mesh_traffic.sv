// mesh_traffic: traffic generator and checker for a ring-router mesh.
//
// Connects to the core side of a ring_mesh of MX x MY nodes and runs:
//  1. Zero-load latency: NZL single flits, one in the network at a time,
//     between random nodes (including a node to itself and paths that turn
//     from eastbound to northbound). The edges from injection to ejection
//     must equal the sum of the in-router hop counts along the XY path,
//     taken from the ring router's routing table (one cycle per exchange;
//     the links between routers add nothing).
//  2. Synthetic traffic: for each pattern selected in PATTERNS (bit 0
//     uniform, 1 transpose, 2 bitcomp, 3 shuffle, 4 hotspot, 5 asymmetric),
//     every node injects one-flit packets as a Bernoulli process of RATE
//     percent per cycle for CYCLES cycles into an unbounded source queue,
//     then the network drains. Cores accept with probability READY percent.
//     Every flit must arrive at its destination, once. The mean latency
//     (queueing in the source included) is printed per pattern.
// It counts the mechanisms of the design seen on the way (core loopback,
// four-exchange turn, injection stall, ejection back-pressure, two entry
// ports contending for one buffer inside a router) and counts a failure for
// any that never happened. Ends with the TB_RESULT line and $finish.
module mesh_traffic
  import ring_pkg::*;
#(
  parameter int MX       = 4,
  parameter int MY       = 4,
  parameter int NZL      = 40,
  parameter int PATTERNS = 6'b111111,
  parameter int CYCLES   = 400,
  parameter int RATE     = 10,
  parameter int READY    = 85,
  parameter int WATCHDOG = 200000
) (
  input  logic  clk,
  output logic  rst_n,
  output logic  inj_valid [MX*MY],
  output flit_t inj_flit  [MX*MY],
  input  logic  inj_acc   [MX*MY],
  input  logic  ej_valid  [MX*MY],
  input  flit_t ej_flit   [MX*MY],
  output logic  ej_ready  [MX*MY],
  input  int    contention  // cycles with two ports asking for one buffer
);

  localparam int N = MX * MY;

  int checks = 0, failures = 0;
  int cyc = 0;

  // In-router hop counts [entry exchange][exit exchange] (0 core, 1 north,
  // 2 south, 3 east, 4 west).
  int hops_t [5][5];

  // Scoreboard.
  int    exp_node [int];
  int    t_gen    [int];
  flit_t srcq     [N][$];
  int    next_id = 1;
  int    got = 0, lat_sum = 0;
  int    last_lat = 0;
  int    ready_pct = 100;
  int    loopbacks = 0, turns4 = 0, inj_stalls = 0, ej_stalls = 0;

  function automatic int node_x(int n); return n % MX; endfunction
  function automatic int node_y(int n); return n / MX; endfunction

  // Zero-load latency of the XY path from node s to node d.
  function automatic int path_latency(int s, int d, output bit four);
    int x = node_x(s), y = node_y(s), ent = 0, ex, lat = 0;
    four = 0;
    forever begin
      if      (node_x(d) > x) ex = 3;
      else if (node_x(d) < x) ex = 4;
      else if (node_y(d) > y) ex = 1;
      else if (node_y(d) < y) ex = 2;
      else                    ex = 0;
      lat += hops_t[ent][ex];
      if (hops_t[ent][ex] == 4) four = 1;
      case (ex)
        0: return lat;
        1: begin y++; ent = 2; end
        2: begin y--; ent = 1; end
        3: begin x++; ent = 4; end
        default: begin x--; ent = 3; end
      endcase
    end
  endfunction

  function automatic int log2n();
    int b = 0;
    while ((1 << b) < N) b++;
    return b;
  endfunction

  function automatic int pattern_dest(int pat, int s);
    int b = log2n(), mask = N - 1, half = N / 2;
    case (pat)
      1: return ((s >> (b / 2)) | (s << (b - b / 2))) & mask;      // transpose
      2: return ~s & mask;                                        // bitcomp
      3: return ((s << 1) & mask) | ((s >> (b - 1)) & 1);         // shuffle
      4: return ($urandom_range(99) < 25) ? (N / 2 + MX / 2) % N  // hotspot
                                          : $urandom_range(N - 1);
      5: return (s % half) + ($urandom_range(1) ? half : 0);      // asymmetric
      default: return $urandom_range(N - 1);                      // uniform
    endcase
  endfunction

  task automatic enqueue(int s, int d);
    flit_t f = '0;
    f.dst_x   = COORD_W'(node_x(d));
    f.dst_y   = COORD_W'(node_y(d));
    f.payload = PAYLOAD_W'(next_id);
    exp_node[next_id] = d;
    t_gen[next_id]    = cyc;
    next_id++;
    srcq[s].push_back(f);
  endtask

  // Drive at the falling edge, sample at the rising edge.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (inj_valid[n] && inj_acc[n]) void'(srcq[n].pop_front());
        if (inj_valid[n] && !inj_acc[n]) inj_stalls++;
        if (ej_valid[n] && !ej_ready[n]) ej_stalls++;
        if (ej_valid[n] && ej_ready[n]) begin
          int id;
          id = int'(ej_flit[n].payload);
          got++;
          checks++;
          if (!exp_node.exists(id) || exp_node[id] != n) begin
            failures++;
            if (failures < 10) $display("FAIL flit %0d ejected at node %0d", id, n);
          end else begin
            last_lat = cyc - t_gen[id];
            lat_sum += last_lat;
            exp_node.delete(id);
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      inj_valid[n] = rst_n && srcq[n].size() > 0;
      inj_flit[n]  = (srcq[n].size() > 0) ? srcq[n][0] : '0;
      ej_ready[n]  = ($urandom_range(99) < ready_pct);
    end
  end

  task automatic drain(int limit);
    int t = 0;
    while (exp_node.size() != 0 && t < limit) begin
      @(negedge clk);
      t++;
    end
  endtask

  initial begin : main
    bit four;
    rst_n = 0;
    foreach (inj_valid[n]) begin inj_valid[n] = 0; inj_flit[n] = '0; ej_ready[n] = 1; end
    hops_t[0] = '{6, 2, 3, 3, 2};
    hops_t[1] = '{2, 0, 2, 3, 4};
    hops_t[2] = '{3, 2, 0, 2, 3};
    hops_t[3] = '{3, 3, 2, 0, 2};
    hops_t[4] = '{2, 4, 3, 2, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // 1. Zero-load latency.
    for (int i = 0; i < NZL; i++) begin
      int s, d, want, t0;
      s = $urandom_range(N - 1);
      d = (i % 8 == 0) ? s : (i % 8 == 1) ? (s % MX == MX - 1 ? s : s + 1) : $urandom_range(N - 1);
      if (i % 8 == 2) begin s = 0; d = N - 1; end  // east then north: a 4-exchange turn
      want = path_latency(s, d, four);
      if (s == d) loopbacks++;
      if (four) turns4++;
      enqueue(s, d);
      drain(200);
      checks++;
      if (exp_node.size() != 0 || last_lat != want) begin
        failures++;
        $display("FAIL zero-load %0d->%0d latency %0d, expected %0d", s, d, last_lat, want);
        exp_node.delete();
      end
      repeat (2) @(negedge clk);
    end

    // 2. Synthetic traffic patterns.
    ready_pct = READY;
    for (int pat = 0; pat < 6; pat++) begin
      int got0, sum0, sent0;
      if (!PATTERNS[pat]) continue;
      got0 = got; sum0 = lat_sum; sent0 = next_id;
      for (int c = 0; c < CYCLES; c++) begin
        for (int s = 0; s < N; s++)
          if ($urandom_range(99) < RATE) begin
            int d;
            d = pattern_dest(pat, s);
            if (d == s) loopbacks++;
            enqueue(s, d);
          end
        @(negedge clk);
      end
      drain(20 * CYCLES + 2000);
      checks++;
      if (exp_node.size() != 0) begin
        failures++;
        $display("FAIL pattern %0d: %0d flits not delivered", pat, exp_node.size());
        exp_node.delete();
      end
      $display("pattern %0d: %0d flits, mean latency %0d.%02d cycles", pat, got - got0,
               (lat_sum - sum0) / ((got - got0) > 0 ? (got - got0) : 1),
               ((lat_sum - sum0) * 100 / ((got - got0) > 0 ? (got - got0) : 1)) % 100);
      if (next_id - sent0 != got - got0) begin
        checks++; failures++;
        $display("FAIL pattern %0d: sent %0d received %0d", pat, next_id - sent0, got - got0);
      end
    end

    $display("mechanisms: loopback=%0d four_exchange_turn=%0d injection_stall=%0d ejection_backpressure=%0d buffer_contention=%0d",
             loopbacks, turns4, inj_stalls, ej_stalls, contention);
    checks++;
    if (loopbacks == 0 || turns4 == 0 || inj_stalls == 0 || ej_stalls == 0 || contention == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
