// tb_exchange: self-checking test of one exchange (the south exchange of
// the router at (3,3)).
//
// Each of the three entry ports is driven with flits that name an exit port
// other than their own; the destinations are chosen so that the lookahead
// port the exchange must write into each flit is known from the ring
// arrangement:
//   exit A leads to the east exchange (entered by B): east dest -> E,
//          west dest -> A;
//   exit B leads to the north exchange (entered by A): north dest -> E,
//          dest at this router -> B;
//   exit E leads to the north exchange of router (3,2) (entered by E):
//          dest further south -> A, dest (3,2) -> B.
// The downstream side applies random space flags and random acceptance.
// Checked: every flit leaves by the port it named, once, with the expected
// lookahead port; a flit is only offered when the target buffer reports
// space; an isolated flit leaves one cycle after it was written; and the
// buffer arbiter has to choose between two entry ports at least once.
module tb_exchange;
  import ring_pkg::*;

  int checks = 0, failures = 0;

  logic               clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = 3, my_y = 3;
  logic               in_valid  [NPORT];
  flit_t              in_flit   [NPORT];
  logic               in_acc    [NPORT];
  space_t             space;
  logic               out_valid [NPORT];
  flit_t              out_flit  [NPORT];
  logic               out_acc   [NPORT];
  space_t             out_space [NPORT];

  exchange #(.XC_ID(XC_SOUTH)) dut (.*);

  always #5 clk = ~clk;

  // Expected flits per exit port, keyed by payload id.
  port_e exp_la [NPORT][int];
  int    sent = 0, received = 0, conflicts = 0, one_cycle_ok = 0;
  bit    random_ds = 0;

  function automatic flit_t make_flit(int q, int id, output port_e la);
    flit_t f;
    int    p;
    p = (q + 1 + $urandom_range(1)) % NPORT;  // any port but q
    f = '0;
    f.la_port = port_e'(p);
    f.payload = PAYLOAD_W'(id);
    case (p)
      PORT_A: if ($urandom_range(1)) begin f.dst_x = 3'($urandom_range(7, 4)); f.dst_y = 3'($urandom); la = PORT_E; end
              else begin f.dst_x = 3'($urandom_range(2, 0)); f.dst_y = 3'($urandom); la = PORT_A; end
      PORT_B: if ($urandom_range(1)) begin f.dst_x = 3; f.dst_y = 3'($urandom_range(7, 4)); la = PORT_E; end
              else begin f.dst_x = 3; f.dst_y = 3; la = PORT_B; end
      default: if ($urandom_range(1)) begin f.dst_x = 3; f.dst_y = 3'($urandom_range(1, 0)); la = PORT_A; end
               else begin f.dst_x = 3; f.dst_y = 2; la = PORT_B; end
    endcase
    return f;
  endfunction

  // Drivers: one per entry port, holding each flit until accepted.
  for (genvar q = 0; q < NPORT; q++) begin : g_drv
    initial begin
      port_e la;
      int    id;
      in_valid[q] = 0;
      in_flit[q]  = '0;
      wait (rst_n);
      @(negedge clk);
      forever begin
        if (sent < 1500 && random_ds && $urandom_range(99) < 70) begin
          id = q * 100000 + sent;
          sent++;
          in_flit[q]  = make_flit(q, id, la);
          exp_la[in_flit[q].la_port][id] = la;
          in_valid[q] = 1;
          do @(posedge clk); while (!in_acc[q]);
          @(negedge clk);
          in_valid[q] = 0;
        end else begin
          @(negedge clk);
        end
      end
    end
  end

  // Downstream model.
  always @(negedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      out_space[p] = random_ds ? space_t'($urandom) : '1;
      out_acc[p]   = random_ds ? ($urandom_range(99) < 70) : 1'b1;
    end
  end

  // Monitor.
  always @(posedge clk) if (rst_n) begin
    int n = 0;
    for (int p = 0; p < NPORT; p++) begin
      if (out_valid[p]) begin
        checks++;
        if (!out_space[p][out_flit[p].la_port]) begin
          failures++; $display("FAIL offered to a full buffer on port %0d", p);
        end
      end
      if (out_valid[p] && out_acc[p]) begin
        int id;
        id = int'(out_flit[p].payload);
        received++;
        checks++;
        if (!exp_la[p].exists(id)) begin
          failures++;
          if (failures < 10) $display("FAIL unexpected flit %0d on port %0d", id, p);
        end else begin
          if (exp_la[p][id] != out_flit[p].la_port) begin
            failures++;
            if (failures < 10) $display("FAIL flit %0d la=%0d exp %0d", id,
                                        out_flit[p].la_port, exp_la[p][id]);
          end
          exp_la[p].delete(id);
        end
      end
    end
    // Two entry ports asking for the same buffer in one cycle.
    for (int p = 0; p < NPORT; p++) begin
      n = 0;
      for (int q = 0; q < NPORT; q++)
        if (in_valid[q] && in_flit[q].la_port == port_e'(p)) n++;
      if (n == 2) conflicts++;
    end
  end

  initial begin
    port_e la;
    int    t0;
    foreach (out_acc[p]) begin out_acc[p] = 1; out_space[p] = '1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Isolated flit: written at an edge, accepted downstream at the next.
    force in_valid[PORT_E] = 1;
    force in_flit[PORT_E]  = make_flit(PORT_E, 7, la);
    exp_la[in_flit[PORT_E].la_port][7] = la;
    @(posedge clk);
    checks++;
    if (!in_acc[PORT_E]) begin failures++; $display("FAIL isolated flit not accepted"); end
    @(negedge clk);
    release in_valid[PORT_E];
    release in_flit[PORT_E];
    in_valid[PORT_E] = 0;
    t0 = received;
    @(posedge clk);
    #1;
    checks++;
    if (received != t0 + 1) begin failures++; $display("FAIL isolated flit took more than one cycle"); end
    else one_cycle_ok++;
    @(negedge clk);

    random_ds = 1;
    wait (sent >= 1500);
    random_ds = 0;
    repeat (100) @(negedge clk);

    checks++;
    if (received != sent + 1) begin
      failures++; $display("FAIL sent %0d received %0d", sent + 1, received);
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no buffer-arbiter conflict seen"); end
    $display("flits=%0d conflicts=%0d", received, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
