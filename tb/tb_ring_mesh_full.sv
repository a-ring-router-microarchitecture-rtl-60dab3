// tb_ring_mesh_full: the mesh at its full default size (8x8, 128-bit flits,
// two 8-flit virtual channels per buffer) running the six synthetic traffic
// patterns the ring router was evaluated with: uniform, transpose, bitcomp,
// shuffle, hotspot and asymmetric, one-flit packets, every node injecting
// at 20% flits/cycle for 1000 cycles. mesh_traffic first checks zero-load latencies against
// the in-router routing table, then checks delivery of every flit and prints
// the mean latency of each pattern.
module tb_ring_mesh_full;
  import ring_pkg::*;
  localparam int MX = 8, MY = 8, N = MX * MY;

  logic  clk = 0, rst_n;
  logic  inj_valid [N];
  flit_t inj_flit  [N];
  logic  inj_acc   [N];
  logic  ej_valid  [N];
  flit_t ej_flit   [N];
  logic  ej_ready  [N];
  int    contention = 0;

  always #5 clk = ~clk;

  ring_mesh dut (.*);

  mesh_traffic #(.MX(MX), .MY(MY), .NZL(32), .CYCLES(1000), .RATE(20), .READY(90))
    gen (.*);

  // Both entry ports asking for one buffer, anywhere in the mesh.
  logic [N*NXC*NPORT-1:0] both;
  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      for (genvar i = 0; i < NXC; i++) begin : g_i
        for (genvar p = 0; p < NPORT; p++) begin : g_p
          assign both[((y * MX + x) * NXC + i) * NPORT + p] =
              &dut.g_y[y].g_x[x].u_router.g_xc[i].u_xc.g_port[p].req;
        end
      end
    end
  end
  always @(posedge clk) if (both != '0) contention++;
endmodule
