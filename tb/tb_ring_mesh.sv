// tb_ring_mesh: end-to-end test of a 4x4 ring-router mesh.
//
// The mesh is built at 4x4 to keep the run short; mesh_traffic drives every
// core port: zero-load latencies against the routing table, then all six
// synthetic traffic patterns with random ejection back-pressure, checking
// that every flit reaches its destination. Contention for a buffer (both
// entry ports of an exchange asking for the same buffer in one cycle) is
// counted here by looking at the buffer-arbiter requests inside the mesh.
module tb_ring_mesh;
  import ring_pkg::*;
  localparam int MX = 4, MY = 4, N = MX * MY;

  logic  clk = 0, rst_n;
  logic  inj_valid [N];
  flit_t inj_flit  [N];
  logic  inj_acc   [N];
  logic  ej_valid  [N];
  flit_t ej_flit   [N];
  logic  ej_ready  [N];
  int    contention = 0;

  always #5 clk = ~clk;

  ring_mesh #(.MESH_X(MX), .MESH_Y(MY)) dut (.*);

  mesh_traffic #(.MX(MX), .MY(MY), .NZL(48), .CYCLES(400), .RATE(30)) gen (.*);

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
