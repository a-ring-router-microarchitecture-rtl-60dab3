// tb_vc_buffer: self-checking test of the virtual-channel exit buffer.
//
// A reference model keeps one queue per virtual channel and applies the
// write rule independently (emptiest channel that is not full, lowest index
// on a tie). Random writes and pops are driven on the falling edge; before
// every rising edge the head of every channel and the space flag are
// compared with the model. A directed phase first checks that a flit
// written at one edge is at the head right after it (one-cycle pass) and
// that the buffer reports no space after NVC*DEPTH writes.
module tb_vc_buffer;
  localparam int NVC = 2, DEPTH = 8, W = 128;

  int checks = 0, failures = 0;

  logic         clk = 0, rst_n = 0;
  logic         wr_en;
  logic [W-1:0] wr_data;
  logic         space;
  logic         head_valid [NVC];
  logic [W-1:0] head_data  [NVC];
  logic         pop        [NVC];

  vc_buffer #(.NVC(NVC), .DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  logic [W-1:0] q [NVC][$];

  function automatic int pick_vc();
    int best = DEPTH, v_sel = -1;
    for (int v = 0; v < NVC; v++)
      if (q[v].size() < best) begin best = q[v].size(); v_sel = v; end
    return v_sel;
  endfunction

  task automatic compare(string tag);
    checks++;
    if (space != (pick_vc() >= 0)) begin
      failures++;
      $display("FAIL %s: space=%0d", tag, space);
    end
    for (int v = 0; v < NVC; v++) begin
      checks++;
      if (head_valid[v] != (q[v].size() > 0) ||
          (q[v].size() > 0 && head_data[v] != q[v][0])) begin
        failures++;
        if (failures < 10) $display("FAIL %s: vc%0d head_valid=%0d size=%0d", tag, v,
                                    head_valid[v], q[v].size());
      end
    end
  endtask

  // Apply the stimulus of this cycle to the model at the rising edge.
  task automatic step();
    int v_w;
    v_w = wr_en ? pick_vc() : -1;
    @(posedge clk);
    for (int v = 0; v < NVC; v++)
      if (pop[v] && q[v].size() > 0) void'(q[v].pop_front());
    if (v_w >= 0) q[v_w].push_back(wr_data);
    @(negedge clk);
  endtask

  function automatic logic [W-1:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    wr_en = 0; wr_data = '0;
    foreach (pop[v]) pop[v] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("reset");

    // One-cycle pass: written at an edge, at the head right after it.
    wr_en = 1; wr_data = rnd_word();
    step();
    wr_en = 0;
    compare("pass");
    checks++;
    if (!head_valid[0] || head_data[0] != q[0][0]) begin
      failures++; $display("FAIL one-cycle pass");
    end
    pop[0] = 1; step(); pop[0] = 0;
    compare("drain");

    // Fill completely: space must drop after NVC*DEPTH writes.
    for (int i = 0; i < NVC * DEPTH; i++) begin
      wr_en = 1; wr_data = rnd_word();
      step();
      compare("fill");
    end
    wr_en = 0;
    checks++;
    if (space) begin failures++; $display("FAIL space still high when full"); end
    for (int i = 0; i < DEPTH; i++) begin
      foreach (pop[v]) pop[v] = 1;
      step();
      compare("empty");
    end
    foreach (pop[v]) pop[v] = 0;

    // Random traffic.
    for (int i = 0; i < 3000; i++) begin
      wr_en   = space && ($urandom_range(99) < 60);
      wr_data = rnd_word();
      foreach (pop[v]) pop[v] = ($urandom_range(99) < 45);
      #1 compare("random");
      step();
    end

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
