// tb_output_arbiter: checks the round-robin virtual-channel output arbiter.
//
// A model keeps the channel served last; the grant must be the first
// requesting channel after it, and the priority may only move when the
// downstream exchange accepted the flit (acc). Random requests and
// acceptances are driven with four channels as well as with the default two.
module tb_output_arbiter;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0;
  logic [1:0] req2, gnt2;
  logic [3:0] req4, gnt4;
  logic       acc;

  output_arbiter #(.NVC(2)) dut2 (.clk, .rst_n, .req(req2), .acc, .gnt(gnt2));
  output_arbiter #(.NVC(4)) dut4 (.clk, .rst_n, .req(req4), .acc, .gnt(gnt4));

  always #5 clk = ~clk;

  int last2 = 1, last4 = 3;

  function automatic int pick(int n, logic [3:0] r, int last);
    for (int k = 1; k <= n; k++)
      if (r[(last + k) % n]) return (last + k) % n;
    return -1;
  endfunction

  initial begin
    int s2, s4, served0 = 0, served1 = 0;
    req2 = 0; req4 = 0; acc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int i = 0; i < 3000; i++) begin
      req2 = (i < 40) ? 2'b11 : 2'($urandom);
      req4 = 4'($urandom);
      acc  = (i < 40) ? 1'b1 : ($urandom_range(99) < 60);
      #1;
      s2 = pick(2, {2'b00, req2}, last2);
      s4 = pick(4, req4, last4);
      checks += 2;
      if (gnt2 !== ((s2 < 0) ? 2'b00 : 2'(1 << s2))) begin
        failures++;
        if (failures < 10) $display("FAIL nvc2 req=%b gnt=%b exp %0d", req2, gnt2, s2);
      end
      if (gnt4 !== ((s4 < 0) ? 4'b0000 : 4'(1 << s4))) begin
        failures++;
        if (failures < 10) $display("FAIL nvc4 req=%b gnt=%b exp %0d", req4, gnt4, s4);
      end
      if (i < 40) begin
        if (gnt2[0]) served0++;
        if (gnt2[1]) served1++;
      end
      @(posedge clk);
      if (acc && s2 >= 0) last2 = s2;
      if (acc && s4 >= 0) last4 = s4;
      @(negedge clk);
    end
    checks++;
    if (served0 != 20 || served1 != 20) begin
      failures++; $display("FAIL not round robin %0d/%0d", served0, served1);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
