// tb_buffer_arbiter: checks the two-input round-robin buffer arbiter.
//
// A model holds the priority bit; random requests and enables are driven
// and the one-hot grant is compared every cycle. A directed phase with both
// inputs requesting all the time checks strict alternation (no starvation)
// and that nothing is granted while the buffer has no room.
module tb_buffer_arbiter;
  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0;
  logic [1:0] req, gnt;
  logic       en;

  buffer_arbiter dut (.*);

  always #5 clk = ~clk;

  logic prio_m = 0;

  task automatic check_cycle();
    logic [1:0] exp;
    exp = 2'b00;
    if (en) begin
      if (req[prio_m])       exp[prio_m]  = 1'b1;
      else if (req[!prio_m]) exp[!prio_m] = 1'b1;
    end
    checks++;
    if (gnt !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL req=%b en=%b gnt=%b exp=%b", req, en, gnt, exp);
    end
    @(posedge clk);
    if (exp[0]) prio_m = 1;
    else if (exp[1]) prio_m = 0;
    @(negedge clk);
  endtask

  initial begin
    int g0 = 0, g1 = 0;
    req = 0; en = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Both request continuously: grants must alternate.
    req = 2'b11; en = 1;
    for (int i = 0; i < 20; i++) begin
      #1;
      if (gnt[0]) g0++;
      if (gnt[1]) g1++;
      check_cycle();
    end
    checks++;
    if (g0 != 10 || g1 != 10) begin failures++; $display("FAIL unfair %0d/%0d", g0, g1); end

    // Full buffer: no grant.
    en = 0;
    #1 check_cycle();

    for (int i = 0; i < 2000; i++) begin
      req = 2'($urandom);
      en  = ($urandom_range(99) < 80);
      #1 check_cycle();
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
