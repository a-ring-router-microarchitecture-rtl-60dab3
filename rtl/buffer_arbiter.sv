// buffer_arbiter: decides which of the two entry ports may write a buffer.
//
// A buffer in an exchange can be written from either of the two ports that
// are not its own (an exchange never sends a flit back out of the port it
// came in by). req[0] and req[1] are the write requests of those two ports;
// en is high while the buffer has room. At most one request is granted per
// cycle, combinationally, in round-robin order: after a grant the other
// input has priority, so neither entry port can starve.
//
// Round-robin arbitration follows the paper; the priority register being
// reset to input 0 is this design's own choice.
module buffer_arbiter (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] req,
  input  logic       en,
  output logic [1:0] gnt
);

  logic prio;  // input with priority this cycle

  always_comb begin
    gnt = 2'b00;
    if (en) begin
      if (req[prio])       gnt[prio]  = 1'b1;
      else if (req[!prio]) gnt[!prio] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       prio <= 1'b0;
    else if (gnt[0])  prio <= 1'b1;
    else if (gnt[1])  prio <= 1'b0;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(gnt[0] && gnt[1]));

endmodule
