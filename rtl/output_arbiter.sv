// output_arbiter: picks the virtual channel that sends next from a buffer.
//
// req[v] is high when virtual channel v holds a flit whose target buffer in
// the downstream exchange has room. The arbiter grants one of them (gnt is
// one-hot, combinational) in round-robin order, starting after the channel
// served last. acc says the downstream buffer arbiter accepted the offered
// flit this cycle; only then does the priority move on, so an offer that
// lost downstream is repeated in the next cycle.
//
// Round-robin arbitration follows the paper; what the arbiter does on a lost
// offer is this design's own choice.
module output_arbiter #(
  parameter int NVC = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NVC-1:0] req,
  input  logic           acc,
  output logic [NVC-1:0] gnt
);

  localparam int VW = (NVC > 1) ? $clog2(NVC) : 1;

  logic [VW-1:0] last;  // channel served last

  always_comb begin
    gnt = '0;
    for (int k = 1; k <= NVC; k++) begin
      if (req[(int'(last) + k) % NVC] && gnt == '0) gnt[(int'(last) + k) % NVC] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= VW'(NVC - 1);
    end else if (acc) begin
      for (int v = 0; v < NVC; v++)
        if (gnt[v]) last <= VW'(v);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
