// vc_buffer: exit-port buffer of an exchange, split into virtual channels.
//
// Every exit port of an exchange owns one buffer. It holds NVC virtual
// channels (2 in the evaluated ring router), each a FIFO of DEPTH flits
// (8), of W bits (128). Write and read ports are separate, so a flit can be
// written and another read in the same cycle.
//
// Write: when wr_en is high the flit on wr_data is stored at the tail of the
// virtual channel that currently holds the fewest flits and is not full
// (lowest index on a tie). space is high while at least one channel can take
// a flit; wr_en must only be raised while space is high.
// Read: head_valid[v]/head_data[v] show the oldest flit of channel v,
// read straight from the storage array. pop[v] removes it at the next edge.
// A flit written at one edge is visible at the head from that edge on, so a
// flit can pass through the buffer in one cycle.
//
// The paper writes on the falling clock edge and reads on the rising one;
// here both ports use the rising edge and the head is read combinationally,
// which keeps the same one-cycle traversal. The channel-selection rule on
// writes is this design's own: the paper does not say how a virtual channel
// is chosen. The rest follows the paper's sizes.
module vc_buffer #(
  parameter int NVC   = 2,
  parameter int DEPTH = 8,
  parameter int W     = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         space,
  output logic         head_valid [NVC],
  output logic [W-1:0] head_data  [NVC],
  input  logic         pop        [NVC]
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);
  localparam int VW = (NVC > 1) ? $clog2(NVC) : 1;

  logic [W-1:0]  mem    [NVC][DEPTH];
  logic [PW-1:0] rd_ptr [NVC];
  logic [PW-1:0] wr_ptr [NVC];
  logic [CW-1:0] count  [NVC];
  logic [VW-1:0] wr_vc;
  logic          push [NVC];
  logic          take [NVC];

  // Choose the emptiest non-full virtual channel.
  always_comb begin
    logic [CW-1:0] best;
    wr_vc = '0;
    space = 1'b0;
    best  = CW'(DEPTH);
    for (int v = 0; v < NVC; v++) begin
      if (count[v] < best) begin
        best  = count[v];
        wr_vc = VW'(v);
        space = 1'b1;
      end
    end
  end

  always_comb begin
    for (int v = 0; v < NVC; v++) begin
      head_valid[v] = (count[v] != '0);
      head_data[v]  = mem[v][rd_ptr[v]];
    end
  end

  always_comb begin
    for (int v = 0; v < NVC; v++) begin
      push[v] = wr_en && (wr_vc == VW'(v));
      take[v] = pop[v] && head_valid[v];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_vc][wr_ptr[wr_vc]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NVC; v++) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end
    end else begin
      for (int v = 0; v < NVC; v++) begin
        if (push[v]) wr_ptr[v] <= (wr_ptr[v] == PW'(DEPTH - 1)) ? '0 : wr_ptr[v] + 1'b1;
        if (take[v]) rd_ptr[v] <= (rd_ptr[v] == PW'(DEPTH - 1)) ? '0 : rd_ptr[v] + 1'b1;
        count[v] <= count[v] + CW'(push[v]) - CW'(take[v]);
      end
    end
  end

  // A write is only allowed while some channel has room.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> space);

endmodule
