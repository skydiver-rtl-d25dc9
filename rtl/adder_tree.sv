// Adder tree of one stream of an SPE cluster.
//
// Sums the partial sums that the N channel-based SPEs of a cluster produce
// for the same output neuron of one stream (one "Add. tree" box of the SPE
// figure; the paper says each adder tree collects the partial sums of the
// corresponding stream of all channel-based SPEs). It pops all N stream FIFOs
// together once every one of them holds a value, so SPEs that finished early
// wait in their FIFOs for the slowest one. The sum is built as a balanced
// binary tree of adders and registered: out_valid/sum appear one cycle after
// the pop. Sign extension by log2(N) bits avoids overflow.
module adder_tree #(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 18,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            fifo_empty,
  input  logic signed [IN_W-1:0]  fifo_dout [N],
  output logic                    pop,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  // number of leaves rounded up to a power of two
  localparam int unsigned LEAVES = 1 << $clog2(N);

  logic signed [OUT_W-1:0] node [2*LEAVES-1];

  assign pop = ~|fifo_empty;

  // node[LEAVES-1+i] are the leaves, node[0] the root
  always_comb begin
    for (int i = 0; i < int'(LEAVES); i++)
      node[LEAVES-1+i] = (i < int'(N)) ? OUT_W'(fifo_dout[i]) : '0;
    for (int i = int'(LEAVES) - 2; i >= 0; i--)
      node[i] = node[2*i+1] + node[2*i+2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= pop;
      if (pop) sum <= node[0];
    end
  end
endmodule
