// Weight bank of one filter-based SPE cluster.
//
// The paper connects every SPE cluster to its own weight bank. Cluster m
// holds the filters k = m, m+M, m+2M, ... in SLOTS slots; slot g is the
// filter the cluster works on in filter group g. Each of the NP read ports
// serves one stream of one channel-based SPE, so every stream fetches one
// weight per cycle (on an FPGA the array would be replicated per port). The
// per-filter bias b of the paper's Eq. 2 is kept here as well.
//
// Timing: rdata[p] is the weight at (slot, rchan[p], rr[p]) one cycle after
// the address; the host write port (we/wslot/wchan/wr/wdata) and bias write
// port take effect at the clock edge. The bias read is combinational.
module weight_bank
  import skydiver_pkg::*;
#(
  parameter int unsigned NP = N_SPE * N_STREAMS
) (
  input  logic                    clk,
  // host writes
  input  logic                    we,
  input  logic [SB-1:0]           wslot,
  input  logic [CB-1:0]           wchan,
  input  logic [RRB-1:0]          wr,
  input  logic signed [WBITS-1:0] wdata,
  input  logic                    bias_we,
  input  logic [SB-1:0]           bias_wslot,
  input  logic signed [VBITS-1:0] bias_wdata,
  // stream reads
  input  logic [SB-1:0]           slot,
  input  logic [CB-1:0]           rchan [NP],
  input  logic [RRB-1:0]          rr    [NP],
  output logic signed [WBITS-1:0] rdata [NP],
  output logic signed [VBITS-1:0] bias
);
  localparam int unsigned DEPTH = SLOTS * C_MAX * RR;

  logic signed [WBITS-1:0] wmem [DEPTH];
  logic signed [VBITS-1:0] bmem [SLOTS];

  function automatic int unsigned idx(input logic [SB-1:0] s, input logic [CB-1:0] c,
                                      input logic [RRB-1:0] r);
    return (int'(s) * C_MAX + int'(c)) * RR + int'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (we && int'(wr) < int'(RR)) wmem[idx(wslot, wchan, wr)] <= wdata;
    if (bias_we) bmem[bias_wslot] <= bias_wdata;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NP); p++)
      rdata[p] <= (int'(rr[p]) < int'(RR)) ? wmem[idx(slot, rchan[p], rr[p])] : '0;
  end

  assign bias = bmem[slot];
endmodule
