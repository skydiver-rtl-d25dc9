// Neuron state memory: input and output spike maps of a layer timestep.
//
// The paper buffers input spike trains streamed from DDR in a neuron state
// memory. Here it is one bit per neuron, one word per (channel, row) holding
// a full row of W_MAX columns, so the spike scheduler can look at a whole row
// at once and skip silent neurons. The host writes it in 32-column chunks.
// NRP read ports (one per spike-scheduler stream, replicated memory on an
// FPGA) return a row one cycle after the address.
//
// The output spike map of the layer (K_MAX channels of EH_MAX x EW_MAX) is kept
// in a second array of the same organisation. Every VMEM update unit writes
// one spike bit per cycle through its own port (NWP ports, always distinct
// neurons); the host reads the result in 32-column chunks with a one-cycle
// latency. Output bits are written for every neuron processed, spike or not,
// so the map needs no clearing between jobs. Keeping output spikes on chip
// and the row organisation are this design's choices.
module neuron_state_mem
  import skydiver_pkg::*;
#(
  parameter int unsigned NRP = N_SPE * N_STREAMS,
  parameter int unsigned NWP = M_CLUSTERS * N_STREAMS
) (
  input  logic                   clk,
  // host write of input spikes
  input  logic                   in_we,
  input  logic [CB-1:0]          in_wchan,
  input  logic [HB-1:0]          in_wrow,
  input  logic [3:0]             in_wchunk,
  input  logic [CHUNK-1:0]       in_wdata,
  // scheduler reads
  input  logic [CB-1:0]          rchan [NRP],
  input  logic [HB-1:0]          rrow  [NRP],
  output logic [W_MAX-1:0]       rdata [NRP],
  // output spike writes from the VMEM update units
  input  logic                   out_we   [NWP],
  input  logic [KB-1:0]          out_k    [NWP],
  input  logic [HB-1:0]          out_x    [NWP],
  input  logic [WB-1:0]          out_y    [NWP],
  input  logic                   out_spk  [NWP],
  // host read of output spikes
  input  logic [KB-1:0]          hr_k,
  input  logic [HB-1:0]          hr_row,
  input  logic [3:0]             hr_chunk,
  output logic [CHUNK-1:0]       hr_data
);
  localparam int unsigned IN_WORDS  = C_MAX * H_MAX;
  localparam int unsigned OUT_WORDS = K_MAX * EH_MAX;
  localparam int unsigned OUT_PADW  = ((EW_MAX + CHUNK - 1) / CHUNK) * CHUNK;

  logic [W_MAX-1:0]  imem [IN_WORDS];
  logic [EW_MAX-1:0] omem [OUT_WORDS];

  // input map: host write, chunk-wise
  always_ff @(posedge clk) begin
    if (in_we && int'(in_wchan) < int'(C_MAX) && int'(in_wrow) < int'(H_MAX)) begin
      for (int b = 0; b < int'(CHUNK); b++)
        if (int'(in_wchunk) * int'(CHUNK) + b < int'(W_MAX))
          imem[int'(in_wchan) * H_MAX + int'(in_wrow)][int'(in_wchunk) * CHUNK + b] <= in_wdata[b];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NRP); p++)
      rdata[p] <= (int'(rrow[p]) < int'(H_MAX)) ? imem[int'(rchan[p]) * H_MAX + int'(rrow[p])] : '0;
  end

  // output map: one bit per update unit and cycle
  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NWP); p++)
      if (out_we[p] && int'(out_x[p]) < int'(EH_MAX) && int'(out_y[p]) < int'(EW_MAX))
        omem[int'(out_k[p]) * EH_MAX + int'(out_x[p])][out_y[p]] <= out_spk[p];
  end

  logic [OUT_PADW-1:0] orow;
  always_comb begin
    orow = '0;
    if (int'(hr_row) < int'(EH_MAX))
      orow[EW_MAX-1:0] = omem[int'(hr_k) * EH_MAX + int'(hr_row)];
  end

  always_ff @(posedge clk)
    hr_data <= (int'(hr_chunk) < int'(OUT_PADW / CHUNK)) ? orow[int'(hr_chunk) * CHUNK +: CHUNK] : '0;
endmodule
