// Filter-based SPE cluster.
//
// A cluster computes the membrane potentials of one output channel (filter)
// at a time, as in the paper's SPE figure: N channel-based SPEs each add up
// the contribution of their share of the input channels, four adder trees
// (one per stream) sum the N partial sums of each output neuron, and a VMEM
// update unit per stream integrates the result and fires. The cluster owns
// its weight bank. Which filter it works on is given by `slot` (filter group
// g); its global output channel is k = slot*M + CLUSTER.
//
// The spike-scheduler commands `upd[j][s]` are shared by all clusters: every
// cluster sees the same input spikes and differs only in its weights. A
// command's weight is read from the weight bank in the cycle after the
// command and meets it inside the SPE stream.
//
// `fin` is high when every SPE stream has drained and every VMEM unit has
// processed its band; the controller waits for it in all clusters.
module spe_cluster
  import skydiver_pkg::*;
#(
  parameter int unsigned CLUSTER = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic                    start,
  input  logic [SB-1:0]           slot,
  input  logic                    clr,
  input  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr,
  input  upd_t                    upd        [N_SPE][N_STREAMS],
  input  logic                    sched_done [N_SPE][N_STREAMS],
  // host writes of this cluster's weights and biases
  input  logic                    w_we,
  input  logic [SB-1:0]           w_slot,
  input  logic [CB-1:0]           w_chan,
  input  logic [RRB-1:0]          w_r,
  input  logic signed [WBITS-1:0] w_data,
  input  logic                    b_we,
  input  logic [SB-1:0]           b_slot,
  input  logic signed [VBITS-1:0] b_data,
  // output spike writes, one per stream
  output logic                    out_we  [N_STREAMS],
  output logic [KB-1:0]           out_k   [N_STREAMS],
  output logic [HB-1:0]           out_x   [N_STREAMS],
  output logic [WB-1:0]           out_y   [N_STREAMS],
  output logic                    out_spk [N_STREAMS],
  output logic                    fin,
  output logic [N_SPE-1:0]        stall
);
  localparam int unsigned NP  = N_SPE * N_STREAMS;
  localparam int unsigned Z_W = PSUM_BITS + $clog2(N_SPE);

  logic [CB-1:0]           rchan [NP];
  logic [RRB-1:0]          rr    [NP];
  logic signed [WBITS-1:0] rdata [NP];
  logic signed [VBITS-1:0] bias;

  logic [KB-1:0] k;
  logic          active;
  assign k      = KB'(int'(slot) * int'(M_CLUSTERS) + int'(CLUSTER));
  assign active = (int'(slot) * int'(M_CLUSTERS) + int'(CLUSTER)) < int'(cfg.k_out);

  for (genvar j = 0; j < int'(N_SPE); j++) begin : g_port
    for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_s
      assign rchan[j*N_STREAMS+s] = upd[j][s].chan;
      assign rr[j*N_STREAMS+s]    = upd[j][s].r;
    end
  end

  weight_bank #(.NP(NP)) u_wbank (
    .clk,
    .we(w_we), .wslot(w_slot), .wchan(w_chan), .wr(w_r), .wdata(w_data),
    .bias_we(b_we), .bias_wslot(b_slot), .bias_wdata(b_data),
    .slot, .rchan, .rr, .rdata, .bias
  );

  logic signed [PSUM_BITS-1:0] dout  [N_SPE][N_STREAMS];
  logic                        empty [N_SPE][N_STREAMS];
  logic                        sfin  [N_SPE][N_STREAMS];
  logic                        sstall[N_SPE][N_STREAMS];
  logic                        pop   [N_STREAMS];
  logic                        vfin  [N_STREAMS];

  for (genvar j = 0; j < int'(N_SPE); j++) begin : g_spe
    logic signed [WBITS-1:0] w [N_STREAMS];
    for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_w
      assign w[s] = rdata[j*N_STREAMS+s];
    end
    channel_spe u_spe (
      .clk, .rst_n, .cfg, .start, .clr, .clr_addr,
      .upd(upd[j]), .sched_done(sched_done[j]), .w,
      .pop, .dout(dout[j]), .empty(empty[j]), .fin(sfin[j]), .stall(sstall[j])
    );
    always_comb begin
      stall[j] = 1'b0;
      for (int s = 0; s < int'(N_STREAMS); s++) stall[j] |= sstall[j][s];
    end
  end

  for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_tree
    logic [N_SPE-1:0]            fe;
    logic signed [PSUM_BITS-1:0] fd [N_SPE];
    logic                        zv;
    logic signed [Z_W-1:0]       z;
    for (genvar j = 0; j < int'(N_SPE); j++) begin : g_in
      assign fe[j] = empty[j][s];
      assign fd[j] = dout[j][s];
    end
    adder_tree #(.N(N_SPE), .IN_W(PSUM_BITS), .OUT_W(Z_W)) u_tree (
      .clk, .rst_n, .fifo_empty(fe), .fifo_dout(fd), .pop(pop[s]),
      .out_valid(zv), .sum(z)
    );
    vmem_update #(.STREAM(s), .Z_W(Z_W)) u_vmem (
      .clk, .rst_n, .cfg, .start, .slot, .k, .active, .bias,
      .in_valid(zv), .z,
      .out_we(out_we[s]), .out_k(out_k[s]), .out_x(out_x[s]), .out_y(out_y[s]),
      .out_spk(out_spk[s]), .fin(vfin[s])
    );
  end

  always_comb begin
    fin = 1'b1;
    for (int s = 0; s < int'(N_STREAMS); s++) begin
      fin &= vfin[s];
      for (int j = 0; j < int'(N_SPE); j++) fin &= sfin[j][s];
    end
  end
endmodule
