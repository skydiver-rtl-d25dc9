// Skydiver: convolutional spiking-neural-network accelerator, top level.
//
// Runs one convolutional SNN layer for one timestep per job:
//   V[k][x][y] += b[k] + sum_c sum_jj,kk w[k][c][jj][kk] * S[c][x-pad+jj][y-pad+kk]
//   spike where V > Vth, then V -= Vth,
// with stride 1 and zero padding pad (R-1 by default, the paper's APRC
// padding under which every weight meets every input spike). Only input
// neurons that fired cause work (event-driven).
//
// Structure (following the paper's architecture description):
//   skydiver_ctrl     host decode, configuration, filter-group sequencing
//   neuron_state_mem  input spike map (host written) and output spike map
//   spike_sched       N x 4 schedulers, one per stream of each channel SPE,
//                     turning input spikes into weight/Psum commands; the
//                     commands are broadcast to all M clusters
//   spe_cluster       M filter-based clusters, each: weight bank, N channel
//                     SPEs of 4 streams, 4 adder trees, 4 VMEM update units
// Input channels are assigned to the N channel-based SPEs by a channel
// table the host writes from the offline CBWS schedule.
//
// Host interface (stands in for the DMA engine of the paper's system): one
// word write per cycle (host_we/host_waddr/host_wdata) and a read port
// (host_raddr -> host_rdata one cycle later) for status (region 5) and output
// spikes (region 6); see skydiver_pkg for the address map. `irq` pulses at
// the end of a job; `busy` is high during the post-reset Psum clear and jobs.
module skydiver_top
  import skydiver_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_we,
  input  logic [31:0] host_waddr,
  input  logic [31:0] host_wdata,
  input  logic [31:0] host_raddr,
  output logic [31:0] host_rdata,
  output logic        irq,
  output logic        busy,
  output logic [M_CLUSTERS*N_SPE-1:0] fifo_stall  // per cluster/SPE drain stall
);
  localparam int unsigned NRP = N_SPE * N_STREAMS;
  localparam int unsigned NWP = M_CLUSTERS * N_STREAMS;

  cfg_t          cfg;
  logic [CB:0]   ch_cnt     [N_SPE];
  logic [CB-1:0] ch_idx     [N_SPE][N_STREAMS];
  logic [CB-1:0] ch_val     [N_SPE][N_STREAMS];
  upd_t          upd        [N_SPE][N_STREAMS];
  logic          sched_busy [N_SPE][N_STREAMS];
  logic          sched_done [N_SPE][N_STREAMS];
  logic          cl_fin     [M_CLUSTERS];
  logic          w_we [M_CLUSTERS], b_we [M_CLUSTERS];
  logic [SB-1:0] w_slot, slot;
  logic [CB-1:0] w_chan;
  logic [RRB-1:0] w_r;
  logic signed [WBITS-1:0] w_data;
  logic signed [VBITS-1:0] b_data;
  logic          sp_we, start, clr;
  logic [CB-1:0] sp_chan;
  logic [HB-1:0] sp_row;
  logic [3:0]    sp_chunk;
  logic [CHUNK-1:0] sp_data;
  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr;
  logic [31:0]   stat_rdata;

  skydiver_ctrl u_ctrl (
    .clk, .rst_n, .host_we, .host_waddr, .host_wdata, .host_raddr, .stat_rdata, .irq,
    .cfg, .ch_cnt, .ch_idx, .ch_val,
    .w_we, .b_we, .w_slot, .w_chan, .w_r, .w_data, .b_data,
    .sp_we, .sp_chan, .sp_row, .sp_chunk, .sp_data,
    .start, .slot, .clr, .clr_addr, .sched_busy, .sched_done, .cl_fin, .busy
  );

  // ---- neuron state memory -----------------------------------------------------
  logic [CB-1:0]    rchan [NRP];
  logic [HB-1:0]    rrow  [NRP];
  logic [W_MAX-1:0] rdata [NRP];
  logic             o_we  [NWP];
  logic [KB-1:0]    o_k   [NWP];
  logic [HB-1:0]    o_x   [NWP];
  logic [WB-1:0]    o_y   [NWP];
  logic             o_spk [NWP];
  logic [CHUNK-1:0] hr_data;

  neuron_state_mem #(.NRP(NRP), .NWP(NWP)) u_nsm (
    .clk,
    .in_we(sp_we), .in_wchan(sp_chan), .in_wrow(sp_row), .in_wchunk(sp_chunk), .in_wdata(sp_data),
    .rchan, .rrow, .rdata,
    .out_we(o_we), .out_k(o_k), .out_x(o_x), .out_y(o_y), .out_spk(o_spk),
    .hr_k(host_raddr[16+KB-1:16]), .hr_row(host_raddr[4+HB-1:4]), .hr_chunk(host_raddr[3:0]),
    .hr_data
  );

  logic rd_ospk;
  always_ff @(posedge clk) rd_ospk <= (region_e'(host_raddr[31:28]) == RG_OSPIKE);
  assign host_rdata = rd_ospk ? hr_data : stat_rdata;

  // ---- spike schedulers ----------------------------------------------------------
  for (genvar j = 0; j < int'(N_SPE); j++) begin : g_sched
    for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_s
      logic spike_ev;
      spike_sched #(.STREAM(s)) u_sched (
        .clk, .rst_n, .cfg, .start,
        .ch_cnt(ch_cnt[j]), .ch_idx(ch_idx[j][s]), .ch_val(ch_val[j][s]),
        .rchan(rchan[j*N_STREAMS+s]), .rrow(rrow[j*N_STREAMS+s]), .rdata(rdata[j*N_STREAMS+s]),
        .upd(upd[j][s]), .busy(sched_busy[j][s]), .done(sched_done[j][s]), .spike_ev
      );
    end
  end

  // ---- SPE clusters ------------------------------------------------------------------
  for (genvar m = 0; m < int'(M_CLUSTERS); m++) begin : g_cl
    spe_cluster #(.CLUSTER(m)) u_cl (
      .clk, .rst_n, .cfg, .start, .slot, .clr, .clr_addr, .upd, .sched_done,
      .w_we(w_we[m]), .w_slot, .w_chan, .w_r, .w_data,
      .b_we(b_we[m]), .b_slot(w_slot), .b_data,
      .out_we (o_we [m*N_STREAMS +: N_STREAMS]),
      .out_k  (o_k  [m*N_STREAMS +: N_STREAMS]),
      .out_x  (o_x  [m*N_STREAMS +: N_STREAMS]),
      .out_y  (o_y  [m*N_STREAMS +: N_STREAMS]),
      .out_spk(o_spk[m*N_STREAMS +: N_STREAMS]),
      .fin(cl_fin[m]),
      .stall(fifo_stall[m*N_SPE +: N_SPE])
    );
  end
endmodule
