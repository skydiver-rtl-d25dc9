// Controller of the Skydiver accelerator.
//
// The paper's controller decodes the information fetched from the host and
// updates the state of the accelerator. Here it
//  * decodes host word writes by region (see skydiver_pkg): layer
//    configuration, weights and biases (routed to cluster k mod M, slot
//    k div M), the CBWS channel table of every channel-based SPE, and input
//    spike chunks (passed to the neuron state memory);
//  * derives the output size and the four stream bands of a layer:
//    E = H + 2*pad - R + 1 (stride 1), band = ceil(E_rows / 4);
//  * after reset sweeps every Psum address once with `clr` (INIT);
//  * on a START write runs the layer timestep: for each filter group
//    g = 0 .. ceil(K/M)-1 it pulses `start` to all spike schedulers, SPE
//    streams and VMEM units with slot = g, then waits until every scheduler
//    is done and every cluster reports `fin`;
//  * counts the job's cycles and, per SPE j, the cycles its four scheduler
//    streams were busy (the SPE's workload; balance ratio = mean / max).
// Status reads have one cycle of latency. `irq` pulses when a job ends.
// The sequencing and the host map are this design's choices.
module skydiver_ctrl
  import skydiver_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // host bus
  input  logic                    host_we,
  input  logic [31:0]             host_waddr,
  input  logic [31:0]             host_wdata,
  input  logic [31:0]             host_raddr,
  output logic [31:0]             stat_rdata,
  output logic                    irq,
  // configuration
  output cfg_t                    cfg,
  // channel table lookup of the schedulers
  output logic [CB:0]             ch_cnt [N_SPE],
  input  logic [CB-1:0]           ch_idx [N_SPE][N_STREAMS],
  output logic [CB-1:0]           ch_val [N_SPE][N_STREAMS],
  // weight / bias writes
  output logic                    w_we   [M_CLUSTERS],
  output logic                    b_we   [M_CLUSTERS],
  output logic [SB-1:0]           w_slot,
  output logic [CB-1:0]           w_chan,
  output logic [RRB-1:0]          w_r,
  output logic signed [WBITS-1:0] w_data,
  output logic signed [VBITS-1:0] b_data,
  // input spike writes
  output logic                    sp_we,
  output logic [CB-1:0]           sp_chan,
  output logic [HB-1:0]           sp_row,
  output logic [3:0]              sp_chunk,
  output logic [CHUNK-1:0]        sp_data,
  // sequencing
  output logic                    start,
  output logic [SB-1:0]           slot,
  output logic                    clr,
  output logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr,
  input  logic                    sched_busy [N_SPE][N_STREAMS],
  input  logic                    sched_done [N_SPE][N_STREAMS],
  input  logic                    cl_fin     [M_CLUSTERS],
  output logic                    busy
);
  localparam int unsigned CLR_N = BAND_MAX * EW_MAX;

  typedef enum logic [2:0] {C_INIT, C_IDLE, C_START, C_WAIT, C_RUN} cstate_e;
  cstate_e state;

  // ---- configuration registers ---------------------------------------------
  logic [CB:0]   r_c;
  logic [KB:0]   r_k;
  logic [HB-1:0] r_h;
  logic [WB-1:0] r_w;
  logic [1:0]    r_pad;
  logic signed [VBITS-1:0] r_vth;
  logic          r_first;
  logic [CB-1:0] ctab [N_SPE][CTAB_MAX];
  logic          done_flag;

  region_e rg;
  assign rg = region_e'(host_waddr[31:28]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_c     <= '0;
      r_k     <= '0;
      r_h     <= '0;
      r_w     <= '0;
      r_pad   <= 2'(R - 1);
      r_vth   <= '0;
      r_first <= 1'b1;
      for (int j = 0; j < int'(N_SPE); j++) ch_cnt[j] <= '0;
    end else if (host_we && rg == RG_CFG) begin
      unique case (host_waddr[7:0])
        8'd0: r_c     <= host_wdata[CB:0];
        8'd1: r_k     <= host_wdata[KB:0];
        8'd2: r_h     <= host_wdata[HB-1:0];
        8'd3: r_w     <= host_wdata[WB-1:0];
        8'd4: r_pad   <= host_wdata[1:0];
        8'd5: r_vth   <= host_wdata[VBITS-1:0];
        8'd6: r_first <= host_wdata[0];
        default:
          for (int j = 0; j < int'(N_SPE); j++)
            if (int'(host_waddr[7:0]) == 16 + j) ch_cnt[j] <= host_wdata[CB:0];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (host_we && rg == RG_CTAB && int'(host_waddr[15:8]) < int'(N_SPE)
        && int'(host_waddr[7:0]) < int'(CTAB_MAX))
      ctab[int'(host_waddr[15:8])][int'(host_waddr[7:0])] <= host_wdata[CB-1:0];
  end

  always_comb begin
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++)
        ch_val[j][s] = ctab[j][ch_idx[j][s]];
  end

  // derived sizes
  always_comb begin
    cfg.c_in  = r_c;
    cfg.k_out = r_k;
    cfg.h     = r_h;
    cfg.w     = r_w;
    cfg.pad   = r_pad;
    cfg.eh    = HB'(int'(r_h) + 2 * int'(r_pad) - int'(R) + 1);
    cfg.ew    = WB'(int'(r_w) + 2 * int'(r_pad) - int'(R) + 1);
    cfg.band  = HB'((int'(cfg.eh) + int'(N_STREAMS) - 1) / int'(N_STREAMS));
    cfg.vth   = r_vth;
    cfg.first = r_first;
  end

  // ---- weight, bias and spike write routing -----------------------------------
  logic [KB-1:0] wk;
  assign wk     = host_waddr[12+KB-1:12];
  logic [KB-1:0] wbk;
  assign wbk    = (rg == RG_BIAS) ? host_waddr[KB-1:0] : wk;
  assign w_slot = SB'(int'(wbk) / int'(M_CLUSTERS));
  assign w_chan = host_waddr[4+CB-1:4];
  assign w_r    = host_waddr[RRB-1:0];
  assign w_data = host_wdata[WBITS-1:0];
  assign b_data = host_wdata[VBITS-1:0];
  always_comb begin
    for (int m = 0; m < int'(M_CLUSTERS); m++) begin
      w_we[m] = host_we && rg == RG_WEIGHT && (int'(wk) % int'(M_CLUSTERS)) == m;
      b_we[m] = host_we && rg == RG_BIAS &&
                (int'(host_waddr[KB-1:0]) % int'(M_CLUSTERS)) == m;
    end
  end

  assign sp_we    = host_we && rg == RG_SPIKE;
  assign sp_chan  = host_waddr[16+CB-1:16];
  assign sp_row   = host_waddr[4+HB-1:4];
  assign sp_chunk = host_waddr[3:0];
  assign sp_data  = host_wdata;

  // ---- sequencing --------------------------------------------------------------
  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) all_done &= sched_done[j][s];
    for (int m = 0; m < int'(M_CLUSTERS); m++) all_done &= cl_fin[m];
  end

  logic start_req;
  assign start_req = host_we && rg == RG_CFG && host_waddr[7:0] == 8'd7 && host_wdata[0];

  logic [31:0] job_cycles;
  logic [31:0] spe_busy [N_SPE];

  // busy streams of every SPE in this cycle
  logic [31:0] nbusy [N_SPE];
  always_comb
    for (int j = 0; j < int'(N_SPE); j++) begin
      nbusy[j] = '0;
      for (int s = 0; s < int'(N_STREAMS); s++) nbusy[j] += 32'(sched_busy[j][s]);
    end

  assign clr   = (state == C_INIT);
  assign start = (state == C_START);
  assign busy  = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_INIT;
      clr_addr   <= '0;
      slot       <= '0;
      done_flag  <= 1'b0;
      irq        <= 1'b0;
      job_cycles <= '0;
      for (int j = 0; j < int'(N_SPE); j++) spe_busy[j] <= '0;
    end else begin
      irq <= 1'b0;
      if (state != C_IDLE && state != C_INIT) job_cycles <= job_cycles + 1;
      for (int j = 0; j < int'(N_SPE); j++) spe_busy[j] <= spe_busy[j] + nbusy[j];
      unique case (state)
        C_INIT: begin
          clr_addr <= clr_addr + 1'b1;
          if (int'(clr_addr) == int'(CLR_N) - 1) state <= C_IDLE;
        end
        C_IDLE: if (start_req) begin
          slot       <= '0;
          done_flag  <= 1'b0;
          job_cycles <= '0;
          for (int j = 0; j < int'(N_SPE); j++) spe_busy[j] <= '0;
          state      <= (r_k == '0) ? C_IDLE : C_START;
        end
        C_START: state <= C_WAIT;
        C_WAIT:  state <= C_RUN;
        C_RUN: if (all_done) begin
          if ((int'(slot) + 1) * int'(M_CLUSTERS) >= int'(r_k)) begin
            state     <= C_IDLE;
            done_flag <= 1'b1;
            irq       <= 1'b1;
          end else begin
            slot  <= slot + 1'b1;
            state <= C_START;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // ---- status read -------------------------------------------------------------
  always_ff @(posedge clk) begin
    stat_rdata <= '0;
    if (host_raddr[7:0] == 8'd0)      stat_rdata <= {30'd0, busy, done_flag};
    else if (host_raddr[7:0] == 8'd1) stat_rdata <= job_cycles;
    else
      for (int j = 0; j < int'(N_SPE); j++)
        if (int'(host_raddr[7:0]) == 2 + j) stat_rdata <= spe_busy[j];
  end

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                          start_req |-> state == C_IDLE);
endmodule
