// Channel-based SPE: the finest grain of workload balance.
//
// One channel-based SPE of one cluster accumulates the contribution of its
// subset of input channels (the channel list chosen by the offline CBWS
// schedule) to the cluster's current output channel. As in the paper, its
// work is split into four streams, each computing an equal share of output
// rows; each stream is the weight -> adder -> Psum -> FIFO chain of the SPE
// figure. The paper's figure also shows a Vmem input and a selector in front
// of the adder; here Vmem is added after the adder tree (see vmem_update), so
// the adder only ever adds weights.
//
// Per stream:
//  * accumulate: a command from the stream's spike scheduler, delayed by one
//    cycle to meet the weight read from the weight bank, adds the weight to
//    Psum[xl][y] (read-modify-write in one cycle, so back-to-back commands to
//    the same neuron need no forwarding);
//  * drain: once the scheduler reports done, the stream walks its band of
//    output neurons in raster order (row, then column), pushes each partial
//    sum into its FIFO and clears the Psum word. A full FIFO stalls the walk.
//    An early stream thus pre-loads its FIFO while slower SPEs still work.
//  * clear: after reset the controller sweeps clr_addr over the Psum words
//    with clr high, so every Psum starts at zero; from then on drain keeps it so.
// `fin[s]` is high once stream s has pushed its whole band.
module channel_spe
  import skydiver_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  cfg_t                        cfg,
  input  logic                        start,
  input  logic                        clr,
  input  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr,
  input  upd_t                        upd        [N_STREAMS],
  input  logic                        sched_done [N_STREAMS],
  input  logic signed [WBITS-1:0]     w          [N_STREAMS],
  input  logic                        pop        [N_STREAMS],
  output logic signed [PSUM_BITS-1:0] dout       [N_STREAMS],
  output logic                        empty      [N_STREAMS],
  output logic                        fin        [N_STREAMS],
  output logic                        stall      [N_STREAMS]
);
  localparam int unsigned DEPTH = BAND_MAX * EW_MAX;
  localparam int unsigned AW    = $clog2(DEPTH);

  typedef enum logic [2:0] {D_IDLE, D_ACC, D_WAIT, D_DRAIN, D_FIN} dstate_e;

  for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_stream
    logic signed [PSUM_BITS-1:0] psum [DEPTH];
    upd_t         upd_q;
    dstate_e      st;
    logic [HB-1:0] dx;
    logic [WB-1:0] dy;
    logic          full, push;
    logic signed [31:0] rows;
    logic [AW-1:0] acc_addr, dr_addr;

    always_comb begin
      rows = int'(cfg.eh) - s * int'(cfg.band);
      if (rows > int'(cfg.band)) rows = int'(cfg.band);
      if (rows < 0) rows = 0;
    end

    assign acc_addr = AW'(int'(upd_q.xl) * int'(EW_MAX) + int'(upd_q.y));
    assign dr_addr  = AW'(int'(dx) * int'(EW_MAX) + int'(dy));
    assign push     = (st == D_DRAIN) && !full;
    assign fin[s]   = (st == D_FIN);
    assign stall[s] = (st == D_DRAIN) && full;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) upd_q <= '0;
      else        upd_q <= upd[s];
    end

    // Psum memory: one write per cycle
    always_ff @(posedge clk) begin
      if (clr)
        psum[clr_addr] <= '0;
      else if (upd_q.valid)
        psum[acc_addr] <= psum[acc_addr] + PSUM_BITS'(w[s]);
      else if (push)
        psum[dr_addr] <= '0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st <= D_IDLE;
        dx <= '0;
        dy <= '0;
      end else begin
        unique case (st)
          D_IDLE, D_FIN: if (start) st <= D_ACC;
          D_ACC:   if (sched_done[s]) st <= D_WAIT;
          D_WAIT: begin
            dx <= '0;
            dy <= '0;
            st <= (rows == 0) ? D_FIN : D_DRAIN;
          end
          D_DRAIN: if (push) begin
            if (int'(dy) == int'(cfg.ew) - 1) begin
              dy <= '0;
              if (int'(dx) == rows - 1) st <= D_FIN;
              else dx <= dx + 1'b1;
            end else begin
              dy <= dy + 1'b1;
            end
          end
          default: st <= D_IDLE;
        endcase
      end
    end

    sync_fifo #(.WIDTH(PSUM_BITS), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (push),
      .din  (psum[dr_addr]),
      .pop  (pop[s]),
      .dout (dout[s]),
      .full (full),
      .empty(empty[s])
    );

    // a command can only arrive while the stream accumulates
    a_upd_in_acc: assert property (@(posedge clk) disable iff (!rst_n)
                                   upd_q.valid |-> (st == D_ACC || st == D_WAIT));
  end
endmodule
