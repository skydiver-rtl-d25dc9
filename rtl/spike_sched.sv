// Spike scheduler of one stream of one channel-based SPE.
//
// The paper's spike scheduler detects the neurons that fired and generates
// the addresses of the weights they need (its insides are in the authors'
// earlier work and not repeated, so the scheme here is this design's own).
// One instance serves stream STREAM of SPE j in all M clusters at once: the
// clusters work on different filters but on the same input spikes, so its
// commands are broadcast to all of them.
//
// Operation, started by a one-cycle `start`: for each input channel of the
// SPE's channel list (written by the host from the offline CBWS schedule),
// it reads every input row that can reach the stream's band of output rows,
// then walks the set bits of that row from the lowest column upward. Rows
// without spikes cost two cycles; each spike at (a, b) costs R*R cycles, one
// per kernel element (jj, kk), and each cycle carries one command
// "add w[chan][jj][kk] to psum(x, y)" with x = a + pad - jj, y = b + pad - kk
// (stride 1, as the paper requires). Commands whose x lies outside the band
// or y outside the output map are marked invalid; with the paper's padding of
// R-1 only rows at a band edge produce such commands. `done` is high from the
// end of the work until the next start; `busy` counts toward the SPE's
// workload counter.
//
// Timing: neuron-state read address in one cycle, row data the next (LD).
module spike_sched
  import skydiver_pkg::*;
#(
  parameter int unsigned STREAM = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  // channel table of this SPE
  input  logic [CB:0]       ch_cnt,
  output logic [CB-1:0]     ch_idx,
  input  logic [CB-1:0]     ch_val,
  // neuron state memory read port
  output logic [CB-1:0]     rchan,
  output logic [HB-1:0]     rrow,
  input  logic [W_MAX-1:0]  rdata,
  // command to the streams of all clusters
  output upd_t              upd,
  output logic              busy,
  output logic              done,
  output logic              spike_ev   // a spike is being expanded (for statistics)
);
  typedef enum logic [2:0] {S_IDLE, S_CH, S_RD, S_LD, S_SCAN, S_DONE} state_e;
  state_e state;

  logic [CB:0]        p;        // channel-list pointer
  logic [CB-1:0]      chan;
  logic [HB-1:0]      a;        // input row
  logic [W_MAX-1:0]   mask;     // spikes of the row not yet expanded
  logic [$clog2(R):0] jj, kk;

  // band of output rows of this stream and the input rows that reach it
  logic signed [31:0] band_lo, band_rows, a_lo, a_hi;
  always_comb begin
    band_lo   = int'(STREAM) * int'(cfg.band);
    band_rows = int'(cfg.eh) - band_lo;
    if (band_rows > int'(cfg.band)) band_rows = int'(cfg.band);
    if (band_rows < 0) band_rows = 0;
    a_lo = band_lo - int'(cfg.pad);
    a_hi = band_lo + band_rows - 1 - int'(cfg.pad) + int'(R) - 1;
    if (a_lo < 0) a_lo = 0;
    if (a_hi > int'(cfg.h) - 1) a_hi = int'(cfg.h) - 1;
    if (band_rows == 0) a_hi = a_lo - 1;
  end

  // lowest set bit of the remaining row
  logic [WB-1:0] b;
  always_comb begin
    b = '0;
    for (int i = int'(W_MAX) - 1; i >= 0; i--)
      if (mask[i]) b = WB'(i);
  end

  // columns beyond the configured width never fire
  logic [W_MAX-1:0] colmask;
  always_comb
    for (int i = 0; i < int'(W_MAX); i++) colmask[i] = (i < int'(cfg.w));

  assign ch_idx = p[CB-1:0];
  assign rchan  = chan;
  assign rrow   = a;
  assign busy   = (state != S_IDLE) && (state != S_DONE);
  assign done   = (state == S_DONE);
  assign spike_ev = (state == S_SCAN) && (mask != '0);

  // command of the current cycle
  logic signed [31:0] x, y;
  always_comb begin
    x = int'(a) + int'(cfg.pad) - int'(jj);
    y = int'(b) + int'(cfg.pad) - int'(kk);
    upd.valid = (state == S_SCAN) && (mask != '0) &&
                (x >= band_lo) && (x < band_lo + band_rows) &&
                (y >= 0) && (y < int'(cfg.ew));
    upd.chan  = chan;
    upd.r     = RRB'(int'(jj) * int'(R) + int'(kk));
    upd.xl    = HB'(x - band_lo);
    upd.y     = WB'(y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      p     <= '0;
      chan  <= '0;
      a     <= '0;
      mask  <= '0;
      jj    <= '0;
      kk    <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            p     <= '0;
            state <= S_CH;
          end
        end
        S_CH: begin
          if (p >= ch_cnt || a_lo > a_hi) begin
            state <= S_DONE;
          end else begin
            chan  <= ch_val;
            a     <= HB'(a_lo);
            state <= S_RD;
          end
        end
        S_RD: state <= S_LD;
        S_LD: begin
          mask  <= rdata & colmask;
          jj    <= '0;
          kk    <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (mask == '0) begin
            if (int'(a) >= a_hi) begin
              p     <= p + 1'b1;
              state <= S_CH;
            end else begin
              a     <= a + 1'b1;
              state <= S_RD;
            end
          end else if (kk == ($clog2(R)+1)'(R - 1)) begin
            kk <= '0;
            if (jj == ($clog2(R)+1)'(R - 1)) begin
              jj      <= '0;
              mask[b] <= 1'b0;
            end else begin
              jj <= jj + 1'b1;
            end
          end else begin
            kk <= kk + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
