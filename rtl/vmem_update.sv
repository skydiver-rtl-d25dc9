// VMEM memory bank and integrate-and-fire update of one cluster stream.
//
// Holds the membrane potentials of the output rows of one stream for every
// filter slot of its cluster, and applies the paper's neuron model (Eq. 1-3)
// to each summed input current z that the stream's adder tree delivers:
//     V <- V + z + b;  spike if V > Vth;  on a spike V <- V - Vth
// (reset by subtraction, Eq. 1; "fires when V exceeds Vth", with the strict
// comparison printed as ">1" for a threshold of 1 in the paper's Fig. 4c).
// The paper does not give widths: V is VBITS wide and saturates instead of
// wrapping. When cfg.first is set (first timestep of a layer) the stored V is
// read as 0, so VMEM needs no clearing between layers.
//
// Inputs arrive in the raster order the SPE streams drain in (row, then
// column of the band); an internal counter supplies the neuron position. The
// read-modify-write and the output spike write happen in the cycle of
// in_valid. `fin` rises once the whole band is processed. When `active` is
// low (the cluster has no filter in this group) nothing is written.
module vmem_update
  import skydiver_pkg::*;
#(
  parameter int unsigned STREAM = 0,
  parameter int unsigned Z_W    = PSUM_BITS + $clog2(N_SPE)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic                    start,
  input  logic [SB-1:0]           slot,
  input  logic [KB-1:0]           k,        // global output channel of slot
  input  logic                    active,
  input  logic signed [VBITS-1:0] bias,
  input  logic                    in_valid,
  input  logic signed [Z_W-1:0]   z,
  // output spike write
  output logic                    out_we,
  output logic [KB-1:0]           out_k,
  output logic [HB-1:0]           out_x,
  output logic [WB-1:0]           out_y,
  output logic                    out_spk,
  output logic                    fin
);
  localparam int unsigned DEPTH = SLOTS * BAND_MAX * EW_MAX;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam logic signed [VBITS+1:0] VMAXX = (VBITS+2)'((1 << (VBITS - 1)) - 1);
  localparam logic signed [VBITS+1:0] VMINX = -(VBITS+2)'(1 << (VBITS - 1));

  logic signed [VBITS-1:0] vmem [DEPTH];

  logic [HB-1:0] x;
  logic [WB-1:0] y;
  logic          running;
  logic signed [31:0] rows, band_lo;
  logic [AW-1:0] addr;

  always_comb begin
    band_lo = int'(STREAM) * int'(cfg.band);
    rows    = int'(cfg.eh) - band_lo;
    if (rows > int'(cfg.band)) rows = int'(cfg.band);
    if (rows < 0) rows = 0;
  end

  assign addr = AW'((int'(slot) * int'(BAND_MAX) + int'(x)) * int'(EW_MAX) + int'(y));

  function automatic logic signed [VBITS-1:0] sat(input logic signed [VBITS+1:0] v);
    if (v > VMAXX) return VMAXX[VBITS-1:0];
    if (v < VMINX) return VMINX[VBITS-1:0];
    return v[VBITS-1:0];
  endfunction

  logic signed [VBITS-1:0] v_old, v_int, v_new;
  logic                    spk;
  always_comb begin
    v_old = cfg.first ? '0 : vmem[addr];
    v_int = sat((VBITS+2)'(v_old) + (VBITS+2)'(z) + (VBITS+2)'(bias));
    spk   = (v_int > cfg.vth);
    v_new = spk ? sat((VBITS+2)'(v_int) - (VBITS+2)'(cfg.vth)) : v_int;
  end

  always_ff @(posedge clk) begin
    if (in_valid && active) vmem[addr] <= v_new;
  end

  assign out_we  = in_valid && active;
  assign out_k   = k;
  assign out_x   = HB'(band_lo + int'(x));
  assign out_y   = y;
  assign out_spk = spk;
  assign fin     = !running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      x       <= '0;
      y       <= '0;
    end else if (start) begin
      running <= (rows != 0);
      x       <= '0;
      y       <= '0;
    end else if (in_valid && running) begin
      if (int'(y) == int'(cfg.ew) - 1) begin
        y <= '0;
        if (int'(x) == rows - 1) running <= 1'b0;
        else x <= x + 1'b1;
      end else begin
        y <= y + 1'b1;
      end
    end
  end

  a_valid_when_running: assert property (@(posedge clk) disable iff (!rst_n)
                                         in_valid |-> running);
endmodule
