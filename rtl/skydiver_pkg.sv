// Shared constants and types of the Skydiver convolutional SNN accelerator.
//
// The accelerator runs one convolutional spiking layer for one timestep per
// job. The array is M filter-based SPE clusters (one output channel each per
// filter group) of N channel-based SPEs (each summing a subset of the input
// channels); every SPE splits its output rows into four streams of equal
// height. The four streams and the stride-1, (R-1)-zero-padding convolution
// follow the paper; M, N, the memory sizes and all bit widths are this
// design's choices (the paper gives no numbers for them).
//
// Host address map (32-bit word addresses, region in bits [31:28]):
//   region 0  config   : 0 C, 1 K, 2 H (rows), 3 W (cols), 4 PAD, 5 VTH,
//                        6 FIRST (first timestep: VMEM read as 0), 7 START,
//                        16+j channel count of SPE j
//   region 1  weights  : k[19:12] c[11:4] r[3:0]  (r = row*R + col)
//   region 2  biases   : k[7:0]
//   region 3  ch. table: j[15:8] idx[7:0], data = input channel
//   region 4  in spikes: c[23:16] row[15:4] chunk[3:0], 32 columns a chunk
//   region 5  status   : (read) 0 busy/done, 1 job cycles, 2+j SPE j busy cycles
//   region 6  out spks : (read) k[23:16] row[15:4] chunk[3:0]
package skydiver_pkg;

  // ---- array shape -------------------------------------------------------
  parameter int unsigned M_CLUSTERS = 8;    // filter-based SPE clusters
  parameter int unsigned N_SPE      = 4;    // channel-based SPEs per cluster
  parameter int unsigned N_STREAMS  = 4;    // streams per SPE (paper: four)
  parameter int unsigned R          = 3;    // kernel size (paper networks: C3)
  parameter int unsigned RR         = R * R;

  // ---- layer size limits (segmentation net 160x80, up to 32 channels) -----
  parameter int unsigned C_MAX      = 32;   // input channels
  parameter int unsigned K_MAX      = 32;   // output channels (filters)
  parameter int unsigned H_MAX      = 80;   // input rows
  parameter int unsigned W_MAX      = 160;  // input columns
  parameter int unsigned EH_MAX     = H_MAX + R - 1;  // output rows, pad R-1
  parameter int unsigned EW_MAX     = W_MAX + R - 1;  // output columns
  parameter int unsigned BAND_MAX   = (EH_MAX + N_STREAMS - 1) / N_STREAMS;
  parameter int unsigned SLOTS      = K_MAX / M_CLUSTERS; // filters per cluster
  parameter int unsigned CTAB_MAX   = C_MAX;  // channel-table entries per SPE

  // ---- bit widths ----------------------------------------------------------
  parameter int unsigned WBITS      = 8;    // signed weight
  parameter int unsigned PSUM_BITS  = 18;   // signed per-SPE partial sum
  parameter int unsigned VBITS      = 24;   // signed membrane potential
  parameter int unsigned CHUNK      = 32;   // host data word

  parameter int unsigned CB   = $clog2(C_MAX);
  parameter int unsigned KB   = $clog2(K_MAX);
  parameter int unsigned HB   = $clog2(EH_MAX + 1);
  parameter int unsigned WB   = $clog2(EW_MAX + 1);
  parameter int unsigned RRB  = $clog2(RR);
  parameter int unsigned SB   = $clog2(SLOTS);

  // ---- host regions --------------------------------------------------------
  typedef enum logic [3:0] {
    RG_CFG    = 4'd0,
    RG_WEIGHT = 4'd1,
    RG_BIAS   = 4'd2,
    RG_CTAB   = 4'd3,
    RG_SPIKE  = 4'd4,
    RG_STATUS = 4'd5,
    RG_OSPIKE = 4'd6
  } region_e;

  // Layer configuration, fixed for a job. Band fields give the output rows
  // of every stream: stream s owns rows [band_lo[s], band_lo[s]+band_rows[s]).
  typedef struct packed {
    logic [CB:0]   c_in;     // input channels
    logic [KB:0]   k_out;    // output channels
    logic [HB-1:0] h;        // input rows
    logic [WB-1:0] w;        // input columns
    logic [1:0]    pad;      // zero padding, R-1 for APRC
    logic [HB-1:0] eh;       // output rows  = h + 2 pad - R + 1
    logic [WB-1:0] ew;       // output cols  = w + 2 pad - R + 1
    logic [HB-1:0] band;     // rows per stream = ceil(eh / 4)
    logic signed [VBITS-1:0] vth;
    logic          first;    // first timestep: previous VMEM taken as 0
  } cfg_t;

  // One accumulation command of a stream, broadcast to every cluster:
  // add weight (chan, r) of the cluster's filter to psum (xl, y).
  typedef struct packed {
    logic          valid;
    logic [CB-1:0] chan;
    logic [RRB-1:0] r;
    logic [HB-1:0] xl;       // output row relative to the stream's band
    logic [WB-1:0] y;        // output column
  } upd_t;

endpackage
