// Workload testbench: the road-segmentation network, layer by layer.
//
// Runs the six 3x3 convolutional layers of the 160x80x3 segmentation network
// (3->8->16->32->32->16->1 channels) on the default-size accelerator, two
// timesteps per layer, with each layer's output spikes (cropped from 82x162
// back to 80x160, centre) feeding the next. This exercises the whole
// balancing flow:
//   * the expected spike rate of an input channel is taken from the weight
//     sum of the filter that produced it in the previous layer (the layer-1
//     inputs are equal-rate image channels);
//   * every layer runs twice, once with channels split into contiguous blocks
//     and once with the channel-balanced schedule, from the same inputs.
// Weights are random with a filter-specific mean, so filter sums and output
// rates differ from filter to filter. The host sets each layer's threshold
// from the measured input rate so that activity neither dies out nor
// saturates. Checks: both runs of a layer produce identical output spikes in
// every timestep (the schedule changes only the order of additions), every
// layer produces some spikes, and over the network the balanced schedule
// gives a higher mean balance ratio (mean / max of per-SPE busy cycles).
module tb_seg_network;
  import skydiver_pkg::*;

  localparam int H_L = 80, W_L = 160, T_STEPS = 2, N_LAYERS = 6;
  localparam int E_H = H_L + 2, E_W = W_L + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [31:0] host_waddr = '0, host_wdata = '0, host_raddr = '0, host_rdata;
  logic irq, busy;
  logic [M_CLUSTERS*N_SPE-1:0] fifo_stall;

  skydiver_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    host_we = 1'b1; host_waddr = a; host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic hr(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_raddr = a;
    @(negedge clk);
    d = host_rdata;
  endtask

  // input spike rows of the current layer, and the two runs' outputs, as
  // 32-bit chunks exactly as they cross the host bus
  localparam int NCH_IN = W_L / 32, NCH_OUT = (E_W + 31) / 32;
  logic [31:0] inp  [T_STEPS][C_MAX][H_L][NCH_IN];
  logic [31:0] outn [T_STEPS][K_MAX][E_H][NCH_OUT];
  logic [31:0] outc [T_STEPS][K_MAX][E_H][NCH_OUT];
  int wt   [K_MAX][C_MAX][RR];
  int fsum [K_MAX];
  int mag  [C_MAX];

  // ---- channel-balanced workload schedule (offline step) -------------------
  typedef struct { int mag; int ch; } item_t;

  function automatic void cbws(input int c, output int lst [N_SPE][$]);
    item_t cl [$], cn [$], sub [N_SPE][$];
    int sum [N_SPE];
    for (int i = 0; i < c; i++) cl.push_back('{mag[i], i});
    cl.sort() with (-item.mag);                    // descending
    for (int i = 0; i * int'(N_SPE) < c; i++) begin
      item_t piece [$];
      for (int j = 0; j < int'(N_SPE) && i * int'(N_SPE) + j < c; j++)
        piece.push_back(cl[i*N_SPE+j]);
      if (i % 2) piece.reverse();                   // odd pieces ascending
      foreach (piece[j]) cn.push_back(piece[j]);
    end
    foreach (cn[n]) sub[n % N_SPE].push_back(cn[n]);
    for (int t = 0; t < 64; t++) begin
      int jmax = 0, jmin = 0, kmin = 0;
      for (int j = 0; j < int'(N_SPE); j++) begin
        sum[j] = 0;
        foreach (sub[j][e]) sum[j] += sub[j][e].mag;
      end
      for (int j = 1; j < int'(N_SPE); j++) begin
        if (sum[j] > sum[jmax]) jmax = j;
        if (sum[j] < sum[jmin]) jmin = j;
      end
      if (sub[jmax].size() == 0) break;
      foreach (sub[jmax][e]) if (sub[jmax][e].mag < sub[jmax][kmin].mag) kmin = e;
      if ((sum[jmax] - sum[jmin]) / 2 > sub[jmax][kmin].mag) begin
        sub[jmin].push_back(sub[jmax][kmin]);
        sub[jmax].delete(kmin);
      end else break;
    end
    for (int j = 0; j < int'(N_SPE); j++) begin
      lst[j].delete();
      foreach (sub[j][e]) lst[j].push_back(sub[j][e].ch);
    end
  endfunction

  function automatic void naive(input int c, output int lst [N_SPE][$]);
    for (int j = 0; j < int'(N_SPE); j++) lst[j].delete();
    for (int i = 0; i < c; i++) lst[i * N_SPE / c].push_back(i);
  endfunction

  // filters with a filter-specific mean weight in 1..6 plus noise
  function automatic void make_filters(int c, int k);
    for (int kk = 0; kk < k; kk++) begin
      int mean = int'($urandom_range(1, 6));
      fsum[kk] = 0;
      for (int cc = 0; cc < c; cc++)
        for (int r = 0; r < int'(RR); r++) begin
          wt[kk][cc][r] = mean + int'($urandom_range(0, 16)) - 8;
          fsum[kk] += wt[kk][cc][r];
        end
    end
  endfunction

  // one run of a layer (all timesteps) with a given channel assignment
  task automatic run_layer(int c, int k, int vth, int lst [N_SPE][$], bit balanced,
                           output real br, output longint cyc);
    logic [31:0] d;
    longint bsum = 0, bmax = 0;
    longint busy_spe [N_SPE];
    for (int j = 0; j < int'(N_SPE); j++) busy_spe[j] = 0;
    cyc = 0;
    hw(32'h5, vth);
    for (int j = 0; j < int'(N_SPE); j++) begin
      hw(32'h10 + j, lst[j].size());
      foreach (lst[j][i]) hw(32'h3000_0000 | (j << 8) | i, lst[j][i]);
    end
    for (int t = 0; t < T_STEPS; t++) begin
      for (int cc = 0; cc < c; cc++)
        for (int a = 0; a < H_L; a++)
          for (int ch = 0; ch < NCH_IN; ch++)
            hw(32'h4000_0000 | (cc << 16) | (a << 4) | ch, inp[t][cc][a][ch]);
      hw(32'h6, (t == 0) ? 1 : 0);
      hw(32'h7, 1);
      while (!irq) @(posedge clk);
      hr(32'h5000_0001, d);
      cyc += d;
      for (int j = 0; j < int'(N_SPE); j++) begin
        hr(32'h5000_0002 + j, d);
        busy_spe[j] += d;
      end
      for (int kk = 0; kk < k; kk++)
        for (int x = 0; x < E_H; x++)
          for (int ch = 0; ch < NCH_OUT; ch++) begin
            hr(32'h6000_0000 | (kk << 16) | (x << 4) | ch, d);
            if (balanced) outc[t][kk][x][ch] = d; else outn[t][kk][x][ch] = d;
          end
    end
    for (int j = 0; j < int'(N_SPE); j++) begin
      bsum += busy_spe[j];
      if (busy_spe[j] > bmax) bmax = busy_spe[j];
    end
    br = (bmax == 0) ? 1.0 : real'(bsum) / (real'(N_SPE) * real'(bmax));
  endtask

  int chans [N_LAYERS + 1] = '{3, 8, 16, 32, 32, 16, 1};

  initial begin
    automatic real sum_bn = 0, sum_bc = 0;
    automatic longint sum_cn = 0, sum_cc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (busy) @(posedge clk);

    // layer-1 input: three image channels encoded at about 20% spike rate
    for (int t = 0; t < T_STEPS; t++)
      for (int cc = 0; cc < 3; cc++)
        for (int a = 0; a < H_L; a++)
          for (int ch = 0; ch < NCH_IN; ch++)
            for (int b = 0; b < 32; b++) inp[t][cc][a][ch][b] = ($urandom_range(0, 99) < 20);
    for (int cc = 0; cc < 3; cc++) mag[cc] = 1;

    for (int l = 0; l < N_LAYERS; l++) begin
      automatic int c = chans[l], k = chans[l+1];
      int ln [N_SPE][$], lc [N_SPE][$];
      automatic int nin = 0, nout = 0, mism = 0, fmax = 1;
      int vth;
      real br_n, br_c, p_in;
      longint cy_n, cy_c;

      // threshold from the measured input rate: the strongest filter fires
      // at about a third of its positions
      for (int t = 0; t < T_STEPS; t++)
        for (int cc = 0; cc < c; cc++)
          for (int a = 0; a < H_L; a++)
            for (int ch = 0; ch < NCH_IN; ch++) nin += $countones(inp[t][cc][a][ch]);
      p_in = real'(nin) / real'(T_STEPS * c * H_L * W_L);
      make_filters(c, k);
      for (int kk = 0; kk < k; kk++) if (fsum[kk] > fmax) fmax = fsum[kk];
      vth = int'(p_in * real'(fmax) * 3.0) + 1;

      hw(32'h0, c); hw(32'h1, k); hw(32'h2, H_L); hw(32'h3, W_L); hw(32'h4, int'(R) - 1);
      for (int kk = 0; kk < k; kk++) begin
        hw(32'h2000_0000 | kk, 0);
        for (int cc = 0; cc < c; cc++)
          for (int r = 0; r < int'(RR); r++)
            hw(32'h1000_0000 | (kk << 12) | (cc << 4) | r, wt[kk][cc][r]);
      end

      naive(c, ln);
      cbws(c, lc);
      run_layer(c, k, vth, ln, 1'b0, br_n, cy_n);
      run_layer(c, k, vth, lc, 1'b1, br_c, cy_c);

      for (int t = 0; t < T_STEPS; t++)
        for (int kk = 0; kk < k; kk++)
          for (int x = 0; x < E_H; x++)
            for (int ch = 0; ch < NCH_OUT; ch++) begin
              if (outn[t][kk][x][ch] != outc[t][kk][x][ch]) mism++;
              nout += $countones(outc[t][kk][x][ch]);
            end
      checks += 2;
      if (mism != 0) begin failures++; $display("FAIL layer %0d: %0d output words differ between schedules", l + 1, mism); end
      if (nout == 0) begin failures++; $display("FAIL layer %0d produced no spikes", l + 1); end
      $display("layer %0d %2d->%2d  in rate %4.1f%%  out spikes %6d  balance naive %5.1f%%  CBWS %5.1f%%  cycles %0d / %0d",
               l + 1, c, k, 100.0 * p_in, nout, 100.0 * br_n, 100.0 * br_c, cy_n, cy_c);
      sum_bn += br_n; sum_bc += br_c; sum_cn += cy_n; sum_cc += cy_c;

      // next layer: centre crop 82x162 -> 80x160; magnitudes from this layer
      for (int t = 0; t < T_STEPS; t++)
        for (int kk = 0; kk < k; kk++)
          for (int a = 0; a < H_L; a++)
            for (int b = 0; b < W_L; b++)
              inp[t][kk][a][b/32][b%32] = outc[t][kk][a+1][(b+1)/32][(b+1)%32];
      for (int kk = 0; kk < k; kk++) mag[kk] = (fsum[kk] > 0) ? fsum[kk] : 1;
    end

    $display("mean balance ratio naive %5.1f%%  CBWS %5.1f%%  total speed-up %0.2fx",
             100.0 * sum_bn / N_LAYERS, 100.0 * sum_bc / N_LAYERS, real'(sum_cn) / real'(sum_cc));
    checks++;
    if (sum_bc <= sum_bn) begin failures++; $display("FAIL CBWS did not raise the mean balance ratio"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
