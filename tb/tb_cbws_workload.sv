// Workload testbench: channel-balanced scheduling on the paper's networks.
//
// Runs convolutional layers shaped like those of the two evaluated networks
// (MNIST classifier 28x28-16c-32c-8c, and the 8->16 channel layer of the
// 160x80 road-segmentation network) on the default-size accelerator. Input
// channels get skewed spike rates proportional to a per-channel "filter
// magnitude" of the previous layer (the proportionality that zero padding of
// R-1 and stride 1 establish). Each layer is run twice:
//   * naive  : channels split into N contiguous blocks;
//   * CBWS   : channels assigned by the channel-balanced workload schedule
//              (sort by magnitude, alternate the order of consecutive pieces
//              of N, deal piece elements round-robin to N sublists, then move
//              the smallest element of the heaviest sublist to the lightest
//              while that narrows the gap).
// Both runs must produce output spikes equal to the reference model. The
// balance ratio (mean / max of the per-SPE busy cycles read from the
// accelerator) must not drop with CBWS, and the job must not get slower.
module tb_cbws_workload;
  import skydiver_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [31:0] host_waddr = '0, host_wdata = '0, host_raddr = '0, host_rdata;
  logic irq, busy;
  logic [M_CLUSTERS*N_SPE-1:0] fifo_stall;

  skydiver_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20_000_000) @(posedge clk);
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

  int L_C, L_K, L_H, L_W, L_PAD, L_VTH, L_EH, L_EW;
  bit spk  [C_MAX][H_MAX][W_MAX];
  int wt   [K_MAX][C_MAX][RR];
  int bias [K_MAX];
  int vref [K_MAX][EH_MAX][EW_MAX];
  bit oref [K_MAX][EH_MAX][EW_MAX];
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

  // ---- reference -----------------------------------------------------------
  function automatic void ref_step();
    for (int k = 0; k < L_K; k++)
      for (int x = 0; x < L_EH; x++)
        for (int y = 0; y < L_EW; y++) begin
          int z = bias[k];
          for (int c = 0; c < L_C; c++)
            for (int jj = 0; jj < int'(R); jj++) begin
              int a = x - L_PAD + jj;
              if (a >= 0 && a < L_H)
                for (int kk = 0; kk < int'(R); kk++) begin
                  int b = y - L_PAD + kk;
                  if (b >= 0 && b < L_W && spk[c][a][b]) z += wt[k][c][jj*R+kk];
                end
            end
          vref[k][x][y] = z;
          oref[k][x][y] = z > L_VTH;
        end
  endfunction

  task automatic setup_layer(int c, int k, int h, int w, int maxrate_pct);
    L_C = c; L_K = k; L_H = h; L_W = w; L_PAD = int'(R) - 1; L_VTH = 60;
    L_EH = h + 2 * L_PAD - int'(R) + 1;
    L_EW = w + 2 * L_PAD - int'(R) + 1;
    for (int i = 0; i < c; i++) begin
      int u = $urandom_range(1, 30);
      mag[i] = u * u;                               // skewed magnitudes
    end
    for (int kk = 0; kk < k; kk++) begin
      bias[kk] = 0;
      for (int cc = 0; cc < c; cc++)
        for (int r = 0; r < int'(RR); r++) wt[kk][cc][r] = int'($urandom_range(0, 50)) - 15;
    end
    for (int cc = 0; cc < c; cc++)
      for (int a = 0; a < h; a++)
        for (int b = 0; b < w; b++)
          spk[cc][a][b] = $urandom_range(0, 900 * 100 - 1) < mag[cc] * maxrate_pct;
    hw(32'h0, c); hw(32'h1, k); hw(32'h2, h); hw(32'h3, w); hw(32'h4, L_PAD);
    hw(32'h5, L_VTH); hw(32'h6, 1);
    for (int kk = 0; kk < k; kk++) begin
      hw(32'h2000_0000 | kk, bias[kk]);
      for (int cc = 0; cc < c; cc++)
        for (int r = 0; r < int'(RR); r++)
          hw(32'h1000_0000 | (kk << 12) | (cc << 4) | r, wt[kk][cc][r]);
    end
    for (int cc = 0; cc < c; cc++)
      for (int a = 0; a < h; a++)
        for (int ch = 0; ch * int'(CHUNK) < w; ch++) begin
          logic [31:0] d = '0;
          for (int b = 0; b < int'(CHUNK); b++)
            if (ch * int'(CHUNK) + b < w) d[b] = spk[cc][a][ch*CHUNK+b];
          hw(32'h4000_0000 | (cc << 16) | (a << 4) | ch, d);
        end
    ref_step();
  endtask

  task automatic run(string tag, int lst [N_SPE][$], output real br, output int cyc);
    logic [31:0] d;
    int mism = 0, bmax = 0, bsum = 0;
    for (int j = 0; j < int'(N_SPE); j++) begin
      hw(32'h10 + j, lst[j].size());
      foreach (lst[j][i]) hw(32'h3000_0000 | (j << 8) | i, lst[j][i]);
    end
    hw(32'h7, 1);
    while (!irq) @(posedge clk);
    hr(32'h5000_0001, d);
    cyc = int'(d);
    for (int j = 0; j < int'(N_SPE); j++) begin
      hr(32'h5000_0002 + j, d);
      bsum += int'(d);
      if (int'(d) > bmax) bmax = int'(d);
    end
    br = (bmax == 0) ? 1.0 : real'(bsum) / (real'(N_SPE) * real'(bmax));
    for (int k = 0; k < L_K; k++)
      for (int x = 0; x < L_EH; x++)
        for (int ch = 0; ch * int'(CHUNK) < L_EW; ch++) begin
          hr(32'h6000_0000 | (k << 16) | (x << 4) | ch, d);
          for (int b = 0; b < int'(CHUNK) && ch * int'(CHUNK) + b < L_EW; b++)
            if (d[b] != oref[k][x][ch*CHUNK+b]) mism++;
        end
    checks++;
    if (mism != 0) begin failures++; $display("FAIL %s: %0d output spikes differ", tag, mism); end
    $display("%-28s balance ratio %5.1f%%  job cycles %0d", tag, 100.0 * br, cyc);
  endtask

  real sum_br_n = 0, sum_br_c = 0;
  longint sum_cy_n = 0, sum_cy_c = 0;
  int n_layers = 0;

  task automatic layer(string name, int c, int k, int h, int w, int maxrate);
    int ln [N_SPE][$], lc [N_SPE][$];
    real br_n, br_c;
    int cy_n, cy_c;
    setup_layer(c, k, h, w, maxrate);
    naive(c, ln);
    cbws(c, lc);
    run({name, " naive"}, ln, br_n, cy_n);
    run({name, " CBWS"}, lc, br_c, cy_c);
    sum_br_n += br_n; sum_br_c += br_c; sum_cy_n += cy_n; sum_cy_c += cy_c; n_layers++;
    $display("%-28s speed-up %0.2fx", name, real'(cy_n) / real'(cy_c));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (busy) @(posedge clk);
    for (int rep = 0; rep < 2; rep++) begin
      layer("mnist conv 16->32 28x28", 16, 32, 28, 28, 20);
      layer("mnist conv 32->8 28x28", 32, 8, 28, 28, 20);
      layer("seg conv 8->16 80x160", 8, 16, 80, 160, 15);
    end
    // single layers vary with the random rates; the schedule must pay off on average
    $display("mean balance ratio naive %5.1f%%  CBWS %5.1f%%  total speed-up %0.2fx",
             100.0 * sum_br_n / n_layers, 100.0 * sum_br_c / n_layers, real'(sum_cy_n) / real'(sum_cy_c));
    checks += 2;
    if (sum_br_c <= sum_br_n) begin failures++; $display("FAIL CBWS did not raise the mean balance ratio"); end
    if (sum_cy_c >= sum_cy_n) begin failures++; $display("FAIL CBWS did not shorten the jobs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
