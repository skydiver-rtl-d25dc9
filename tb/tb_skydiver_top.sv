// End-to-end testbench of the Skydiver accelerator at its default size.
//
// Acts as the host: writes layer configuration, weights, biases, the channel
// table and input spike maps over the host bus, starts jobs, waits for irq,
// reads back the output spike maps and compares them bit by bit with a
// behavioural model of the layer (stride-1 zero-padded convolution over the
// input spikes, integrate, fire when V > Vth, subtract Vth; V kept across
// timesteps unless the job is marked first).
//
// Jobs:
//  1. the worked example of two 3x3 filters (sums 2.7 and 0.9, scaled by 10)
//     on a 4x4 spike map padded by R-1: the summed membrane update of the two
//     output channels must be 162 and 54 (16.2 and 5.4 unscaled);
//  2. random layers with padding 2, 1 and 0, several timesteps, filter
//     counts that need two groups and leave clusters idle, an SPE with no
//     channels (so its FIFOs fill and stall) and uneven channel lists.
// Mechanisms counted (each must occur): FIFO stall, multiple filter groups,
// idle cluster, spikes fired, VMEM carried across timesteps, stream-band
// edge commands dropped, SPE with empty channel list.
module tb_skydiver_top;
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

  localparam longint WATCHDOG = 3_000_000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters -------------------------------------------------
  int n_stall = 0, n_groups = 0, n_idle_cluster = 0, n_fired = 0, n_carry = 0;
  int n_edge_drop = 0, n_empty_spe = 0;
  always @(posedge clk) begin
    if (|fifo_stall) n_stall++;
    if (dut.u_ctrl.start && dut.u_ctrl.slot != '0) n_groups++;
  end
  for (genvar j = 0; j < int'(N_SPE); j++) begin : g_mon
    for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_s
      always @(posedge clk)
        if (dut.g_sched[j].g_s[s].u_sched.spike_ev && !dut.g_sched[j].g_s[s].u_sched.upd.valid)
          n_edge_drop++;
    end
  end

  // ---- host bus -----------------------------------------------------------
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

  // ---- layer state and reference model ------------------------------------
  int L_C, L_K, L_H, L_W, L_PAD, L_VTH, L_EH, L_EW;
  bit spk  [C_MAX][H_MAX][W_MAX];
  int wt   [K_MAX][C_MAX][RR];
  int bias [K_MAX];
  longint vref [K_MAX][EH_MAX][EW_MAX];
  bit oref [K_MAX][EH_MAX][EW_MAX];

  function automatic longint sat(longint v);
    longint hi = (longint'(1) << (VBITS - 1)) - 1;
    longint lo = -(longint'(1) << (VBITS - 1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  function automatic void ref_step(bit first);
    for (int k = 0; k < L_K; k++)
      for (int x = 0; x < L_EH; x++)
        for (int y = 0; y < L_EW; y++) begin
          longint z = bias[k];
          for (int c = 0; c < L_C; c++)
            for (int jj = 0; jj < int'(R); jj++)
              for (int kk = 0; kk < int'(R); kk++) begin
                int a = x - L_PAD + jj, b = y - L_PAD + kk;
                if (a >= 0 && a < L_H && b >= 0 && b < L_W && spk[c][a][b])
                  z += wt[k][c][jj*R+kk];
              end
          if (first) vref[k][x][y] = 0;
          vref[k][x][y] = sat(vref[k][x][y] + z);
          oref[k][x][y] = vref[k][x][y] > L_VTH;
          if (oref[k][x][y]) vref[k][x][y] = sat(vref[k][x][y] - L_VTH);
        end
  endfunction

  task automatic config_layer(int c, int k, int h, int w, int pad, int vth);
    L_C = c; L_K = k; L_H = h; L_W = w; L_PAD = pad; L_VTH = vth;
    L_EH = h + 2 * pad - int'(R) + 1;
    L_EW = w + 2 * pad - int'(R) + 1;
    hw(32'h0000_0000, c);
    hw(32'h0000_0001, k);
    hw(32'h0000_0002, h);
    hw(32'h0000_0003, w);
    hw(32'h0000_0004, pad);
    hw(32'h0000_0005, vth);
    for (int kk = 0; kk < k; kk++) begin
      hw(32'h2000_0000 | kk, bias[kk]);
      for (int cc = 0; cc < c; cc++)
        for (int r = 0; r < int'(RR); r++)
          hw(32'h1000_0000 | (kk << 12) | (cc << 4) | r, wt[kk][cc][r]);
    end
  endtask

  // channel table: list[j] holds the channels of SPE j
  task automatic set_ctab(int lst [N_SPE][$]);
    for (int j = 0; j < int'(N_SPE); j++) begin
      hw(32'h0000_0010 + j, lst[j].size());
      if (lst[j].size() == 0) n_empty_spe++;
      foreach (lst[j][i]) hw(32'h3000_0000 | (j << 8) | i, lst[j][i]);
    end
  endtask

  task automatic load_spikes();
    for (int c = 0; c < L_C; c++)
      for (int a = 0; a < L_H; a++)
        for (int ch = 0; ch * int'(CHUNK) < L_W; ch++) begin
          logic [31:0] d = '0;
          for (int b = 0; b < int'(CHUNK); b++)
            if (ch * int'(CHUNK) + b < L_W) d[b] = spk[c][a][ch*CHUNK+b];
          hw(32'h4000_0000 | (c << 16) | (a << 4) | ch, d);
        end
  endtask

  task automatic run_step(bit first, string tag);
    int mism = 0, fired = 0;
    logic [31:0] d;
    longint t0;
    load_spikes();
    hw(32'h0000_0006, first);
    if (!first) n_carry++;
    ref_step(first);
    t0 = cycle;
    hw(32'h0000_0007, 1);
    while (!irq) @(posedge clk);
    if ((L_K + int'(M_CLUSTERS) - 1) / int'(M_CLUSTERS) * int'(M_CLUSTERS) != L_K) n_idle_cluster++;
    for (int k = 0; k < L_K; k++)
      for (int x = 0; x < L_EH; x++)
        for (int ch = 0; ch * int'(CHUNK) < L_EW; ch++) begin
          hr(32'h6000_0000 | (k << 16) | (x << 4) | ch, d);
          for (int b = 0; b < int'(CHUNK) && ch * int'(CHUNK) + b < L_EW; b++) begin
            if (d[b] != oref[k][x][ch*CHUNK+b]) mism++;
            fired += oref[k][x][ch*CHUNK+b];
          end
        end
    n_fired += fired;
    checks++;
    if (mism != 0) begin
      failures++;
      $display("FAIL %s: %0d output spikes differ", tag, mism);
    end else
      $display("ok   %s: %0d spikes out, %0d cycles", tag, fired, cycle - t0);
    // status word: done set, not busy
    hr(32'h5000_0000, d);
    checks++;
    if (d[1:0] != 2'b01) begin failures++; $display("FAIL %s: status %b", tag, d[1:0]); end
  endtask

  task automatic rand_layer(int c, int k, int h, int w, int density_pct);
    for (int kk = 0; kk < k; kk++) begin
      bias[kk] = int'($urandom_range(0, 10)) - 5;
      for (int cc = 0; cc < c; cc++)
        for (int r = 0; r < int'(RR); r++) wt[kk][cc][r] = int'($urandom_range(0, 60)) - 20;
    end
  endtask

  task automatic rand_spikes(int density_pct);
    for (int c = 0; c < L_C; c++)
      for (int a = 0; a < L_H; a++)
        for (int b = 0; b < L_W; b++) spk[c][a][b] = ($urandom_range(0, 99) < density_pct);
  endtask

  // VMEM sum of one output channel k (peeked), used for the worked example
  function automatic longint vmem_sum0();
    longint s = 0;
    for (int x = 0; x < 2; x++) for (int y = 0; y < 6; y++) begin
      s += dut.g_cl[0].u_cl.g_tree[0].u_vmem.vmem[x*EW_MAX+y];
      s += dut.g_cl[0].u_cl.g_tree[1].u_vmem.vmem[x*EW_MAX+y];
      s += dut.g_cl[0].u_cl.g_tree[2].u_vmem.vmem[x*EW_MAX+y];
    end
    return s;
  endfunction
  function automatic longint vmem_sum1();
    longint s = 0;
    for (int x = 0; x < 2; x++) for (int y = 0; y < 6; y++) begin
      s += dut.g_cl[1].u_cl.g_tree[0].u_vmem.vmem[x*EW_MAX+y];
      s += dut.g_cl[1].u_cl.g_tree[1].u_vmem.vmem[x*EW_MAX+y];
      s += dut.g_cl[1].u_cl.g_tree[2].u_vmem.vmem[x*EW_MAX+y];
    end
    return s;
  endfunction

  initial begin
    int lst [N_SPE][$];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (busy) @(posedge clk);   // Psum clear after reset

    // ---- 1. worked example: filter sums 27 and 9, six input spikes --------
    begin
      int f1 [RR] = '{2, 12, -15, -3, 4, 11, -9, 8, 17};
      int f2 [RR] = '{14, -2, 4, -5, 9, 12, -7, -17, 1};
      bit m [4][4] = '{'{0,1,0,0}, '{1,1,0,1}, '{0,1,0,0}, '{0,0,0,1}};
      longint s0, s1;
      for (int r = 0; r < int'(RR); r++) begin wt[0][0][r] = f1[r]; wt[1][0][r] = f2[r]; end
      bias[0] = 0; bias[1] = 0;
      foreach (m[a, b]) spk[0][a][b] = m[a][b];
      config_layer(1, 2, 4, 4, 2, 100000);
      lst[0] = {0}; lst[1] = {}; lst[2] = {}; lst[3] = {};
      set_ctab(lst);
      run_step(1'b1, "example");
      s0 = vmem_sum0(); s1 = vmem_sum1();
      checks += 2;
      if (s0 != 162) begin failures++; $display("FAIL example: filter 1 sum %0d", s0); end
      if (s1 != 54)  begin failures++; $display("FAIL example: filter 2 sum %0d", s1); end
      $display("example: summed membrane update %0d and %0d (ratio 3)", s0, s1);
      // same map with threshold 10 (1.0 scaled)
      hw(32'h0000_0005, 10); L_VTH = 10;
      run_step(1'b1, "example vth=10");
    end

    // ---- 2. random layers ----------------------------------------------------
    rand_layer(6, 10, 13, 40, 0);
    config_layer(6, 10, 13, 40, 2, 50);
    lst[0] = {0, 4, 5}; lst[1] = {1}; lst[2] = {2, 3}; lst[3] = {};
    set_ctab(lst);
    for (int t = 0; t < 3; t++) begin
      rand_spikes(15);
      run_step(t == 0, $sformatf("pad2 C6 K10 t%0d", t));
    end

    rand_layer(3, 8, 20, 33, 0);
    config_layer(3, 8, 20, 33, 1, 40);
    lst[0] = {2}; lst[1] = {0}; lst[2] = {1}; lst[3] = {};
    set_ctab(lst);
    for (int t = 0; t < 2; t++) begin
      rand_spikes(20);
      run_step(t == 0, $sformatf("pad1 C3 K8 t%0d", t));
    end

    rand_layer(5, 17, 9, 70, 0);
    config_layer(5, 17, 9, 70, 0, 30);
    lst[0] = {0, 1}; lst[1] = {2}; lst[2] = {3}; lst[3] = {4};
    set_ctab(lst);
    rand_spikes(25);
    run_step(1'b1, "pad0 C5 K17 t0");
    rand_spikes(25);
    run_step(1'b0, "pad0 C5 K17 t1");

    // ---- mechanisms --------------------------------------------------------------
    $display("mechanisms: stall=%0d groups=%0d idle_cluster=%0d fired=%0d carry=%0d edge_drop=%0d empty_spe=%0d",
             n_stall, n_groups, n_idle_cluster, n_fired, n_carry, n_edge_drop, n_empty_spe);
    checks += 7;
    if (n_stall == 0)        begin failures++; $display("FAIL no FIFO stall"); end
    if (n_groups == 0)       begin failures++; $display("FAIL no second filter group"); end
    if (n_idle_cluster == 0) begin failures++; $display("FAIL no idle cluster"); end
    if (n_fired == 0)        begin failures++; $display("FAIL no spikes fired"); end
    if (n_carry == 0)        begin failures++; $display("FAIL no carried VMEM"); end
    if (n_edge_drop == 0)    begin failures++; $display("FAIL no band-edge command"); end
    if (n_empty_spe == 0)    begin failures++; $display("FAIL no empty SPE"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
