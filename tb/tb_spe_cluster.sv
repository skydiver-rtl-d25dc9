// Testbench of spe_cluster (cluster 1): loads the weights and bias of filter
// slot 0, clears the Psums, then plays random accumulation commands on every
// stream of every channel-based SPE (as the schedulers would broadcast
// them), with the streams of different SPEs finishing at different times.
// Every output neuron's spike written by the cluster must equal the model
// V = bias + sum of the addressed weights, spike if V > Vth; positions must
// cover each band once. A second job with a filter count that leaves this
// cluster without a filter must write nothing.
module tb_spe_cluster;
  import skydiver_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic start = 1'b0, clr = 1'b0;
  logic [SB-1:0] slot = '0;
  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr = '0;
  upd_t upd [N_SPE][N_STREAMS];
  logic sched_done [N_SPE][N_STREAMS];
  logic w_we = 1'b0, b_we = 1'b0;
  logic [SB-1:0] w_slot = '0, b_slot = '0;
  logic [CB-1:0] w_chan = '0;
  logic [RRB-1:0] w_r = '0;
  logic signed [WBITS-1:0] w_data = '0;
  logic signed [VBITS-1:0] b_data = '0;
  logic out_we [N_STREAMS], out_spk [N_STREAMS];
  logic [KB-1:0] out_k [N_STREAMS];
  logic [HB-1:0] out_x [N_STREAMS];
  logic [WB-1:0] out_y [N_STREAMS];
  logic fin;
  logic [N_SPE-1:0] stall;

  spe_cluster #(.CLUSTER(1)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int EH = 14, EW = 20, BAND = 4, NC = 4, VTH = 40, BIAS = -6;
  int wt [NC][RR];
  int z [EH][EW];
  int seen [EH][EW];
  int n_wr = 0, n_spk = 0, n_bad = 0;

  always @(posedge clk)
    for (int s = 0; s < int'(N_STREAMS); s++)
      if (out_we[s]) begin
        automatic int x = int'(out_x[s]), y = int'(out_y[s]);
        automatic bit e = (z[x][y] + BIAS) > VTH;
        n_wr++;
        seen[x][y]++;
        n_spk += out_spk[s];
        if (out_spk[s] != e || out_k[s] != KB'(1) || x / BAND != s) n_bad++;
      end

  task automatic job(int kout, bit expect_writes);
    upd_t cmds [N_SPE][N_STREAMS][$];
    int maxlen = 0;
    cfg.k_out = (KB+1)'(kout);
    foreach (z[x, y]) begin z[x][y] = 0; seen[x][y] = 0; end
    n_wr = 0; n_bad = 0;
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) begin
        int rows = (s == 3) ? EH - 3 * BAND : BAND;
        int len = int'($urandom_range(10, 150)) * (j + 1);
        for (int i = 0; i < len; i++) begin
          upd_t u;
          u.valid = 1'b1;
          u.chan = CB'($urandom_range(0, NC - 1));
          u.r = RRB'($urandom_range(0, RR - 1));
          u.xl = HB'($urandom_range(0, rows - 1));
          u.y = WB'($urandom_range(0, EW - 1));
          cmds[j][s].push_back(u);
          z[s * BAND + u.xl][u.y] += wt[u.chan][u.r];
        end
        if (len > maxlen) maxlen = len;
      end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int t = 0; t <= maxlen + 2; t++) begin
      for (int j = 0; j < int'(N_SPE); j++)
        for (int s = 0; s < int'(N_STREAMS); s++) begin
          upd[j][s] = (t < cmds[j][s].size()) ? cmds[j][s][t] : '0;
          sched_done[j][s] = (t >= cmds[j][s].size() + 1);
        end
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    while (!fin) @(negedge clk);
    checks += 2;
    if (n_bad != 0) begin failures++; $display("FAIL %0d wrong spikes", n_bad); end
    if (n_wr != (expect_writes ? EH * EW : 0)) begin
      failures++; $display("FAIL %0d writes", n_wr);
    end
    if (expect_writes)
      foreach (seen[x, y]) begin
        checks++;
        if (seen[x][y] != 1) begin failures++; $display("FAIL neuron (%0d,%0d) seen %0d", x, y, seen[x][y]); end
      end
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) sched_done[j][s] = 1'b0;
  endtask

  initial begin
    cfg = '0;
    cfg.eh = HB'(EH); cfg.ew = WB'(EW); cfg.band = HB'(BAND); cfg.vth = VTH; cfg.first = 1'b1;
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) begin upd[j][s] = '0; sched_done[j][s] = 1'b0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < int'(RR); r++) begin
        @(negedge clk);
        wt[c][r] = int'($urandom_range(0, 30)) - 12;
        w_we = 1'b1; w_slot = '0; w_chan = CB'(c); w_r = RRB'(r); w_data = WBITS'(wt[c][r]);
      end
    @(negedge clk);
    w_we = 1'b0;
    b_we = 1'b1; b_slot = '0; b_data = VBITS'(BIAS);
    @(negedge clk);
    b_we = 1'b0;
    clr = 1'b1;
    for (int a = 0; a < int'(BAND_MAX * EW_MAX); a++) begin
      clr_addr = $bits(clr_addr)'(a);
      @(negedge clk);
    end
    clr = 1'b0;
    job(8, 1'b1);
    $display("spikes %0d of %0d", n_spk, EH * EW);
    job(8, 1'b1);   // Psums must have been cleared by the drain
    job(1, 1'b0);   // cluster 1 has no filter when K = 1
    checks++;
    if (n_spk == 0) begin failures++; $display("FAIL no spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
