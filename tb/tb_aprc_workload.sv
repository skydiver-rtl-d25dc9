// Workload testbench: spike counts against filter magnitude (APRC).
//
// With stride 1 and R-1 zero padding every weight of a filter meets every
// input spike, so an output channel's total membrane update is its filter's
// weight sum times the number of input spikes, and its spike count over
// several timesteps follows the weight sum. Without padding, spikes near the
// map border meet only some of the weights and that relation loosens.
//
// The test runs a layer shaped like the MNIST classifier's 16c->32c layer
// (28x28 input, 32 filters) on the default-size accelerator for eight
// timesteps, once with padding 2 and once with padding 0. Each filter has a
// weight sum drawn at random, spread unevenly over its nine kernel
// positions; input spikes are denser near the map border, where the two
// paddings differ most. Every output spike of every timestep is compared
// with a reference model that carries the membrane potential across
// timesteps (reset by subtraction). With padding 2 the summed first-timestep
// update of every output channel, read back from the VMEM banks, must equal
// the sum over input channels of kernel weight sum x input spikes exactly,
// and the Pearson correlation between per-channel spike count and filter
// weight sum must exceed 0.9. With padding 0 the identity must fail for some
// filter. The padding-0 correlation is printed for comparison only: with
// these random filters it comes out about as high, because the threshold,
// not the padding, dominates the scatter.
module tb_aprc_workload;
  import skydiver_pkg::*;

  localparam int C_L = 16, K_L = 32, H_L = 28, T_STEPS = 8, VTH_L = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [31:0] host_waddr = '0, host_wdata = '0, host_raddr = '0, host_rdata;
  logic irq, busy;
  logic [M_CLUSTERS*N_SPE-1:0] fifo_stall;

  skydiver_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (5_000_000) @(posedge clk);
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

  int  L_PAD, L_E;
  bit  spk  [C_L][H_L][H_L];
  int  wt   [K_L][C_L][RR];
  int  fsum [K_L];
  int  vst  [K_L][H_L+2][H_L+2];
  int  nspk [K_L];
  int  n_off = 0;   // filters whose total misses the identity (padding 0)

  // summed membrane update of filter k over its band memories (first timestep)
  function automatic longint vmem_total(int k);
    longint s = 0;
    int band = (L_E + int'(N_STREAMS) - 1) / int'(N_STREAMS);
    int m = k % int'(M_CLUSTERS), slot = k / int'(M_CLUSTERS);
    for (int s4 = 0; s4 < int'(N_STREAMS); s4++)
      for (int xl = 0; xl < band; xl++)
        if (s4 * band + xl < L_E)
          for (int y = 0; y < L_E; y++) begin
            int a = (slot * int'(BAND_MAX) + xl) * int'(EW_MAX) + y;
            case (m)
              0: case (s4) 0: s += longint'(dut.g_cl[0].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[0].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[0].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[0].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              1: case (s4) 0: s += longint'(dut.g_cl[1].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[1].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[1].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[1].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              2: case (s4) 0: s += longint'(dut.g_cl[2].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[2].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[2].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[2].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              3: case (s4) 0: s += longint'(dut.g_cl[3].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[3].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[3].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[3].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              4: case (s4) 0: s += longint'(dut.g_cl[4].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[4].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[4].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[4].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              5: case (s4) 0: s += longint'(dut.g_cl[5].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[5].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[5].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[5].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              6: case (s4) 0: s += longint'(dut.g_cl[6].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[6].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[6].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[6].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
              default: case (s4) 0: s += longint'(dut.g_cl[7].u_cl.g_tree[0].u_vmem.vmem[a]); 1: s += longint'(dut.g_cl[7].u_cl.g_tree[1].u_vmem.vmem[a]);
                           2: s += longint'(dut.g_cl[7].u_cl.g_tree[2].u_vmem.vmem[a]); default: s += longint'(dut.g_cl[7].u_cl.g_tree[3].u_vmem.vmem[a]); endcase
            endcase
          end
    return s;
  endfunction

  // filters: kernels of filter k sum to about 9*ks (ks drawn in 1..9), spread
  // over the nine positions by a zero-sum pattern of the filter that favours
  // some positions, plus a small per-weight jitter
  function automatic void make_filters();
    for (int k = 0; k < K_L; k++) begin
      int ks = int'($urandom_range(1, 9));
      int noise [RR];
      int tot = 0;
      for (int r = 0; r < int'(RR); r++) begin
        noise[r] = int'($urandom_range(0, 40)) - 20;
        tot += noise[r];
      end
      noise[RR-1] -= tot;
      fsum[k] = 0;
      for (int c = 0; c < C_L; c++)
        for (int r = 0; r < int'(RR); r++) begin
          wt[k][c][r] = ks + noise[r] + int'($urandom_range(0, 2)) - 1;
          fsum[k] += wt[k][c][r];
        end
    end
  endfunction

  function automatic real pearson(int a [K_L], int b [K_L]);
    real ma = 0, mb = 0, sab = 0, saa = 0, sbb = 0;
    for (int k = 0; k < K_L; k++) begin ma += a[k]; mb += b[k]; end
    ma /= K_L; mb /= K_L;
    for (int k = 0; k < K_L; k++) begin
      sab += (a[k] - ma) * (b[k] - mb);
      saa += (a[k] - ma) * (a[k] - ma);
      sbb += (b[k] - mb) * (b[k] - mb);
    end
    return (saa == 0 || sbb == 0) ? 0.0 : sab / $sqrt(saa * sbb);
  endfunction

  // one timestep: new input spikes, run, compare, count
  task automatic step(int t);
    logic [31:0] d;
    int mism = 0;
    int nin [C_L];
    for (int c = 0; c < C_L; c++)
      for (int a = 0; a < H_L; a++) begin
        if (a == 0) nin[c] = 0;
        d = '0;
        for (int b = 0; b < H_L; b++) begin
          bit near = (a < 2 || b < 2 || a >= H_L - 2 || b >= H_L - 2);
          spk[c][a][b] = $urandom_range(0, 99) < (near ? 30 : 4);
          d[b] = spk[c][a][b];
          nin[c] += spk[c][a][b];
        end
        hw(32'h4000_0000 | (c << 16) | (a << 4), d);
      end
    hw(32'h6, (t == 0) ? 1 : 0);
    hw(32'h7, 1);
    while (!irq) @(posedge clk);
    // reference: integrate, fire, subtract; compare every output bit
    for (int k = 0; k < K_L; k++) begin
      longint tot = 0;
      for (int x = 0; x < L_E; x++) begin
        hr(32'h6000_0000 | (k << 16) | (x << 4), d);
        for (int y = 0; y < L_E; y++) begin
          int z = 0;
          bit o;
          for (int c = 0; c < C_L; c++)
            for (int jj = 0; jj < int'(R); jj++)
              for (int kk = 0; kk < int'(R); kk++) begin
                int a = x - L_PAD + jj, b = y - L_PAD + kk;
                if (a >= 0 && a < H_L && b >= 0 && b < H_L && spk[c][a][b]) z += wt[k][c][jj*R+kk];
              end
          tot += z;
          vst[k][x][y] = ((t == 0) ? 0 : vst[k][x][y]) + z;
          o = vst[k][x][y] > VTH_L;
          if (o) vst[k][x][y] -= VTH_L;
          nspk[k] += o;
          if (d[y] != o) mism++;
        end
      end
      if (t == 0) begin
        longint want = 0;
        for (int c = 0; c < C_L; c++) begin
          int cs = 0;
          for (int r = 0; r < int'(RR); r++) cs += wt[k][c][r];
          want += longint'(cs) * nin[c];
        end
        if (L_PAD == int'(R) - 1) begin
          longint hv = vmem_total(k) + longint'(nspk[k]) * VTH_L;
          checks += 2;
          if (tot != want) begin
            failures++; $display("FAIL model: filter %0d total %0d, kernel sums x spikes give %0d", k, tot, want);
          end
          if (hv != tot) begin
            failures++; $display("FAIL filter %0d summed update %0d, expected %0d", k, hv, tot);
          end
        end else if (tot != want) n_off++;
      end
    end
    checks++;
    if (mism != 0) begin failures++; $display("FAIL pad %0d step %0d: %0d output spikes differ", L_PAD, t, mism); end
  endtask

  task automatic run_layer(int pad, output real corr);
    L_PAD = pad;
    L_E = H_L + 2 * pad - int'(R) + 1;
    hw(32'h0, C_L); hw(32'h1, K_L); hw(32'h2, H_L); hw(32'h3, H_L);
    hw(32'h4, pad); hw(32'h5, VTH_L);
    for (int j = 0; j < int'(N_SPE); j++) begin
      hw(32'h10 + j, C_L / N_SPE);
      for (int i = 0; i < C_L / int'(N_SPE); i++) hw(32'h3000_0000 | (j << 8) | i, i * N_SPE + j);
    end
    for (int k = 0; k < K_L; k++) nspk[k] = 0;
    for (int t = 0; t < T_STEPS; t++) step(t);
    corr = pearson(fsum, nspk);
    $display("padding %0d: correlation of spike count with filter sum %0.3f", pad, corr);
  endtask

  initial begin
    real c2, c0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (busy) @(posedge clk);

    make_filters();
    for (int k = 0; k < K_L; k++) begin
      hw(32'h2000_0000 | k, 0);
      for (int c = 0; c < C_L; c++)
        for (int r = 0; r < int'(RR); r++)
          hw(32'h1000_0000 | (k << 12) | (c << 4) | r, wt[k][c][r]);
    end

    run_layer(int'(R) - 1, c2);
    run_layer(0, c0);
    $display("padding 0: %0d of %0d filters miss weight sum x spikes", n_off, K_L);
    checks += 2;
    if (c2 <= 0.9)  begin failures++; $display("FAIL correlation with padding R-1 is %0.3f", c2); end
    if (n_off == 0) begin failures++; $display("FAIL padding 0 kept the exact relation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
