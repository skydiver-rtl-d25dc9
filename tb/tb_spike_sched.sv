// Testbench of spike_sched: a spike map and channel list in the testbench
// (the map answers the scheduler's row reads one cycle later, like the
// neuron state memory). The sequence of valid commands must equal a model
// that walks channel list, input rows of the stream band, set columns in
// ascending order and the R x R kernel positions, keeping only positions that
// land in the stream's band and in the output map. The busy time must equal
// 2 cycles per row read plus R*R cycles per spike plus 1 cycle per channel.
// Run for every stream and for paddings 2, 1 and 0.
module tb_spike_sched;
  import skydiver_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic start [N_STREAMS];
  logic [CB:0] ch_cnt;
  logic [CB-1:0] ch_idx [N_STREAMS], ch_val [N_STREAMS];
  logic [CB-1:0] rchan [N_STREAMS];
  logic [HB-1:0] rrow [N_STREAMS];
  logic [W_MAX-1:0] rdata [N_STREAMS];
  upd_t upd [N_STREAMS];
  logic busy [N_STREAMS], done [N_STREAMS], spike_ev [N_STREAMS];

  for (genvar s = 0; s < int'(N_STREAMS); s++) begin : g_dut
    spike_sched #(.STREAM(s)) dut (
      .clk, .rst_n, .cfg, .start(start[s]), .ch_cnt, .ch_idx(ch_idx[s]), .ch_val(ch_val[s]),
      .rchan(rchan[s]), .rrow(rrow[s]), .rdata(rdata[s]), .upd(upd[s]),
      .busy(busy[s]), .done(done[s]), .spike_ev(spike_ev[s])
    );
  end
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit map [8][24][W_MAX];
  int lst [$];
  always_comb for (int s = 0; s < int'(N_STREAMS); s++) ch_val[s] = CB'(lst[ch_idx[s]]);
  always_ff @(posedge clk)
    for (int s = 0; s < int'(N_STREAMS); s++)
      for (int b = 0; b < int'(W_MAX); b++)
        rdata[s][b] <= (rrow[s] < 24) ? map[rchan[s] % 8][rrow[s]][b] : 1'b0;

  task automatic run(int h, int w, int pad, int nch);
    int eh = h + 2 * pad - int'(R) + 1, ew = w + 2 * pad - int'(R) + 1;
    int band = (eh + 3) / 4;
    cfg = '0;
    cfg.h = HB'(h); cfg.w = WB'(w); cfg.pad = 2'(pad);
    cfg.eh = HB'(eh); cfg.ew = WB'(ew); cfg.band = HB'(band);
    lst.delete();
    for (int i = 0; i < nch; i++) lst.push_back($urandom_range(0, 7));
    ch_cnt = (CB+1)'(nch);
    foreach (map[c, a, b]) map[c][a][b] = ($urandom_range(0, 99) < 12) && a < h && b < w;
    for (int s = 0; s < int'(N_STREAMS); s++) begin
      int lo = s * band, rows = eh - lo, alo, ahi, ncmd = 0, nbusy = 0, exp_busy = 1;
      upd_t got [$];
      if (rows > band) rows = band;
      if (rows < 0) rows = 0;
      alo = lo - pad; ahi = lo + rows - 1 - pad + int'(R) - 1;
      if (alo < 0) alo = 0;
      if (ahi > h - 1) ahi = h - 1;
      @(negedge clk);
      start[s] = 1'b1;
      @(negedge clk);
      start[s] = 1'b0;
      while (!done[s]) begin
        if (upd[s].valid) got.push_back(upd[s]);
        nbusy += busy[s];
        @(negedge clk);
      end
      // model
      foreach (lst[i]) begin
        if (rows > 0) begin
          exp_busy += 1;
          for (int a = alo; a <= ahi; a++) begin
            exp_busy += 3;
            for (int b = 0; b < w; b++) if (map[lst[i]][a][b]) begin
              exp_busy += int'(RR);
              for (int jj = 0; jj < int'(R); jj++) for (int kk = 0; kk < int'(R); kk++) begin
                int x = a + pad - jj, y = b + pad - kk;
                if (x >= lo && x < lo + rows && y >= 0 && y < ew) begin
                  checks++;
                  if (ncmd >= got.size() || got[ncmd].chan != CB'(lst[i]) ||
                      got[ncmd].r != RRB'(jj * R + kk) || got[ncmd].xl != HB'(x - lo) ||
                      got[ncmd].y != WB'(y)) begin
                    failures++;
                    if (failures < 10) $display("FAIL pad%0d s%0d cmd %0d", pad, s, ncmd);
                  end
                  ncmd++;
                end
              end
            end
          end
        end
      end
      checks += 2;
      if (ncmd != got.size()) begin failures++; $display("FAIL count %0d exp %0d", got.size(), ncmd); end
      if (rows == 0 || nch == 0) exp_busy = 1;
      if (nbusy != exp_busy) begin failures++; $display("FAIL pad%0d s%0d busy %0d exp %0d", pad, s, nbusy, exp_busy); end
    end
  endtask

  initial begin
    for (int s = 0; s < int'(N_STREAMS); s++) start[s] = 1'b0;
    ch_cnt = '0;
    cfg = '0;
    lst.push_back(0);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(13, 37, 2, 3);
    run(20, 70, 1, 2);
    run(9, 160, 0, 2);
    run(4, 4, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
