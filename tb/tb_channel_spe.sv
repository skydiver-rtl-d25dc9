// Testbench of channel_spe: clears the Psum memories, then drives each of
// the four streams with its own random list of accumulation commands (the
// weight follows its command by one cycle, as from the weight bank), raises
// the stream's done, and pops the stream FIFOs with random throttling. The
// drained values must equal the per-neuron sums of the commands in raster
// order of the stream's band; a second round checks that draining left every
// Psum at zero. Full FIFOs must stall the drain at least once.
module tb_channel_spe;
  import skydiver_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic start = 1'b0, clr = 1'b0;
  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr = '0;
  upd_t upd [N_STREAMS];
  logic sched_done [N_STREAMS];
  logic signed [WBITS-1:0] w [N_STREAMS];
  logic pop [N_STREAMS];
  logic signed [PSUM_BITS-1:0] dout [N_STREAMS];
  logic empty [N_STREAMS], fin [N_STREAMS], stall [N_STREAMS];

  channel_spe dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_stall = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int EH = 10, EW = 12, BAND = 3;
  int rows [N_STREAMS] = '{3, 3, 3, 1};
  int exp_ps [N_STREAMS][BAND][EW];
  int got [N_STREAMS][$];
  bit throttle;

  always @(posedge clk) for (int s = 0; s < int'(N_STREAMS); s++) if (stall[s]) n_stall++;

  // FIFO popper with throttling, records drained values
  always @(negedge clk) begin
    for (int s = 0; s < int'(N_STREAMS); s++) begin
      pop[s] = !empty[s] && (!throttle || $urandom_range(0, 3) == 0);
    end
  end
  always @(posedge clk)
    for (int s = 0; s < int'(N_STREAMS); s++) if (pop[s]) got[s].push_back(int'(dout[s]));

  task automatic round(int ncmd_base);
    upd_t cmds [N_STREAMS][$];
    int   wts  [N_STREAMS][$];
    int   len  [N_STREAMS];
    foreach (exp_ps[s, x, y]) exp_ps[s][x][y] = 0;
    for (int s = 0; s < int'(N_STREAMS); s++) begin
      got[s].delete();
      len[s] = ncmd_base * (s + 1);
      for (int i = 0; i < len[s]; i++) begin
        upd_t u;
        int wv = int'($urandom_range(0, 255)) - 128;
        u.valid = ($urandom_range(0, 9) != 0);
        u.chan = '0; u.r = '0;
        u.xl = HB'($urandom_range(0, rows[s] - 1));
        u.y  = WB'($urandom_range(0, EW - 1));
        if (i % 7 == 1) begin u.xl = cmds[s][i-1].xl; u.y = cmds[s][i-1].y; end // back-to-back
        cmds[s].push_back(u); wts[s].push_back(wv);
        if (u.valid) exp_ps[s][u.xl][u.y] += wv;
      end
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int t = 0; t < 4 * ncmd_base + 3; t++) begin
      for (int s = 0; s < int'(N_STREAMS); s++) begin
        upd[s] = (t < len[s]) ? cmds[s][t] : '0;
        w[s]   = (t >= 1 && t - 1 < len[s]) ? WBITS'(wts[s][t-1]) : '0;
        sched_done[s] = (t >= len[s] + 1);
      end
      @(negedge clk);
    end
    for (int s = 0; s < int'(N_STREAMS); s++) begin upd[s] = '0; sched_done[s] = 1'b1; end
    while (!(fin[0] && fin[1] && fin[2] && fin[3] && empty[0] && empty[1] && empty[2] && empty[3]))
      @(negedge clk);
    repeat (2) @(negedge clk);
    for (int s = 0; s < int'(N_STREAMS); s++) begin
      checks++;
      if (got[s].size() != rows[s] * EW) begin
        failures++; $display("FAIL stream %0d drained %0d values", s, got[s].size());
      end else
        for (int x = 0; x < rows[s]; x++)
          for (int y = 0; y < EW; y++) begin
            checks++;
            if (got[s][x*EW+y] != exp_ps[s][x][y]) begin
              failures++;
              if (failures < 10) $display("FAIL s%0d (%0d,%0d) %0d exp %0d", s, x, y, got[s][x*EW+y], exp_ps[s][x][y]);
            end
          end
    end
    for (int s = 0; s < int'(N_STREAMS); s++) sched_done[s] = 1'b0;
  endtask

  initial begin
    cfg = '0;
    cfg.eh = HB'(EH); cfg.ew = WB'(EW); cfg.band = HB'(BAND);
    for (int s = 0; s < int'(N_STREAMS); s++) begin upd[s] = '0; w[s] = '0; sched_done[s] = 1'b0; end
    throttle = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // clear sweep
    @(negedge clk);
    clr = 1'b1;
    for (int a = 0; a < int'(BAND_MAX * EW_MAX); a++) begin
      clr_addr = $bits(clr_addr)'(a);
      @(negedge clk);
    end
    clr = 1'b0;
    throttle = 1'b1;
    round(60);
    throttle = 1'b0;
    round(40);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
