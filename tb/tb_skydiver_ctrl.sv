// Testbench of skydiver_ctrl: checks the post-reset Psum clear sweep, the
// decoding of configuration, weight, bias, channel-table and spike writes,
// the derived output size and stream band, and the job sequencing: a layer
// with K = 20 filters must run ceil(20/8) = 3 filter groups with slots
// 0, 1, 2, each waiting for the (modelled) schedulers and clusters, then
// raise irq once, report done, and return the busy cycles counted per SPE.
module tb_skydiver_ctrl;
  import skydiver_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [31:0] host_waddr = '0, host_wdata = '0, host_raddr = '0, stat_rdata;
  logic irq, busy;
  cfg_t cfg;
  logic [CB:0] ch_cnt [N_SPE];
  logic [CB-1:0] ch_idx [N_SPE][N_STREAMS], ch_val [N_SPE][N_STREAMS];
  logic w_we [M_CLUSTERS], b_we [M_CLUSTERS];
  logic [SB-1:0] w_slot, slot;
  logic [CB-1:0] w_chan, sp_chan;
  logic [RRB-1:0] w_r;
  logic signed [WBITS-1:0] w_data;
  logic signed [VBITS-1:0] b_data;
  logic sp_we, start, clr;
  logic [HB-1:0] sp_row;
  logic [3:0] sp_chunk;
  logic [CHUNK-1:0] sp_data;
  logic [$clog2(BAND_MAX*EW_MAX)-1:0] clr_addr;
  logic sched_busy [N_SPE][N_STREAMS], sched_done [N_SPE][N_STREAMS];
  logic cl_fin [M_CLUSTERS];

  skydiver_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic hw(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_we = 1'b1; host_waddr = a; host_wdata = d;
    #1;
  endtask

  // model of the datapath: each scheduler busy for a random time after start
  int busy_left [N_SPE][N_STREAMS];
  int busy_total [N_SPE];
  int starts = 0, irqs = 0, clr_cycles = 0;
  int slots_seen [$];
  always @(posedge clk) begin
    if (clr) clr_cycles++;
    if (irq) irqs++;
    if (start) begin
      starts++;
      slots_seen.push_back(int'(slot));
    end
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) begin
        if (start) busy_left[j][s] <= $urandom_range(0, 40);
        else if (busy_left[j][s] > 0) busy_left[j][s] <= busy_left[j][s] - 1;
        if (!start && busy_left[j][s] > 0) busy_total[j]++;
      end
  end
  always_comb
    for (int j = 0; j < int'(N_SPE); j++)
      for (int s = 0; s < int'(N_STREAMS); s++) begin
        sched_busy[j][s] = busy_left[j][s] > 0;
        sched_done[j][s] = busy_left[j][s] == 0;
      end
  always_comb for (int m = 0; m < int'(M_CLUSTERS); m++) cl_fin[m] = 1'b1;

  initial begin
    logic [31:0] d;
    foreach (busy_left[j, s]) busy_left[j][s] = 0;
    foreach (busy_total[j]) busy_total[j] = 0;
    foreach (ch_idx[j, s]) ch_idx[j][s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (busy) @(negedge clk);
    chk(clr_cycles == int'(BAND_MAX * EW_MAX), $sformatf("clear sweep %0d cycles", clr_cycles));

    hw(32'h0, 12); hw(32'h1, 20); hw(32'h2, 33); hw(32'h3, 47); hw(32'h4, 1); hw(32'h5, 77);
    hw(32'h6, 0);
    @(negedge clk);
    host_we = 1'b0;
    #1;
    chk(cfg.c_in == 12 && cfg.k_out == 20 && cfg.h == 33 && cfg.w == 47 && cfg.pad == 1 &&
        cfg.vth == 77 && !cfg.first, "config registers");
    chk(cfg.eh == 33 && cfg.ew == 47 && cfg.band == 9, $sformatf("derived eh %0d ew %0d band %0d", cfg.eh, cfg.ew, cfg.band));
    hw(32'h4, 2);
    @(negedge clk);
    host_we = 1'b0;
    #1;
    chk(cfg.eh == 35 && cfg.ew == 49 && cfg.band == 9, "derived sizes, pad 2");

    // weight write to filter 13, channel 7, position 5
    hw(32'h1000_0000 | (13 << 12) | (7 << 4) | 5, 32'hFFFF_FFF3);
    for (int m = 0; m < int'(M_CLUSTERS); m++) chk(w_we[m] == (m == 5) && !b_we[m], "weight route");
    chk(w_slot == 1 && w_chan == 7 && w_r == 5 && w_data == -13, "weight fields");
    hw(32'h2000_0000 | 22, 32'd1234);
    for (int m = 0; m < int'(M_CLUSTERS); m++) chk(b_we[m] == (m == 6) && !w_we[m], "bias route");
    chk(w_slot == 2 && b_data == 1234, "bias fields");
    hw(32'h4000_0000 | (9 << 16) | (31 << 4) | 3, 32'hCAFE_F00D);
    chk(sp_we && sp_chan == 9 && sp_row == 31 && sp_chunk == 3 && sp_data == 32'hCAFE_F00D, "spike write");

    // channel table
    for (int j = 0; j < int'(N_SPE); j++) begin
      hw(32'h10 + j, 3 + j);
      for (int i = 0; i < 3 + j; i++) hw(32'h3000_0000 | (j << 8) | i, (j * 5 + i * 3) % 32);
    end
    @(negedge clk);
    host_we = 1'b0;
    for (int j = 0; j < int'(N_SPE); j++) begin
      chk(ch_cnt[j] == 3 + j, "channel count");
      for (int i = 0; i < 3 + j; i++) begin
        for (int s = 0; s < int'(N_STREAMS); s++) ch_idx[j][s] = CB'((i + s) % (3 + j));
        #1;
        for (int s = 0; s < int'(N_STREAMS); s++)
          chk(ch_val[j][s] == CB'((j * 5 + ((i + s) % (3 + j)) * 3) % 32), "channel table read");
      end
    end

    // job: 20 filters -> 3 groups
    foreach (busy_total[j]) busy_total[j] = 0;
    hw(32'h7, 1);
    @(negedge clk);
    host_we = 1'b0;
    while (irqs == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(starts == 3, $sformatf("%0d group starts", starts));
    chk(slots_seen.size() == 3 && slots_seen[0] == 0 && slots_seen[1] == 1 && slots_seen[2] == 2, "group slots");
    chk(irqs == 1 && !busy, "irq once, idle");
    host_raddr = 32'h5000_0000;
    @(negedge clk);
    chk(stat_rdata[1:0] == 2'b01, "status done");
    host_raddr = 32'h5000_0001;
    @(negedge clk);
    chk(stat_rdata > 0, "job cycles");
    for (int j = 0; j < int'(N_SPE); j++) begin
      host_raddr = 32'h5000_0002 + j;
      @(negedge clk);
      chk(stat_rdata == busy_total[j], $sformatf("SPE %0d busy %0d exp %0d", j, stat_rdata, busy_total[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
