// Testbench of vmem_update (stream 1): feeds random input currents for a
// band over three timesteps (the first marked first), for two filter slots,
// and checks every output spike, its position, and the stored potentials
// against a model of V += z + b; spike if V > Vth; V -= Vth on a spike, with
// saturation. Also checks that an inactive slot writes nothing.
module tb_vmem_update;
  import skydiver_pkg::*;
  localparam int Z_W = PSUM_BITS + $clog2(N_SPE);
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic start = 1'b0, active = 1'b1, in_valid = 1'b0;
  logic [SB-1:0] slot = '0;
  logic [KB-1:0] k = '0;
  logic signed [VBITS-1:0] bias = '0;
  logic signed [Z_W-1:0] z = '0;
  logic out_we, out_spk, fin;
  logic [KB-1:0] out_k;
  logic [HB-1:0] out_x;
  logic [WB-1:0] out_y;

  vmem_update #(.STREAM(1), .Z_W(Z_W)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int EH = 11, EW = 9, BAND = 3, VTH = 100;
  longint v [2][BAND][EW];
  int n_spk = 0, n_sat = 0;

  function automatic longint sat(longint x);
    longint hi = (longint'(1) << (VBITS - 1)) - 1;
    longint lo = -(longint'(1) << (VBITS - 1));
    return x > hi ? hi : (x < lo ? lo : x);
  endfunction

  task automatic step(int s, bit first, bit act, bit big);
    slot = SB'(s); k = KB'(s * 8 + 3); active = act;
    cfg.first = first;
    bias = VBITS'(s * 7 - 3);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int x = 0; x < BAND; x++)
      for (int y = 0; y < EW; y++) begin
        longint vv, zz;
        bit spk;
        zz = big ? longint'(((1 << (Z_W - 1)) - 1)) : longint'($urandom_range(0, 200)) - 60;
        z = Z_W'(zz);
        in_valid = 1'b1;
        vv = first ? 0 : v[s][x][y];
        vv = sat(vv + zz + bias);
        spk = vv > VTH;
        if (spk) vv = sat(vv - VTH);
        if (big && vv == (longint'(1) << (VBITS - 1)) - 1 - (spk ? VTH : 0)) n_sat++;
        #1;
        checks++;
        if (out_we != act || out_spk != spk || out_k != KB'(s * 8 + 3) ||
            out_x != HB'(BAND + x) || out_y != WB'(y)) begin
          failures++;
          $display("FAIL slot%0d (%0d,%0d) we %b spk %b exp %b x %0d y %0d", s, x, y, out_we, out_spk, spk, out_x, out_y);
        end
        if (act) begin v[s][x][y] = vv; n_spk += spk; end
        @(negedge clk);
      end
    in_valid = 1'b0;
    checks++;
    if (!fin) begin failures++; $display("FAIL fin"); end
    // stored potentials
    for (int x = 0; x < BAND; x++)
      for (int y = 0; y < EW; y++) begin
        checks++;
        if (longint'(dut.vmem[(s * BAND_MAX + x) * EW_MAX + y]) != v[s][x][y]) begin
          failures++;
          $display("FAIL stored V slot%0d (%0d,%0d)", s, x, y);
        end
      end
  endtask

  initial begin
    cfg = '0;
    cfg.eh = HB'(EH); cfg.ew = WB'(EW); cfg.band = HB'(BAND); cfg.vth = VTH;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    step(0, 1, 1, 0);
    step(1, 1, 1, 0);
    step(0, 0, 1, 0);
    step(1, 0, 0, 0);   // inactive: potentials must stay
    step(0, 0, 1, 0);
    for (int i = 0; i < 600; i++) step(1, 0, 1, 1);  // drive into saturation
    checks += 2;
    if (n_spk == 0) begin failures++; $display("FAIL no spikes"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
