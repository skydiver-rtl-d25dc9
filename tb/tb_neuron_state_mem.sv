// Testbench of neuron_state_mem: writes random input spike rows chunk by
// chunk, reads them back on all scheduler ports (one-cycle latency), writes
// random output spike bits from all update ports at once and reads them back
// over the host port chunk by chunk.
module tb_neuron_state_mem;
  import skydiver_pkg::*;
  localparam int unsigned NRP = N_SPE * N_STREAMS, NWP = M_CLUSTERS * N_STREAMS;
  localparam int NCH_IN = (W_MAX + CHUNK - 1) / CHUNK, NCH_OUT = (EW_MAX + CHUNK - 1) / CHUNK;
  logic clk = 1'b0;
  logic in_we = 1'b0;
  logic [CB-1:0] in_wchan = '0;
  logic [HB-1:0] in_wrow = '0;
  logic [3:0] in_wchunk = '0, hr_chunk = '0;
  logic [CHUNK-1:0] in_wdata = '0, hr_data;
  logic [CB-1:0] rchan [NRP];
  logic [HB-1:0] rrow [NRP];
  logic [W_MAX-1:0] rdata [NRP];
  logic out_we [NWP], out_spk [NWP];
  logic [KB-1:0] out_k [NWP];
  logic [HB-1:0] out_x [NWP];
  logic [WB-1:0] out_y [NWP];
  logic [KB-1:0] hr_k = '0;
  logic [HB-1:0] hr_row = '0;

  neuron_state_mem #(.NRP(NRP), .NWP(NWP)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit imdl [4][8][W_MAX];
  bit omdl [4][6][EW_MAX];

  initial begin
    for (int p = 0; p < int'(NRP); p++) begin rchan[p] = '0; rrow[p] = '0; end
    for (int p = 0; p < int'(NWP); p++) begin
      out_we[p] = 1'b0; out_spk[p] = 1'b0; out_k[p] = '0; out_x[p] = '0; out_y[p] = '0;
    end
    // input map: channels 0..3, rows 0..7 (plus channel 31 / row 79 corner)
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < 8; a++)
        for (int ch = 0; ch < NCH_IN; ch++) begin
          @(negedge clk);
          in_we = 1'b1; in_wchan = CB'(c); in_wrow = HB'(a); in_wchunk = 4'(ch);
          in_wdata = $urandom;
          for (int b = 0; b < int'(CHUNK); b++)
            if (ch * int'(CHUNK) + b < int'(W_MAX)) imdl[c][a][ch*CHUNK+b] = in_wdata[b];
        end
    @(negedge clk);
    in_we = 1'b0;
    for (int i = 0; i < 200; i++) begin
      int ec [NRP], ea [NRP];
      @(negedge clk);
      for (int p = 0; p < int'(NRP); p++) begin
        ec[p] = $urandom_range(0, 3); ea[p] = $urandom_range(0, 7);
        rchan[p] = CB'(ec[p]); rrow[p] = HB'(ea[p]);
      end
      @(negedge clk);
      for (int p = 0; p < int'(NRP); p++)
        for (int b = 0; b < int'(W_MAX); b++) begin
          checks++;
          if (rdata[p][b] != imdl[ec[p]][ea[p]][b]) begin
            failures++;
            $display("FAIL in read port %0d c%0d a%0d b%0d", p, ec[p], ea[p], b);
          end
        end
    end
    // output map: fill channels 0..3 rows 0..5 with all ports writing distinct bits
    for (int n = 0; n < 4 * 6 * int'(EW_MAX); n += int'(NWP)) begin
      @(negedge clk);
      for (int p = 0; p < int'(NWP); p++) begin
        automatic int idx = n + p;
        automatic int k = idx / (6 * EW_MAX);
        automatic int x = (idx / EW_MAX) % 6;
        automatic int y = idx % EW_MAX;
        out_we[p] = (idx < 4 * 6 * int'(EW_MAX));
        out_k[p] = KB'(k); out_x[p] = HB'(x); out_y[p] = WB'(y);
        out_spk[p] = $urandom_range(0, 1);
        if (out_we[p]) omdl[k][x][y] = out_spk[p];
      end
    end
    @(negedge clk);
    for (int p = 0; p < int'(NWP); p++) out_we[p] = 1'b0;
    for (int k = 0; k < 4; k++)
      for (int x = 0; x < 6; x++)
        for (int ch = 0; ch < NCH_OUT; ch++) begin
          @(negedge clk);
          hr_k = KB'(k); hr_row = HB'(x); hr_chunk = 4'(ch);
          @(negedge clk);
          for (int b = 0; b < int'(CHUNK); b++) begin
            automatic bit e = (ch * int'(CHUNK) + b < int'(EW_MAX)) ? omdl[k][x][ch*CHUNK+b] : 1'b0;
            checks++;
            if (hr_data[b] != e) begin
              failures++;
              $display("FAIL out read k%0d x%0d chunk%0d bit%0d", k, x, ch, b);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
