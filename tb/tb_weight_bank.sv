// Testbench of weight_bank: fills every slot, channel and kernel position of
// one cluster's bank and the biases with random values, then reads random
// addresses on all ports and checks the one-cycle read latency and data.
module tb_weight_bank;
  import skydiver_pkg::*;
  localparam int unsigned NP = N_SPE * N_STREAMS;
  logic clk = 1'b0;
  logic we = 1'b0, bias_we = 1'b0;
  logic [SB-1:0] wslot = '0, bias_wslot = '0, slot = '0;
  logic [CB-1:0] wchan = '0;
  logic [RRB-1:0] wr = '0;
  logic signed [WBITS-1:0] wdata = '0;
  logic signed [VBITS-1:0] bias_wdata = '0, bias;
  logic [CB-1:0] rchan [NP];
  logic [RRB-1:0] rr [NP];
  logic signed [WBITS-1:0] rdata [NP];

  weight_bank #(.NP(NP)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [WBITS-1:0] mdl [SLOTS][C_MAX][RR];
  int bmdl [SLOTS];

  initial begin
    int es [NP], ec [NP], er [NP];
    for (int p = 0; p < int'(NP); p++) begin rchan[p] = '0; rr[p] = '0; end
    for (int s = 0; s < int'(SLOTS); s++) begin
      for (int c = 0; c < int'(C_MAX); c++)
        for (int r = 0; r < int'(RR); r++) begin
          @(negedge clk);
          we = 1'b1; wslot = SB'(s); wchan = CB'(c); wr = RRB'(r); wdata = WBITS'($urandom);
          mdl[s][c][r] = wdata;
        end
      @(negedge clk);
      we = 1'b0;
      bias_we = 1'b1; bias_wslot = SB'(s); bias_wdata = VBITS'($urandom); bmdl[s] = int'(bias_wdata);
    end
    @(negedge clk);
    bias_we = 1'b0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      slot = SB'($urandom_range(0, SLOTS - 1));
      for (int p = 0; p < int'(NP); p++) begin
        rchan[p] = CB'($urandom_range(0, C_MAX - 1));
        rr[p]    = RRB'($urandom_range(0, RR - 1));
        ec[p] = rchan[p]; er[p] = rr[p];
      end
      #1;
      checks++;
      if (int'(bias) != bmdl[slot]) begin failures++; $display("FAIL bias"); end
      @(negedge clk);
      for (int p = 0; p < int'(NP); p++) begin
        checks++;
        if (rdata[p] != mdl[slot][ec[p]][er[p]]) begin
          failures++;
          $display("FAIL port %0d slot %0d c %0d r %0d: %0d exp %0d", p, slot, ec[p], er[p],
                   rdata[p], mdl[slot][ec[p]][er[p]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
