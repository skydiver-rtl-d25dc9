// Testbench of sync_fifo: random pushes and pops against a queue model,
// checking data order, full/empty flags, and that push/pop in the same cycle
// keep the occupancy.
module tb_sync_fifo;
  localparam int unsigned W = 18, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic [W-1:0] din = '0, dout;
  logic full, empty;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] q [$];
  int n_full = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++;
        $display("FAIL flags size=%0d empty=%b full=%b", q.size(), empty, full);
      end
      if (!empty) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL data %h exp %h", dout, q[0]); end
      end
      if (full) n_full++;
      // bias the mix to visit both full and empty
      push = !full && ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      pop  = !empty && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      din  = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
