// Testbench of adder_tree: random partial sums (including extreme values)
// and FIFO-empty patterns; the tree must pop only when no FIFO is empty and
// deliver the exact signed sum one cycle after the pop.
module tb_adder_tree;
  localparam int unsigned N = 4, IN_W = 18, OUT_W = IN_W + 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] fifo_empty = '1;
  logic signed [IN_W-1:0] fifo_dout [N];
  logic pop, out_valid;
  logic signed [OUT_W-1:0] sum;

  adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_sum;
    bit exp_valid;
    for (int j = 0; j < int'(N); j++) fifo_dout[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    exp_valid = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // check result of previous cycle
      checks++;
      if (out_valid != exp_valid || (exp_valid && longint'(sum) != exp_sum)) begin
        failures++;
        $display("FAIL valid %b/%b sum %0d exp %0d", out_valid, exp_valid, sum, exp_sum);
      end
      fifo_empty = ($urandom_range(0, 2) == 0) ? N'($urandom) : '0;
      exp_sum = 0;
      for (int j = 0; j < int'(N); j++) begin
        automatic int pick = $urandom_range(0, 5);
        case (pick)
          0: fifo_dout[j] = {1'b0, {(IN_W-1){1'b1}}};
          1: fifo_dout[j] = {1'b1, {(IN_W-1){1'b0}}};
          default: fifo_dout[j] = IN_W'($urandom);
        endcase
        exp_sum += longint'(fifo_dout[j]);
      end
      #1;
      checks++;
      if (pop != (fifo_empty == '0)) begin failures++; $display("FAIL pop"); end
      exp_valid = (fifo_empty == '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
