// tb_mma_adder_tree: random and corner-case check of the 33-input adder
// tree (32 partial products plus residual) against a plain running sum.
module tb_mma_adder_tree;
  localparam int N_IN = 33, IN_W = 14, OUT_W = 15;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  ops [N_IN];
  logic signed [OUT_W-1:0] sum;
  int checks = 0, failures = 0;

  mma_adder_tree #(.N_IN(N_IN), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.operands(ops), .sum(sum));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      int exp_sum;
      exp_sum = 0;
      for (int i = 0; i < N_IN; i++) begin
        int val;
        // 32 weight-sized operands (-128..127) and a residual operand.
        if (i < N_IN - 1) val = (n == 0) ? -128 : (n == 1) ? 127 : int'($urandom_range(0, 255)) - 128;
        else              val = (n == 0) ? -8192 : (n == 1) ? 8190 : 2 * (int'($urandom_range(0, 8191)) - 4096);
        ops[i] = IN_W'(val);
        exp_sum += val;
      end
      @(posedge clk);
      checks++;
      if (int'(sum) != exp_sum) begin
        failures++;
        $display("FAIL n=%0d sum=%0d exp=%0d", n, sum, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
