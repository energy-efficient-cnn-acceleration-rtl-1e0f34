// tb_mat: check of the MSDF adder tree of a KPB (9 inputs, 4 levels).
//
// Nine random 21-digit signed-digit streams (and all +1 / all -1 extremes)
// are summed; new sets start at the minimum spacing of L + 4 + 1 = 26 cycles
// or with gaps. The 25 output digits are rebuilt into an integer and
// compared with the sum of the nine input values, and the tree's latency of
// 4 x 2 = 8 cycles is checked.
module tb_mat;
  import msdf_pkg::*;

  localparam int N_IN = 9, L = 21, LEVELS = 4;
  localparam int NTEST = 200;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic      in_first = 1'b0;
  sd_digit_t in_digits [N_IN];
  sd_digit_t out_digit;
  logic      out_first;

  int checks = 0, failures = 0, cycle = 0;
  longint exp_q [$];
  int     first_cycle_q [$];

  mat #(.N_IN(N_IN)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    int     ndig;
    bit     active;
    active = 0; acc = 0; ndig = 0;
    forever begin
      @(posedge clk);
      #1;
      if (in_first) first_cycle_q.push_back(cycle);
      if (out_first) begin
        int fc;
        fc = first_cycle_q.pop_front();
        checks++;
        if (active || cycle - fc != 2 * LEVELS) begin
          failures++;
          $display("FAIL latency %0d (expected %0d) or overlapping result", cycle - fc, 2 * LEVELS);
        end
        active = 1; acc = 0; ndig = 0;
      end
      if (active) begin
        acc = acc * 2 + longint'(sd_dec(out_digit));
        ndig++;
        if (ndig == L + LEVELS) begin
          longint e;
          e = exp_q.pop_front();
          checks++;
          if (acc != e) begin
            failures++;
            $display("FAIL sum %0d expected %0d", acc, e);
          end
          active = 0;
        end
      end else if (rst_n && sd_dec(out_digit) != 0) begin
        failures++;
        $display("FAIL nonzero digit outside a result");
      end
    end
  end

  initial begin
    for (int i = 0; i < N_IN; i++) in_digits[i] = SD_ZERO;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < NTEST; n++) begin
      longint total;
      total = 0;
      for (int j = 0; j < L; j++) begin
        in_first <= (j == 0);
        for (int i = 0; i < N_IN; i++) begin
          int d;
          d = (n == 0) ? 1 : (n == 1) ? -1 : int'($urandom_range(0, 2)) - 1;
          total += longint'(d) <<< (L - 1 - j);
          in_digits[i] <= sd_enc(2'(d));
        end
        @(posedge clk);
      end
      exp_q.push_back(total);
      in_first <= 1'b0;
      for (int i = 0; i < N_IN; i++) in_digits[i] <= SD_ZERO;
      repeat (LEVELS + 1 + ((n % 2 == 0) ? 0 : int'($urandom_range(1, 4)))) @(posedge clk);
    end
    repeat (L + 2 * LEVELS + 6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
