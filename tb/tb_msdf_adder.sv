// tb_msdf_adder: check of the signed-digit online adder.
//
// Random and extreme 21-digit streams X and Y are added; streams follow
// each other at the minimum spacing of L + 2 cycles or with gaps. The
// monitor rebuilds the L + 1 output digits into an integer and compares
// it with X + Y computed here from the input digits, checks the adder's
// initial delay of 2 cycles and that no nonzero digit appears outside a
// result.
module tb_msdf_adder;
  import msdf_pkg::*;

  localparam int L = 21;
  localparam int NTEST = 300;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic      in_first = 1'b0;
  sd_digit_t x = SD_ZERO, y = SD_ZERO, z;
  logic      out_first;

  int checks = 0, failures = 0, cycle = 0;
  longint exp_q [$];
  int     first_cycle_q [$];

  msdf_adder dut (.*);

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
        if (active || cycle - fc != 2) begin
          failures++;
          $display("FAIL delay %0d (expected 2) or overlapping result", cycle - fc);
        end
        active = 1; acc = 0; ndig = 0;
      end
      if (active) begin
        acc = acc * 2 + longint'(sd_dec(z));
        ndig++;
        if (ndig == L + 1) begin
          longint e;
          e = exp_q.pop_front();
          checks++;
          if (acc != e) begin
            failures++;
            $display("FAIL sum %0d expected %0d", acc, e);
          end
          active = 0;
        end
      end else if (rst_n && sd_dec(z) != 0) begin
        failures++;
        $display("FAIL nonzero digit outside a result");
      end
    end
  end

  function automatic int pick(int n);
    if (n == 0) return 1;
    if (n == 1) return -1;
    return int'($urandom_range(0, 2)) - 1;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < NTEST; n++) begin
      longint xv, yv;
      xv = 0; yv = 0;
      for (int j = 0; j < L; j++) begin
        int dx, dy;
        dx = pick(n);
        dy = (n < 2) ? dx : pick(n);
        xv = xv * 2 + dx;
        yv = yv * 2 + dy;
        in_first <= (j == 0);
        x <= sd_enc(2'(dx));
        y <= sd_enc(2'(dy));
        @(posedge clk);
      end
      exp_q.push_back(xv + yv);
      in_first <= 1'b0;
      x <= (n % 3 == 0) ? 2'b01 : SD_ZERO;   // both encodings of zero
      y <= SD_ZERO;
      repeat (2 + ((n % 2 == 0) ? 0 : int'($urandom_range(1, 4)))) @(posedge clk);
    end
    repeat (L + 6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
