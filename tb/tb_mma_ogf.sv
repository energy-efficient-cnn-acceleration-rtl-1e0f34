// tb_mma_ogf: exhaustive check of the MMA output digit generation function.
// For every legal top value t (-3..2) and random low bits it rebuilds the sum
// V = t * 2^12 + low (PW = 13), checks the selected digit against the
// thresholds V >= 1/2 -> +1, V < -1/2 -> -1 (units 2^-13), and checks that
// the residual {r_sign, low} equals V - z * 2^13 and lies in [-1/2, 1/2).
module tb_mma_ogf;
  import msdf_pkg::*;

  localparam int PW = 13;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [2:0] top;
  sd_digit_t         digit;
  logic              r_sign;
  int checks = 0, failures = 0;

  mma_ogf dut (.top(top), .digit(digit), .r_sign(r_sign));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = -3; t <= 2; t++) begin
      for (int rep = 0; rep < 20; rep++) begin
        int low, v, z_exp, r;
        low = (rep == 0) ? 0 : (rep == 1) ? (1 << (PW-1)) - 1 : int'($urandom_range(0, (1 << (PW-1)) - 1));
        v   = t * (1 << (PW-1)) + low;
        top = 3'(t);
        @(posedge clk);
        z_exp = (v >= (1 << (PW-1))) ? 1 : (v < -(1 << (PW-1))) ? -1 : 0;
        checks++;
        if (int'(sd_dec(digit)) != z_exp) begin
          failures++;
          $display("FAIL t=%0d v=%0d digit=%0d exp=%0d", t, v, sd_dec(digit), z_exp);
        end
        r = r_sign ? low - (1 << (PW-1)) : low;
        checks++;
        if (r != v - z_exp * (1 << PW) || r < -(1 << (PW-1)) || r >= (1 << (PW-1))) begin
          failures++;
          $display("FAIL t=%0d v=%0d residual=%0d", t, v, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
