// tb_kpb: check of one kernel processing block at its default size
// (3 x 3 window, T_N = 32, 8-bit operands).
//
// Random activation windows (unsigned 8-bit) and weights (signed 8-bit),
// plus the two extreme cases, are fed as 8 MSB-first bit-planes; windows
// follow each other at the minimum spacing of 21 + 4 + 1 = 26 cycles or
// with gaps. The 25-digit partial sum is rebuilt and compared with the
// k x k x T_N dot product computed here; the latency from the first plane
// to the first digit (2 + 4 x 2 = 10 cycles) is checked.
module tb_kpb;
  import msdf_pkg::*;

  localparam int K = 3, T_N = 32, A_BITS = 8, W_BITS = 8;
  localparam int OUT_DIGITS = A_BITS + W_BITS + $clog2(T_N) + $clog2(K*K);
  localparam int LAT = 2 + 2 * $clog2(K*K);
  localparam int NTEST = 40;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic                     in_valid = 1'b0, in_first = 1'b0;
  logic [T_N-1:0]           act_bits [K*K];
  logic signed [W_BITS-1:0] weights  [K*K][T_N];
  sd_digit_t                out_digit;
  logic                     out_first;

  int checks = 0, failures = 0, cycle = 0;
  longint exp_q [$];
  int     first_cycle_q [$];

  kpb #(.K(K), .T_N(T_N), .A_BITS(A_BITS), .W_BITS(W_BITS)) dut (.*);

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
      if (in_valid && in_first) first_cycle_q.push_back(cycle);
      if (out_first) begin
        int fc;
        fc = first_cycle_q.pop_front();
        checks++;
        if (active || cycle - fc != LAT) begin
          failures++;
          $display("FAIL latency %0d (expected %0d) or overlapping result", cycle - fc, LAT);
        end
        active = 1; acc = 0; ndig = 0;
      end
      if (active) begin
        acc = acc * 2 + longint'(sd_dec(out_digit));
        ndig++;
        if (ndig == OUT_DIGITS) begin
          longint e;
          e = exp_q.pop_front();
          checks++;
          if (acc != e) begin
            failures++;
            $display("FAIL partial sum %0d expected %0d", acc, e);
          end
          active = 0;
        end
      end
    end
  end

  initial begin
    logic [A_BITS-1:0] a [K*K][T_N];
    for (int j = 0; j < K*K; j++) begin
      act_bits[j] = '0;
      for (int i = 0; i < T_N; i++) weights[j][i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < NTEST; n++) begin
      longint e;
      e = 0;
      for (int j = 0; j < K*K; j++)
        for (int i = 0; i < T_N; i++) begin
          case (n)
            0: begin a[j][i] = 8'hFF; weights[j][i] <= -8'sd128; e += 255 * -128; end
            1: begin a[j][i] = 8'hFF; weights[j][i] <=  8'sd127; e += 255 *  127; end
            default: begin
              logic signed [W_BITS-1:0] w;
              a[j][i] = 8'($urandom);
              w = 8'($urandom);
              weights[j][i] <= w;
              e += longint'(a[j][i]) * longint'(w);
            end
          endcase
        end
      exp_q.push_back(e);
      for (int b = A_BITS - 1; b >= 0; b--) begin
        in_valid <= 1'b1;
        in_first <= (b == A_BITS - 1);
        for (int j = 0; j < K*K; j++)
          for (int i = 0; i < T_N; i++) act_bits[j][i] <= a[j][i][b];
        @(posedge clk);
      end
      in_valid <= 1'b0;
      in_first <= 1'b0;
      repeat (OUT_DIGITS + 1 - A_BITS + ((n % 2 == 0) ? 0 : int'($urandom_range(1, 5)))) @(posedge clk);
    end
    repeat (OUT_DIGITS + LAT + 6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
