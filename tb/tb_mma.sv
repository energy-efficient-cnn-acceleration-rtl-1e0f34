// tb_mma: end-to-end check of the merged multiply-add unit at its default
// size (T_N = 32, 8-bit activations and weights).
//
// Inner products with random and extreme operands are fed bit-serially,
// MSB first, some back to back (a new product every P_OUT = 21 cycles) and
// some with idle gaps. The monitor rebuilds each result from its 21 signed
// digits, S = sum z_j 2^(21-j), and compares it with sum a_i * w_i computed
// here. It also checks the initial delay (first digit 2 cycles after the
// first bit-plane) and that the digits after a product's 21st are zero when
// nothing follows.
module tb_mma;
  import msdf_pkg::*;

  localparam int T_N = 32, A_BITS = 8, W_BITS = 8;
  localparam int P_OUT = A_BITS + W_BITS + $clog2(T_N);
  localparam int NTEST = 60;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic                     in_valid = 1'b0, in_first = 1'b0;
  logic [T_N-1:0]           act_bits = '0;
  logic signed [W_BITS-1:0] weights [T_N];
  sd_digit_t                out_digit;
  logic                     out_first;

  int checks = 0, failures = 0;
  longint exp_q [$];
  int     first_cycle_q [$];
  int     cycle = 0;

  mma #(.T_N(T_N), .A_BITS(A_BITS), .W_BITS(W_BITS)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: rebuild each digit stream.
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
        if (active) begin
          failures++;
          $display("FAIL new stream before 21 digits");
        end
        fc = first_cycle_q.pop_front();
        checks++;
        if (cycle - fc != 2) begin
          failures++;
          $display("FAIL initial delay %0d, expected 2", cycle - fc);
        end
        active = 1; acc = 0; ndig = 0;
      end
      if (active) begin
        acc = acc * 2 + longint'(sd_dec(out_digit));
        ndig++;
        if (ndig == P_OUT) begin
          longint e;
          e = exp_q.pop_front();
          checks++;
          if (acc != e) begin
            failures++;
            $display("FAIL result %0d expected %0d", acc, e);
          end
          active = 0;
        end
      end else if (rst_n && sd_dec(out_digit) != 0) begin
        failures++;
        $display("FAIL nonzero digit outside a stream");
      end
    end
  end

  initial begin
    logic [A_BITS-1:0] a [T_N];
    for (int i = 0; i < T_N; i++) weights[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int n = 0; n < NTEST; n++) begin
      longint e;
      e = 0;
      for (int i = 0; i < T_N; i++) begin
        case (n)
          0: begin a[i] = 8'hFF; weights[i] = -8'sd128; end
          1: begin a[i] = 8'hFF; weights[i] =  8'sd127; end
          2: begin a[i] = 8'h00; weights[i] =  8'sd55;  end
          default: begin
            a[i] = 8'($urandom);
            weights[i] = 8'($urandom);
          end
        endcase
        e += longint'(a[i]) * longint'(weights[i]);
      end
      exp_q.push_back(e);
      for (int b = A_BITS - 1; b >= 0; b--) begin
        in_valid <= 1'b1;
        in_first <= (b == A_BITS - 1);
        for (int i = 0; i < T_N; i++) act_bits[i] <= a[i][b];
        @(posedge clk);
      end
      in_valid <= 1'b0;
      in_first <= 1'b0;
      act_bits <= $urandom();       // ignored while in_valid is low
      // Back to back (P_OUT cycles apart) for odd n, with a gap otherwise.
      repeat (P_OUT - A_BITS + ((n % 2 == 1) ? 0 : int'($urandom_range(1, 6)))) @(posedge clk);
    end
    repeat (P_OUT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
