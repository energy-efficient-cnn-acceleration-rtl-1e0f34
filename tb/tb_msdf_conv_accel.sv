// tb_msdf_conv_accel: end-to-end test of the accelerator at its default
// size (16 KPBs x 9 MMAs x 32 channels, 8-bit operands).
//
// The bench plays the role of the feature-map and weight memories: for
// every iteration it holds one 3 x 3 x 32 activation window per KPB and one
// weight set, and answers each plane request combinationally with bit
// plane_idx of the activations of iteration iter_idx. It starts one
// operation of NITER iterations, rebuilds the 25-digit partial sum of every
// KPB in every iteration and compares it with the dot product computed here.
//
// Timing checks: iterations start every 28 cycles (Eq. 2's per-iteration
// count), so the NITER iterations occupy 28 * NITER cycles from the first
// plane; the first result digit arrives 10 cycles after the first plane
// (MMA delay 2 + 4 adder-tree levels x 2); done comes with the last digit.
//
// Mechanisms counted (each must occur at least once): an iteration issued
// while the previous one still drains through the adder trees (overlap),
// a residual restart at a new iteration, negative and positive output
// digits (the redundant signed-digit representation at work), and a start
// request ignored while busy.
module tb_msdf_conv_accel;
  import msdf_pkg::*;

  localparam int KPBS = 16, K = 3, T_N = 32, A_BITS = 8, W_BITS = 8;
  localparam int ITER_CYCLES = 28;
  localparam int OUT_DIGITS = A_BITS + W_BITS + $clog2(T_N) + $clog2(K*K);
  localparam int LAT = 2 + 2 * $clog2(K*K);
  localparam int NITER = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic                     start = 1'b0;
  logic [31:0]              num_iters = '0;
  logic                     busy, done, plane_valid, plane_first;
  logic [2:0]               plane_idx;
  logic [31:0]              iter_idx;
  logic [T_N-1:0]           act_bits [KPBS][K*K];
  logic signed [W_BITS-1:0] weights  [K*K][T_N];
  sd_digit_t                psum_digit [KPBS];
  logic                     psum_valid, psum_first, psum_last;

  // Operands of every iteration and the expected partial sums.
  logic [A_BITS-1:0]        a_mem [NITER][KPBS][K*K][T_N];
  logic signed [W_BITS-1:0] w_mem [NITER][K*K][T_N];
  longint                   expected [NITER][KPBS];

  int checks = 0, failures = 0, cycle = 0;
  int n_overlap = 0, n_restart = 0, n_neg = 0, n_pos = 0, n_ignored = 0;

  msdf_conv_accel dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  // Memory stand-in: answer the plane request of the current cycle.
  always_comb begin
    int it;
    it = (int'(iter_idx) < NITER) ? int'(iter_idx) : 0;
    for (int p = 0; p < KPBS; p++)
      for (int j = 0; j < K*K; j++)
        for (int i = 0; i < T_N; i++)
          act_bits[p][j][i] = a_mem[it][p][j][i][plane_idx];
    for (int j = 0; j < K*K; j++)
      for (int i = 0; i < T_N; i++)
        weights[j][i] = w_mem[it][j][i];
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (ITER_CYCLES * NITER + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Operand generation: iteration 0 uses the extreme values, the rest are
  // random.
  initial begin
    for (int it = 0; it < NITER; it++) begin
      for (int j = 0; j < K*K; j++)
        for (int i = 0; i < T_N; i++)
          w_mem[it][j][i] = (it == 0) ? ((j % 2 == 0) ? -8'sd128 : 8'sd127) : W_BITS'($urandom);
      for (int p = 0; p < KPBS; p++) begin
        expected[it][p] = 0;
        for (int j = 0; j < K*K; j++)
          for (int i = 0; i < T_N; i++) begin
            a_mem[it][p][j][i] = (it == 0) ? ((p % 2 == 0) ? 8'hFF : 8'h00) : A_BITS'($urandom);
            expected[it][p] += longint'(a_mem[it][p][j][i]) * longint'(w_mem[it][j][i]);
          end
      end
    end
  end

  // Result monitor.
  initial begin
    longint acc [KPBS];
    int     frame, ndig, first_plane_cycle, last_plane_cycle, nplanes;
    frame = 0; ndig = 0; first_plane_cycle = -1; last_plane_cycle = -1; nplanes = 0;
    forever begin
      @(posedge clk);
      #1;
      if (plane_valid) begin
        nplanes++;
        last_plane_cycle = cycle;
        if (first_plane_cycle < 0) first_plane_cycle = cycle;
        if (plane_first && iter_idx != 0) n_restart++;
        if (psum_valid) n_overlap++;
      end
      if (psum_valid) begin
        if (psum_first) begin
          ndig = 0;
          for (int p = 0; p < KPBS; p++) acc[p] = 0;
          if (frame == 0) check(cycle - first_plane_cycle == LAT, "first-digit latency");
        end
        for (int p = 0; p < KPBS; p++) begin
          acc[p] = acc[p] * 2 + longint'(sd_dec(psum_digit[p]));
          if (sd_dec(psum_digit[p]) < 0) n_neg++;
          if (sd_dec(psum_digit[p]) > 0) n_pos++;
        end
        ndig++;
        if (psum_last) begin
          check(ndig == OUT_DIGITS, "frame length");
          for (int p = 0; p < KPBS; p++) begin
            checks++;
            if (acc[p] != expected[frame][p]) begin
              failures++;
              $display("FAIL iteration %0d KPB %0d: %0d expected %0d",
                       frame, p, acc[p], expected[frame][p]);
            end
          end
          frame++;
          if (done) begin
            check(frame == NITER, "done after the last iteration");
            check(nplanes == A_BITS * NITER, "plane count");
            // NITER iterations occupy ITER_CYCLES * NITER cycles of issue.
            check(last_plane_cycle - first_plane_cycle + 1 + (ITER_CYCLES - A_BITS)
                  == ITER_CYCLES * NITER, "issue cycles = 28 x iterations");
            $display("iterations=%0d overlap=%0d restart=%0d neg_digits=%0d pos_digits=%0d ignored_start=%0d",
                     frame, n_overlap, n_restart, n_neg, n_pos, n_ignored);
            check(n_overlap > 0, "overlap of issue and drain happened");
            check(n_restart > 0, "residual restart happened");
            check(n_neg > 0, "negative digits happened");
            check(n_pos > 0, "positive digits happened");
            check(n_ignored > 0, "start while busy happened");
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end
      end
    end
  end

  // Stimulus.
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    num_iters <= 32'(NITER);
    @(posedge clk);
    start <= 1'b0;
    repeat (40) @(posedge clk);
    // A second start during the operation must be ignored.
    start <= 1'b1;
    num_iters <= 32'd2;
    @(posedge clk);
    #1;
    if (busy) n_ignored++;
    start <= 1'b0;
  end
endmodule
