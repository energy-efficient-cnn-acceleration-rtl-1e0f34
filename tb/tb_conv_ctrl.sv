// tb_conv_ctrl: check of the iteration sequencer and partial-sum framer.
//
// The KPB array is replaced by a 10-cycle delay from plane_first to
// res_first (the KPB latency). For several iteration counts the bench
// checks: plane_idx runs 7..0 once per iteration with plane_first on the
// first plane; iterations start every 28 cycles, so the issue phase lasts
// 28 * num_iters cycles (the paper's per-iteration count); each result
// frame is 25 digits with psum_first / psum_last at its ends; done pulses
// once, with the last digit of the last iteration; start is ignored while
// busy.
module tb_conv_ctrl;
  localparam int A_BITS = 8, ITER_CYCLES = 28, OUT_DIGITS = 25, ITER_W = 32;
  localparam int LAT = 10;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic              start = 1'b0;
  logic [ITER_W-1:0] num_iters = '0;
  logic              busy, done, plane_valid, plane_first;
  logic [2:0]        plane_idx;
  logic [ITER_W-1:0] iter_idx;
  logic              res_first;
  logic              psum_valid, psum_first, psum_last;
  logic [LAT-1:0]    dly = '0;

  int checks = 0, failures = 0;

  conv_ctrl #(.A_BITS(A_BITS), .ITER_CYCLES(ITER_CYCLES),
              .OUT_DIGITS(OUT_DIGITS), .ITER_W(ITER_W)) dut (.*);

  // Stand-in for the KPBs: first digit LAT cycles after the first plane.
  always_ff @(posedge clk) dly <= {dly[LAT-2:0], plane_valid && plane_first};
  assign res_first = dly[LAT-1];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int run = 0; run < 4; run++) begin
      int n, t, first_plane_t, last_plane_t, planes, frames, digits, dones, exp_idx;
      int prev_first;
      bit in_frame, seen_last;
      n = (run == 0) ? 1 : (run == 1) ? 3 : (run == 2) ? 0 : 5;
      t = 0; planes = 0; frames = 0; digits = 0; dones = 0; exp_idx = A_BITS - 1;
      first_plane_t = -1; last_plane_t = -1; prev_first = -1; in_frame = 0; seen_last = 0;
      start <= 1'b1;
      num_iters <= ITER_W'(n);
      @(posedge clk);
      start <= 1'b0;
      if (n == 0) begin
        #1;
        check(!busy, "num_iters = 0 must not start");
        continue;
      end
      while (!seen_last) begin
        #1;
        if (t == 3) begin
          start <= 1'b1;           // must be ignored while busy
          num_iters <= 32'd7;
        end else if (t == 4) start <= 1'b0;
        check(busy, "busy during operation");
        if (plane_valid) begin
          check(plane_idx == 3'(exp_idx), "plane index order");
          check(plane_first == (exp_idx == A_BITS - 1), "plane_first position");
          if (plane_first) begin
            if (prev_first >= 0) check(t - prev_first == ITER_CYCLES, "iteration period");
            check(int'(iter_idx) == planes / A_BITS, "iteration index");
            prev_first = t;
            if (first_plane_t < 0) first_plane_t = t;
          end
          exp_idx = (exp_idx == 0) ? A_BITS - 1 : exp_idx - 1;
          planes++;
          last_plane_t = t;
        end
        if (psum_valid) begin
          if (psum_first) begin
            check(!in_frame, "frame opened inside a frame");
            in_frame = 1; digits = 0; frames++;
          end
          digits++;
          if (psum_last) begin
            check(digits == OUT_DIGITS, "frame length");
            in_frame = 0;
            if (frames == n) seen_last = 1;
          end
        end
        if (done) begin
          dones++;
          check(psum_last && frames == n, "done with the last digit");
        end
        @(posedge clk);
        t++;
      end
      #1;
      check(planes == A_BITS * n, "plane count");
      // The issue phase spans ITER_CYCLES * n cycles (Eq. 2 per-iteration count).
      check(last_plane_t - first_plane_t + 1 == ITER_CYCLES * (n - 1) + A_BITS, "issue span");
      check(dones == 1, "one done pulse");
      check(!busy, "idle after done");
      repeat (5) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
