// tb_unet_layer: one U-Net style 3x3 convolution layer run through the
// accelerator at its default size.
//
// Layer: 16 x 16 output, stride 1, padding 1, N = 128 input channels (four
// 32-channel tiles), M = 4 output channels, unsigned 8-bit activations and
// signed 8-bit weights, random data. The bench holds the feature map and the
// weights and answers the accelerator's plane requests. Iterations are
// ordered output channel, then group of 16 output pixels, then input-channel
// tile; in every iteration the 16 KPBs take 16 consecutive pixels of one
// output channel, so they share its weights. The bench adds the partial sums
// of the four tiles of each pixel (a step the accelerator leaves outside) and
// compares every output pixel with a direct convolution.
//
// It also checks the cycle count of the layer against the latency relation
// 28 x ceil(NConv / 16) x ceil(N / 32), with NConv = 16 * 16 * 4 = 1024,
// i.e. 28 x 64 x 4 = 7168 cycles of issue.
module tb_unet_layer;
  import msdf_pkg::*;

  localparam int KPBS = 16, K = 3, T_N = 32;
  localparam int R = 16, C = 16, N = 128, M = 4, PAD = 1;
  localparam int TILES = (N + T_N - 1) / T_N;
  localparam int GROUPS = (R * C + KPBS - 1) / KPBS;       // per output channel
  localparam int NITER = M * GROUPS * TILES;
  localparam int NCONV = R * C * M;
  localparam int OUT_DIGITS = 25;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic              start = 1'b0;
  logic [31:0]       num_iters = '0;
  logic              busy, done, plane_valid, plane_first;
  logic [2:0]        plane_idx;
  logic [31:0]       iter_idx;
  logic [T_N-1:0]    act_bits [KPBS][K*K];
  logic signed [7:0] weights  [K*K][T_N];
  sd_digit_t         psum_digit [KPBS];
  logic              psum_valid, psum_first, psum_last;

  logic [7:0]        fmap [N][R][C];          // input feature map (same size, padded)
  logic signed [7:0] wts  [M][N][K][K];
  longint            out_acc [M][R][C];

  int checks = 0, failures = 0, cycle = 0;

  msdf_conv_accel dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  // Decode an iteration number into output channel, pixel group and tile.
  function automatic void iter_fields(input int it, output int m, output int g, output int t);
    t = it % TILES;
    g = (it / TILES) % GROUPS;
    m = it / (TILES * GROUPS);
  endfunction

  // Memory stand-in.
  always_comb begin
    int m, g, t;
    iter_fields((int'(iter_idx) < NITER) ? int'(iter_idx) : 0, m, g, t);
    for (int p = 0; p < KPBS; p++) begin
      int pix, y, x;
      pix = g * KPBS + p;
      y = pix / C;
      x = pix % C;
      for (int j = 0; j < K*K; j++) begin
        int yy, xx;
        yy = y + j / K - PAD;
        xx = x + j % K - PAD;
        for (int i = 0; i < T_N; i++) begin
          if (pix < R * C && yy >= 0 && yy < R && xx >= 0 && xx < C && t * T_N + i < N)
            act_bits[p][j][i] = fmap[t * T_N + i][yy][xx][plane_idx];
          else
            act_bits[p][j][i] = 1'b0;
        end
      end
    end
    for (int j = 0; j < K*K; j++)
      for (int i = 0; i < T_N; i++)
        weights[j][i] = (t * T_N + i < N) ? wts[m][t * T_N + i][j / K][j % K] : 8'sd0;
  end

  initial begin
    repeat (28 * NITER + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Collect each frame, add it to its output pixel.
  initial begin
    longint acc [KPBS];
    int     frame, first_plane, last_plane;
    frame = 0; first_plane = -1; last_plane = -1;
    forever begin
      @(posedge clk);
      #1;
      if (plane_valid) begin
        if (first_plane < 0) first_plane = cycle;
        last_plane = cycle;
      end
      if (psum_valid) begin
        if (psum_first) for (int p = 0; p < KPBS; p++) acc[p] = 0;
        for (int p = 0; p < KPBS; p++) acc[p] = acc[p] * 2 + longint'(sd_dec(psum_digit[p]));
        if (psum_last) begin
          int m, g, t;
          iter_fields(frame, m, g, t);
          for (int p = 0; p < KPBS; p++) begin
            int pix;
            pix = g * KPBS + p;
            if (pix < R * C) out_acc[m][pix / C][pix % C] += acc[p];
          end
          frame++;
          if (done) begin
            int issue;
            checks++;
            if (frame != NITER) begin
              failures++;
              $display("FAIL %0d frames, expected %0d", frame, NITER);
            end
            issue = last_plane - first_plane + 1 + (28 - 8);
            checks++;
            if (issue != 28 * ((NCONV + KPBS - 1) / KPBS) * TILES) begin
              failures++;
              $display("FAIL issue cycles %0d", issue);
            end
            $display("layer %0dx%0d N=%0d M=%0d: %0d iterations, %0d issue cycles (Eq. 2: %0d)",
                     R, C, N, M, frame, issue, 28 * ((NCONV + KPBS - 1) / KPBS) * TILES);
            for (int mm = 0; mm < M; mm++)
              for (int y = 0; y < R; y++)
                for (int x = 0; x < C; x++) begin
                  longint ref_v;
                  ref_v = 0;
                  for (int n = 0; n < N; n++)
                    for (int ky = 0; ky < K; ky++)
                      for (int kx = 0; kx < K; kx++) begin
                        int yy, xx;
                        yy = y + ky - PAD;
                        xx = x + kx - PAD;
                        if (yy >= 0 && yy < R && xx >= 0 && xx < C)
                          ref_v += longint'(fmap[n][yy][xx]) * longint'(wts[mm][n][ky][kx]);
                      end
                  checks++;
                  if (out_acc[mm][y][x] != ref_v) begin
                    failures++;
                    $display("FAIL out[%0d][%0d][%0d] = %0d expected %0d",
                             mm, y, x, out_acc[mm][y][x], ref_v);
                  end
                end
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end
      end
    end
  end

  initial begin
    for (int n = 0; n < N; n++)
      for (int y = 0; y < R; y++)
        for (int x = 0; x < C; x++) fmap[n][y][x] = 8'($urandom);
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) wts[m][n][ky][kx] = 8'($urandom);
      for (int y = 0; y < R; y++)
        for (int x = 0; x < C; x++) out_acc[m][y][x] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    num_iters <= 32'(NITER);
    @(posedge clk);
    start <= 1'b0;
  end
endmodule
