// msdf_conv_accel: MSDF convolution accelerator top level.
//
// KPBS kernel processing blocks work in parallel on KPBS different output
// pixels of the same output channel (output-channel tile T_M = 1), each
// computing a k x k x T_N partial sum; all KPBs share one set of k*k*T_N
// weights. The activations enter bit-serially: per cycle each KPB receives
// one bit-plane of its k*k*T_N activations. A controller sequences the
// bit-planes and frames the digit-serial results.
//
// Interface and timing:
//   start / num_iters   begin num_iters iterations; busy, done as conv_ctrl.
//   plane_valid, plane_first, plane_idx, iter_idx
//                       the accelerator requests bit-plane plane_idx
//                       (MSB first) of iteration iter_idx in this cycle;
//                       act_bits must carry it in the same cycle.
//   act_bits[p][j]      bit-plane for KPB p, window position j (bit i =
//                       input channel i).
//   weights[j][i]       signed weight of window position j, channel i; must
//                       be stable during the A_BITS plane cycles.
//   psum_digit[p]       IEN-encoded signed digit of KPB p's partial sum, valid
//                       with psum_valid; psum_first / psum_last frame the
//                       P_OUT + ceil(log2 k^2) digits of one iteration. The
//                       first digit comes 2 + 2*ceil(log2 k^2) cycles after
//                       plane_first.
// Iterations start every ITER_CYCLES cycles (28, the paper's per-iteration
// count); the design needs at least P_OUT + ceil(log2 k^2) + 1 = 26.
//
// The 16 KPBs of 9 MMAs of 32 channels follow the paper. Sharing the weights
// among the KPBs, the port-level handshake, and leaving feature-map and
// weight storage, cross-tile accumulation and requantisation outside this
// module are this design's choices; the paper does not describe them.
module msdf_conv_accel
  import msdf_pkg::*;
#(
  parameter int unsigned KPBS        = 16,
  parameter int unsigned K           = 3,
  parameter int unsigned T_N         = 32,
  parameter int unsigned A_BITS      = 8,
  parameter int unsigned W_BITS      = 8,
  parameter int unsigned ITER_CYCLES = 28,
  parameter int unsigned ITER_W      = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [ITER_W-1:0]         num_iters,
  output logic                      busy,
  output logic                      done,
  output logic                      plane_valid,
  output logic                      plane_first,
  output logic [$clog2(A_BITS)-1:0] plane_idx,
  output logic [ITER_W-1:0]         iter_idx,
  input  logic [T_N-1:0]            act_bits [KPBS][K*K],
  input  logic signed [W_BITS-1:0]  weights  [K*K][T_N],
  output sd_digit_t                 psum_digit [KPBS],
  output logic                      psum_valid,
  output logic                      psum_first,
  output logic                      psum_last
);

  localparam int unsigned P_OUT      = p_out(A_BITS, W_BITS, T_N);
  localparam int unsigned MAT_LEVELS = $clog2(K * K);
  localparam int unsigned OUT_DIGITS = P_OUT + MAT_LEVELS;

  if (ITER_CYCLES < OUT_DIGITS + 1) begin : g_bad_period
    $error("msdf_conv_accel: ITER_CYCLES must be at least P_OUT + log2(k^2) + 1");
  end

  logic kpb_first [KPBS];

  for (genvar p = 0; p < KPBS; p++) begin : g_kpb
    kpb #(.K(K), .T_N(T_N), .A_BITS(A_BITS), .W_BITS(W_BITS)) u_kpb (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (plane_valid),
      .in_first (plane_first),
      .act_bits (act_bits[p]),
      .weights  (weights),
      .out_digit(psum_digit[p]),
      .out_first(kpb_first[p])
    );
  end

  conv_ctrl #(
    .A_BITS(A_BITS), .ITER_CYCLES(ITER_CYCLES),
    .OUT_DIGITS(OUT_DIGITS), .ITER_W(ITER_W)
  ) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .num_iters  (num_iters),
    .busy       (busy),
    .done       (done),
    .plane_valid(plane_valid),
    .plane_first(plane_first),
    .plane_idx  (plane_idx),
    .iter_idx   (iter_idx),
    .res_first  (kpb_first[0]),
    .psum_valid (psum_valid),
    .psum_first (psum_first),
    .psum_last  (psum_last)
  );

endmodule
