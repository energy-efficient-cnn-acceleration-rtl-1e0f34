// kpb: kernel processing block (KPB).
//
// Computes one partial sum of a k x k convolution over T_N input channels,
//   S_KPB = sum_{j=1..k^2} sum_{i=1..T_N} a_{i,j} * w_{i,j},
// and emits it most significant digit first as P_OUT + ceil(log2 k^2)
// signed digits (21 + 4 = 25 by default).
//
// How it works: k^2 MMA units, one per position of the k x k window, each
// form the inner product over the T_N channels of their window position
// from their own activation bit-planes and weights. Their synchronous digit
// streams are summed by an MSDF adder tree (mat).
//
// Interface and timing: act_bits[j] is the bit-plane of window position j
// (bit i = channel i), weights[j][i] the weight of position j, channel i.
// in_valid / in_first as for mma. out_first marks the first digit of the
// partial sum, 2 + 2*ceil(log2 k^2) cycles (10 by default) after in_first.
// Inner products may start every P_OUT + ceil(log2 k^2) + 1 cycles.
//
// The structure (k^2 MMAs feeding a ceil(log2 k^2)-stage MSDF adder tree)
// follows the paper.
module kpb
  import msdf_pkg::*;
#(
  parameter int unsigned K      = 3,
  parameter int unsigned T_N    = 32,
  parameter int unsigned A_BITS = 8,
  parameter int unsigned W_BITS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic [T_N-1:0]           act_bits [K*K],
  input  logic signed [W_BITS-1:0] weights  [K*K][T_N],
  output sd_digit_t                out_digit,
  output logic                     out_first
);

  sd_digit_t mma_digit [K*K];
  logic      mma_first [K*K];

  for (genvar j = 0; j < K*K; j++) begin : g_mma
    mma #(.T_N(T_N), .A_BITS(A_BITS), .W_BITS(W_BITS)) u_mma (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_first (in_first),
      .act_bits (act_bits[j]),
      .weights  (weights[j]),
      .out_digit(mma_digit[j]),
      .out_first(mma_first[j])
    );
  end

  // All MMAs run in lockstep; the first one's marker frames the tree.
  mat #(.N_IN(K*K)) u_mat (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_first (mma_first[0]),
    .in_digits(mma_digit),
    .out_digit(out_digit),
    .out_first(out_first)
  );

endmodule
