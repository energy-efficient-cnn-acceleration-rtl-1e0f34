// mma: merged multiply-add (MMA) unit, an MSDF inner-product engine.
//
// Computes S = sum_{i=1..T_N} a_i * w_i for T_N unsigned A_BITS-bit
// activations and T_N signed W_BITS-bit weights, and emits S most
// significant digit first as P_OUT = A_BITS + W_BITS + log2(T_N) radix-2
// signed digits (21 for the default 8 x 8 x 32), so that
//   S = sum_{j=1..P_OUT} z_j * 2^(P_OUT - j).
// The activations arrive bit-serially, one bit-plane per cycle, most
// significant bit first; the weights are held in parallel.
//
// How it works: per bit-plane b, an AND array selects w_i where a_i^(b) = 1
// (stage 1, registered). Stage 2 feeds the T_N partial products and the
// residual of the previous cycle, shifted left by one with its LSB forced to
// zero and sign-extended, into one (T_N+1)-input carry-propagate adder tree
// giving V = 2R + P. The OGF takes the top three bits of V, chooses the
// output digit z and the new residual R = V - z (the low bits of V plus one
// sign bit). Values are scaled by 2^-PW, PW = W_BITS + log2 T_N, so
// |P| <= 1/2 and |R| <= 1/2 always hold. After the A_BITS bit-planes the
// unit keeps running on zero planes; after P_OUT digits the residual is
// exactly zero and the digit stream is complete and exact.
//
// Interface and timing: in_valid marks a cycle carrying a bit-plane (when
// low the plane counts as zero); in_first marks the first (MSB) plane of a
// new inner product and clears the residual. weights must be stable while
// the planes are presented. out_digit is the IEN-encoded signed digit and
// out_first marks digit z_1 of an inner product, DELTA = 2 cycles after the
// in_first plane (the paper's initial delay of the MMA). A new inner product
// may start every P_OUT cycles; digits after z_P_OUT are zero.
//
// Follows the paper: AND array, (T_N+1)-input adder tree with the residual
// entering it, left shift / LSB-zero / sign extension of the residual, OGF,
// initial delay 2, P_OUT = 21. This design's own choices: unsigned
// activations and signed weights, the 2^-PW scaling (sum 15 bits, OGF input
// 3 bits, residual 13 bits instead of the paper's 14 / 7 / 7), the OGF rule
// and the placement of the single pipeline register after the AND array.
module mma
  import msdf_pkg::*;
#(
  parameter int unsigned T_N    = 32,
  parameter int unsigned A_BITS = 8,
  parameter int unsigned W_BITS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic [T_N-1:0]           act_bits,
  input  logic signed [W_BITS-1:0] weights [T_N],
  output sd_digit_t                out_digit,
  output logic                     out_first
);

  localparam int unsigned PW    = W_BITS + $clog2(T_N); // partial-sum width
  localparam int unsigned VW    = PW + 2;               // V = 2R + P width
  localparam int unsigned P_OUT = p_out(A_BITS, W_BITS, T_N);

  // ---------------- stage 1: AND array ----------------
  logic signed [W_BITS-1:0] pp_q [T_N];
  logic                     first_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T_N; i++) pp_q[i] <= '0;
      first_q <= 1'b0;
    end else begin
      for (int i = 0; i < T_N; i++)
        pp_q[i] <= (in_valid && act_bits[i]) ? weights[i] : '0;
      first_q <= in_valid && in_first;
    end
  end

  // ---------------- stage 2: adder tree + OGF ----------------
  logic signed [PW-1:0]   resid_q;
  logic signed [PW:0]     resid_sh;
  logic signed [PW:0]     operands [T_N+1];
  logic signed [VW-1:0]   v;
  sd_digit_t              digit;
  logic                   r_sign;

  // Residual: left shift by one, LSB forced to zero, sign-extended by the
  // tree; a new inner product starts from zero.
  assign resid_sh = first_q ? '0 : {resid_q, 1'b0};

  always_comb begin
    for (int i = 0; i < T_N; i++) operands[i] = (PW+1)'(pp_q[i]);
    operands[T_N] = resid_sh;
  end

  mma_adder_tree #(.N_IN(T_N + 1), .IN_W(PW + 1), .OUT_W(VW)) u_tree (
    .operands(operands),
    .sum     (v)
  );

  mma_ogf u_ogf (
    .top   (v[VW-1 -: 3]),
    .digit (digit),
    .r_sign(r_sign)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resid_q   <= '0;
      out_digit <= SD_ZERO;
      out_first <= 1'b0;
    end else begin
      resid_q   <= {r_sign, v[PW-2:0]};
      out_digit <= digit;
      out_first <= first_q;
    end
  end

  // The two top bits of V never reach +3 or -4 (|V| < 3/2).
  a_v_range : assert property (@(posedge clk) disable iff (!rst_n)
                               v[VW-1 -: 3] != 3'b100 && v[VW-1 -: 3] != 3'b011);

  initial begin
    assert (P_OUT == PW + A_BITS) else $error("mma: P_OUT mismatch");
  end

endmodule
