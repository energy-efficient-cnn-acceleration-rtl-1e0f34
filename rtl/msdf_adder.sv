// msdf_adder: radix-2 signed-digit online (MSDF) adder.
//
// Adds two digit streams X = sum x_j 2^(L-j) and Y = sum y_j 2^(L-j) of L
// digits each and emits their sum as L+1 digits,
//   X + Y = sum_{k=1..L+1} z_k 2^(L+1-k),
// most significant digit first.
//
// How it works: a residual recurrence like the one in the MMA, at a much
// smaller width. With values in units of 1/4 the unit forms
// V = 2R + x_j + y_j (4-bit signed, |V| <= 6), selects z = +1 for V > 2,
// z = -1 for V < -2 and z = 0 otherwise, and keeps R = V - 4z
// (|R| <= 2). Because the selection thresholds are strict, the first digit
// of every sum is zero; it is dropped, so the sum grows by one digit only.
// The last digit needs the two digit positions after the end of the inputs
// to carry zero digits; a stream boundary (in_first) clears the residual.
//
// Interface and timing: x, y and z are IEN-encoded signed digits. in_first
// marks x_1/y_1. out_first marks z_1, DELTA = 2 cycles after in_first (the
// initial delay of the adder). Consecutive streams must start at least L+2
// cycles apart.
//
// The paper names MSDF adders (initial delay delta_+, around 2 to 5 cycles)
// and uses them in its adder tree but gives no algorithm; the recurrence,
// the selection rule and delta = 2 are this design's own choices.
module msdf_adder
  import msdf_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_first,
  input  sd_digit_t x,
  input  sd_digit_t y,
  output sd_digit_t z,
  output logic      out_first
);

  logic signed [2:0] resid_q;   // R in units of 1/4, range -2..2
  logic signed [3:0] v;
  logic signed [1:0] zv;
  logic              first_d;

  always_comb begin
    v = (in_first ? 4'sd0 : 4'(resid_q) <<< 1) + 4'(sd_dec(x)) + 4'(sd_dec(y));
    if (v > 4'sd2)       zv = 2'sd1;
    else if (v < -4'sd2) zv = -2'sd1;
    else                 zv = 2'sd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resid_q   <= '0;
      z         <= SD_ZERO;
      first_d   <= 1'b0;
      out_first <= 1'b0;
    end else begin
      resid_q   <= 3'(v - (4'(zv) <<< 2));
      z         <= sd_enc(zv);
      first_d   <= in_first;
      out_first <= first_d;
    end
  end

endmodule
