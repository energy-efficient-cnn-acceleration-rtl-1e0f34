// mma_ogf: output digit generation function (OGF) of the merged multiply-add
// unit.
//
// Function: the MMA forms each cycle a sum V = 2*R + P, where R is the
// previous residual and P the partial product of the current activation
// bit-plane, both in units of 2^-PW (PW = W_BITS + log2 T_N). The OGF looks
// only at the three most significant bits of V, t = floor(V / 2^(PW-1)),
// which range over -3..2, and selects the next output digit:
//   z = +1 when t >= 1   (V >= 1/2)
//   z = -1 when t <= -2  (V <  -1/2)
//   z =  0 otherwise.
// It also returns the sign bit of the new residual R' = V - z: the low PW-1
// bits of V pass into R' unchanged and the upper part of R' is t - 2z, which
// is always 0 or -1, i.e. one sign bit (equal to t[0]). This keeps R' in
// [-1/2, 1/2) so the recurrence never overflows.
//
// Interface: purely combinational, top (3-bit signed) in, digit (IEN encoded
// signed digit) and r_sign out.
//
// The paper names the OGF and shows it as a chain of half/full adders fed by
// the 7 most significant of 14 sum bits; it does not give its selection
// rule. The 3-bit selection above is this design's own choice, derived for
// the residual recurrence used in mma.
module mma_ogf
  import msdf_pkg::*;
(
  input  logic signed [2:0] top,
  output sd_digit_t         digit,
  output logic              r_sign
);

  always_comb begin
    if (top >= 3'sd1)       digit = SD_POS;
    else if (top <= -3'sd2) digit = SD_NEG;
    else                    digit = SD_ZERO;
    // t - 2z keeps only the parity of t: 0 for even t, -1 for odd t.
    r_sign = top[0];
  end

endmodule
