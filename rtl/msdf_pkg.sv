// msdf_pkg: types, constants and helper functions shared by the MSDF
// (most-significant-digit-first) convolution datapath.
//
// Digits are radix-2 signed digits {-1, 0, +1}. Each digit travels as two
// wires {x_plus, x_minus} in the inverted-negabit encoding: the digit value is
// x_plus + x_minus - 1, so 2'b11 = +1, 2'b00 = -1 and 2'b10 / 2'b01 = 0.
// The encoder always emits 2'b10 for zero; the decoder accepts both forms.
//
// The digit encoding follows the paper; choosing 2'b10 for zero is this
// design's own choice. The function p_out gives the paper's output
// precision of an MMA, 2n + ceil(log2 T_N) digits.
package msdf_pkg;

  // One signed digit: {x_plus, x_minus}.
  typedef logic [1:0] sd_digit_t;

  localparam sd_digit_t SD_POS  = 2'b11;
  localparam sd_digit_t SD_ZERO = 2'b10;
  localparam sd_digit_t SD_NEG  = 2'b00;

  // Encode an integer digit value in {-1,0,1}.
  function automatic sd_digit_t sd_enc(input logic signed [1:0] v);
    if (v > 0)      return SD_POS;
    else if (v < 0) return SD_NEG;
    else            return SD_ZERO;
  endfunction

  // Decode a digit to its value in {-1,0,1}.
  function automatic logic signed [1:0] sd_dec(input sd_digit_t d);
    return $signed({1'b0, d[1]}) + $signed({1'b0, d[0]}) - 2'sd1;
  endfunction

  // Output precision of an MMA in digits: 2n + ceil(log2 T_N).
  function automatic int unsigned p_out(input int unsigned a_bits,
                                        input int unsigned w_bits,
                                        input int unsigned t_n);
    return a_bits + w_bits + $clog2(t_n);
  endfunction

endpackage
