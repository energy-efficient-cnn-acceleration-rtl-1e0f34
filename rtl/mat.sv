// mat: MSDF adder tree (MAT) of a kernel processing block.
//
// Sums N_IN synchronous signed-digit streams of L digits into one stream of
// L + LEVELS digits, LEVELS = ceil(log2 N_IN) (4 for the 9 = 3x3 MMA outputs
// of a KPB), most significant digit first:
//   sum_i X_i = sum_{k=1..L+LEVELS} z_k 2^(L+LEVELS-k).
//
// How it works: level l holds ceil(N_IN / 2^l) nodes; each node of the next
// level is an msdf_adder over a pair of nodes. A node left without a partner
// goes through an msdf_adder with a zero second operand, so all streams of a
// level keep the same timing and length. Each level adds the adder's delay
// (2 cycles) and one digit.
//
// Interface and timing: in_first marks digit 1 of all inputs; out_first
// marks digit 1 of the sum, 2*LEVELS cycles later. Streams may start every
// L + LEVELS + 1 cycles at the earliest (the last level needs two zero
// digit positions after its L + LEVELS - 1 input digits).
//
// The paper gives the tree's function and its ceil(log2(k^2)) stages; the
// pairing of an odd node with zero is this design's choice.
module mat
  import msdf_pkg::*;
#(
  parameter int unsigned N_IN = 9
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_first,
  input  sd_digit_t in_digits [N_IN],
  output sd_digit_t out_digit,
  output logic      out_first
);

  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0;

  // Number of nodes on level l.
  function automatic int unsigned level_cnt(input int unsigned l);
    int unsigned c = N_IN;
    for (int unsigned i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  // Index of the first node of level l in the flat node array.
  function automatic int unsigned level_off(input int unsigned l);
    int unsigned o = 0;
    for (int unsigned i = 0; i < l; i++) o += level_cnt(i);
    return o;
  endfunction

  localparam int unsigned NODES = level_off(LEVELS + 1);

  sd_digit_t node_d [NODES];
  logic      node_f [NODES];

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    assign node_d[i] = in_digits[i];
    assign node_f[i] = in_first;
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar k = 0; k < level_cnt(l + 1); k++) begin : g_node
      localparam int unsigned A = level_off(l) + 2 * k;
      localparam int unsigned O = level_off(l + 1) + k;
      sd_digit_t rhs;
      if (2 * k + 1 < level_cnt(l)) begin : g_pair
        assign rhs = node_d[A + 1];
      end else begin : g_single
        assign rhs = SD_ZERO;
      end
      msdf_adder u_add (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_first (node_f[A]),
        .x        (node_d[A]),
        .y        (rhs),
        .z        (node_d[O]),
        .out_first(node_f[O])
      );
    end
  end

  assign out_digit = node_d[NODES - 1];
  assign out_first = node_f[NODES - 1];

endmodule
