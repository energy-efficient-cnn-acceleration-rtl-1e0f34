// mma_adder_tree: balanced carry-propagate adder tree of the MMA.
//
// Adds N_IN signed operands of IN_W bits into one OUT_W-bit sum. The
// operands are placed at the leaves of a binary heap padded with zeros to
// the next power of two, so the tree has ceil(log2 N_IN) adder levels; for
// the MMA, N_IN = T_N + 1 = 33 (32 partial products plus the residual),
// giving the six levels L1..L6. Each level adds pairs of the level below;
// the zero-padded branches are removed by synthesis.
//
// Interface: combinational. operands[i] are sign-extended to OUT_W before
// the first level. The caller sizes OUT_W so the sum cannot overflow.
//
// That the tree is a carry-propagate tree with T_N + 1 inputs and
// ceil(log2(T_N + 1)) levels follows the paper; the heap layout is this
// design's own.
module mma_adder_tree #(
  parameter int unsigned N_IN  = 33,
  parameter int unsigned IN_W  = 14,
  parameter int unsigned OUT_W = 15
) (
  input  logic signed [IN_W-1:0]  operands [N_IN],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0;
  localparam int unsigned LEAVES = 1 << LEVELS;
  localparam int unsigned NODES  = 2 * LEAVES - 1;

  logic signed [OUT_W-1:0] node [NODES];

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < N_IN) begin : g_op
      assign node[LEAVES - 1 + i] = OUT_W'(operands[i]);
    end else begin : g_pad
      assign node[LEAVES - 1 + i] = '0;
    end
  end

  for (genvar n = 0; n < LEAVES - 1; n++) begin : g_add
    assign node[n] = node[2*n + 1] + node[2*n + 2];
  end

  assign sum = node[0];

endmodule
