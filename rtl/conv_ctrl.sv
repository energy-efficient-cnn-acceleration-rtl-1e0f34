// conv_ctrl: iteration sequencer and partial-sum framer of the accelerator.
//
// One iteration computes one k x k x T_N partial sum in every KPB. For each
// iteration the controller requests the A_BITS activation bit-planes, most
// significant first, one per cycle (plane_valid, plane_idx), marks the first
// plane (plane_first) and then waits, so that a new iteration starts every
// ITER_CYCLES cycles. ITER_CYCLES defaults to the per-iteration cycle count
// of the paper's latency relation, delta_x+ + p_out + ceil(log2 T_N) =
// 2 + 21 + 5 = 28, so num_iters iterations take 28 * num_iters cycles of
// issue, as that relation states. Iterations overlap: the planes of the
// next iteration are requested while the KPB adder trees still drain the
// previous one.
//
// On the output side, res_first (the first-digit marker of the KPB sums,
// passed straight through as psum_first) opens a frame of OUT_DIGITS
// digits: psum_valid is high for those cycles, psum_first on the first and
// psum_last on the last. done pulses with the last digit of the last
// iteration; busy is high from start until then. start is ignored while
// busy; num_iters = 0 does nothing.
//
// The paper mentions control overhead and gives the iteration count
// relation; the handshake and state machine are this design's own.
module conv_ctrl #(
  parameter int unsigned A_BITS      = 8,
  parameter int unsigned ITER_CYCLES = 28,
  parameter int unsigned OUT_DIGITS  = 25,
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
  input  logic                      res_first,
  output logic                      psum_valid,
  output logic                      psum_first,
  output logic                      psum_last
);

  typedef enum logic {S_IDLE, S_ISSUE} state_t;

  localparam int unsigned CYC_W = $clog2(ITER_CYCLES + 1);
  localparam int unsigned POS_W = $clog2(OUT_DIGITS + 1);

  state_t             state_q;
  logic [CYC_W-1:0]   cyc_q;
  logic [ITER_W-1:0]  iter_q, n_q, left_q;
  logic               out_active_q;
  logic [POS_W-1:0]   out_pos_q, cur_pos;

  // ---------------- issue side ----------------
  assign plane_valid = (state_q == S_ISSUE) && (cyc_q < CYC_W'(A_BITS));
  assign plane_first = plane_valid && (cyc_q == '0);
  assign plane_idx   = ($clog2(A_BITS))'(A_BITS - 1 - 32'(cyc_q));
  assign iter_idx    = iter_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cyc_q   <= '0;
      iter_q  <= '0;
      n_q     <= '0;
    end else begin
      case (state_q)
        S_IDLE: begin
          if (start && !busy && num_iters != '0) begin
            state_q <= S_ISSUE;
            cyc_q   <= '0;
            iter_q  <= '0;
            n_q     <= num_iters;
          end
        end
        S_ISSUE: begin
          if (cyc_q == CYC_W'(ITER_CYCLES - 1)) begin
            cyc_q  <= '0;
            iter_q <= iter_q + 1'b1;
            if (iter_q == n_q - 1'b1) state_q <= S_IDLE;
          end else begin
            cyc_q <= cyc_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- output framer ----------------
  always_comb begin
    cur_pos    = res_first ? POS_W'(1) : out_pos_q + 1'b1;
    psum_valid = res_first || out_active_q;
    psum_first = res_first;
    psum_last  = psum_valid && (cur_pos == POS_W'(OUT_DIGITS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_active_q <= 1'b0;
      out_pos_q    <= '0;
      left_q       <= '0;
    end else begin
      out_active_q <= psum_valid && !psum_last;
      out_pos_q    <= cur_pos;
      if (state_q == S_IDLE && start && !busy && num_iters != '0)
        left_q <= num_iters;
      else if (psum_last && left_q != '0)
        left_q <= left_q - 1'b1;
    end
  end

  assign busy = (state_q != S_IDLE) || (left_q != '0);
  assign done = psum_last && (left_q == ITER_W'(1));

  // A new frame must not open before the previous one has closed.
  a_frame : assert property (@(posedge clk) disable iff (!rst_n)
                             res_first |-> !out_active_q);

endmodule
