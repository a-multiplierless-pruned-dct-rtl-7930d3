// pruned_dct1d -- pruned 8-point approximate DCT, 10 additions, no multipliers.
//
// Computes the four low-frequency outputs of the modified rounded DCT,
//   X0 = x0+x1+x2+x3+x4+x5+x6+x7
//   X1 = x0-x7
//   X2 = x0-x3-x4+x7
//   X3 = x5-x2
// i.e. X = T4 * x, through the paper's sparse factorisation
// T4 = P * A3 * A2 * A1:
//   A1 (6 adders): butterflies x0+-x7, x1+x6, x2+-x5, x3+x4
//   A2 (3 adders): (x0+x7)+-(x3+x4), (x1+x6)+(x2+x5); x2-x5 is negated
//   A3 (1 adder) : the two partial sums of the DC term
//   P            : wiring that puts the results in the order X0,X1,X2,X3.
// The orthogonalising scale factors (D4) are not applied; in a codec they
// fold into the quantiser. No rounding is done: outputs are IN_W+3 bits
// wide, which holds X0 for any input, so the result is exact.
//
// Interface: x[n] is sample x_n (signed IN_W bits), X[k] is X_k (signed
// IN_W+3 bits). in_valid qualifies x. Timing: one vector per cycle, outputs
// registered, latency 1 cycle (out_valid follows in_valid by one cycle).
// The adder network and output set follow the paper; the output register,
// the widths and the synchronous active-low reset of out_valid are this
// design's choices.
module pruned_dct1d
  import dct_pkg::*;
#(
  parameter int unsigned IN_W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [IN_W-1:0]       x [N_PTS],
  output logic                         out_valid,
  output logic signed [IN_W+GROWTH-1:0] X [N_KEEP]
);

  localparam int unsigned OW = IN_W + GROWTH;

  typedef logic signed [OW-1:0] word_t;

  // Stage A1: six butterfly adders on sign-extended inputs.
  word_t a0, a1, a2, a3, a4, a5;
  // Stage A2: three adders plus one negation (wiring into a subtractor).
  word_t b0, b1, b2, b3, b4;
  // Stage A3: one adder.
  word_t c0;
  word_t X_next [N_KEEP];

  always_comb begin
    a0 = word_t'(x[0]) + word_t'(x[7]);
    a1 = word_t'(x[1]) + word_t'(x[6]);
    a2 = word_t'(x[2]) + word_t'(x[5]);
    a3 = word_t'(x[3]) + word_t'(x[4]);
    a4 = word_t'(x[5]) - word_t'(x[2]);   // -(x2 - x5): A2 row 3 folded in
    a5 = word_t'(x[0]) - word_t'(x[7]);

    b0 = a0 + a3;
    b1 = a1 + a2;
    b2 = a0 - a3;
    b3 = a4;
    b4 = a5;

    c0 = b0 + b1;

    // Permutation P: (c0, b2, b3, b4) -> (X0, X2, X3, X1)
    X_next[0] = c0;
    X_next[1] = b4;
    X_next[2] = b2;
    X_next[3] = b3;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) X <= X_next;
  end

endmodule
