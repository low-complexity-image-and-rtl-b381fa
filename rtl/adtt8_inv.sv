// adtt8_inv -- 8-point near-inverse of the approximate DTT, x = (T8*)^T y,
// combinational.
//
// T8* is not orthogonal, but T8* (T8*)^T is close to diagonal, so the inverse
// is approximated by the transpose (with the diagonal scale again left to the
// dequantiser). This module computes (T8*)^T y with the transposed flow graph
// of the forward factorization: (T8*)^T = B8^T * A1^T * A2^T * P^T, where
// B8 is symmetric. Transposing a flow graph keeps its shifts and, for these
// factors, its addition count: 5 (A2^T) + 11 (A1^T) + 8 (B8) = 24 additions
// and 6 shifts, so forward plus inverse cost 48 additions, as the paper
// states. The transposed graph itself is this design's derivation; the paper
// gives only the matrix and the operation count.
//
// Interface: y[0..7] signed IN_W bits in (transform coefficients),
// x[0..7] signed IN_W+4 bits out (|x| <= 9 max|y|; every internal node is
// below 16 max|y|). Purely combinational.
module adtt8_inv
  import adtt_pkg::*;
#(
  parameter int IN_W = 8
) (
  input  logic signed [IN_W-1:0]        y [N],
  output logic signed [IN_W+GROWTH-1:0] x [N]
);

  localparam int W = IN_W + GROWTH;

  logic signed [W-1:0] c [N];    // after P^T
  logic signed [W-1:0] w [10];   // after A2^T
  logic signed [W-1:0] u [N];    // after A1^T

  always_comb begin
    // P^T: undo the output permutation (wiring only)
    c[0] = W'(y[0]);
    c[6] = W'(y[1]);
    c[3] = W'(y[2]);
    c[5] = W'(y[3]);
    c[1] = W'(y[4]);
    c[7] = W'(y[5]);
    c[2] = W'(y[6]);
    c[4] = W'(y[7]);

    // A2^T: 5 additions, 1 shift
    w[0] = c[0];
    w[1] = c[0] + c[1];
    w[2] = c[0] - (c[1] <<< 1);
    w[3] = c[2];
    w[4] = c[3];
    w[5] = c[4];
    w[6] = c[5] - c[7];
    w[7] = c[5] - c[6];
    w[8] = c[7];
    w[9] = c[5] + c[6];

    // A1^T: 11 additions, 5 shifts
    u[0] = w[1] + (w[4] <<< 1);
    u[1] = w[2] - w[3];
    u[2] = w[0] + (w[3] <<< 1) - w[4];
    u[3] = w[1] - w[3] - w[4];
    u[4] = (w[5] <<< 1) + w[6];
    u[5] = w[6] + w[7] - w[5];
    u[6] = w[7] + (w[8] <<< 1);
    u[7] = -w[8] - (w[9] <<< 1);

    // B8^T = B8: butterflies (8 additions)
    x[0] = u[0] + u[7];
    x[1] = u[1] + u[6];
    x[2] = u[2] + u[5];
    x[3] = u[3] + u[4];
    x[4] = u[3] - u[4];
    x[5] = u[2] - u[5];
    x[6] = u[1] - u[6];
    x[7] = u[0] - u[7];
  end

endmodule
