// adtt8_fwd -- 8-point forward approximate DTT, y = T8* x, combinational.
//
// T8* is the integer matrix
//    1  1  1  1  1  1  1  1
//   -2 -1 -1  0  0  1  1  2
//    2  0 -1 -1 -1 -1  0  2
//   -2  1  2  1 -1 -2 -1  2
//    1 -2  0  1  1  0 -2  1
//   -1  2 -1 -1  1  1 -2  1
//    0 -1  2 -1 -1  2 -1  0
//    0  0 -1  2 -2  1  0  0
// and the datapath is its sparse factorization T8* = P * A2 * A1 * B8, taken
// from the paper: B8 is a layer of eight butterflies, A1 (10x8) and A2 (8x10)
// are adder layers with shifts by one, and P is a wiring permutation. In total
// 24 additions/subtractions and 6 shifts; no multiplier.
//
// The orthonormalising diagonal scale diag(1/sqrt(8), 1/sqrt(12), ...) is not
// applied here: as in the paper, it is left to the quantiser that follows.
//
// Interface: x[0..7] signed IN_W bits in, y[0..7] signed IN_W+4 bits out,
// y[m] = X_m of the paper. Purely combinational, no clock. All internal nodes
// are IN_W+4 bits wide, which bounds every node (|node| <= 12 max|x|), so the
// result is exact. The node width is this design's choice.
module adtt8_fwd
  import adtt_pkg::*;
#(
  parameter int IN_W = 8
) (
  input  logic signed [IN_W-1:0]        x [N],
  output logic signed [IN_W+GROWTH-1:0] y [N]
);

  localparam int W = IN_W + GROWTH;

  logic signed [W-1:0] xs [N];    // sign-extended inputs
  logic signed [W-1:0] b  [N];    // after B8 (butterflies)
  logic signed [W-1:0] a  [10];   // after A1
  logic signed [W-1:0] c  [N];    // after A2

  always_comb begin
    for (int i = 0; i < N; i++) xs[i] = W'(x[i]);

    // B8: butterflies (8 additions)
    b[0] = xs[0] + xs[7];
    b[1] = xs[1] + xs[6];
    b[2] = xs[2] + xs[5];
    b[3] = xs[3] + xs[4];
    b[4] = xs[3] - xs[4];
    b[5] = xs[2] - xs[5];
    b[6] = xs[1] - xs[6];
    b[7] = xs[0] - xs[7];

    // A1: 9 additions, 5 shifts
    a[0] = b[2];
    a[1] = b[0] + b[3];
    a[2] = b[1];
    a[3] = (b[2] <<< 1) - b[1] - b[3];
    a[4] = (b[0] <<< 1) - b[2] - b[3];
    a[5] = (b[4] <<< 1) - b[5];
    a[6] = b[4] + b[5];
    a[7] = b[5] + b[6];
    a[8] = (b[6] <<< 1) - b[7];
    a[9] = -(b[7] <<< 1);

    // A2: 7 additions, 1 shift
    c[0] = a[0] + a[1] + a[2];
    c[1] = a[1] - (a[2] <<< 1);
    c[2] = a[3];
    c[3] = a[4];
    c[4] = a[5];
    c[5] = a[6] + a[7] + a[9];
    c[6] = a[9] - a[7];
    c[7] = a[8] - a[6];

    // P: output permutation (wiring only)
    y[0] = c[0];
    y[1] = c[6];
    y[2] = c[3];
    y[3] = c[5];
    y[4] = c[1];
    y[5] = c[7];
    y[6] = c[2];
    y[7] = c[4];
  end

endmodule
