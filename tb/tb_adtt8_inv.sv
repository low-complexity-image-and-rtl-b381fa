// tb_adtt8_inv -- self-checking testbench of adtt8_inv (combinational 8-point
// near-inverse, x = (T8*)^T y).
//
// Applies the eight unit vectors (every row of T8* on its own), extreme
// vectors along the sign pattern of every column of T8*, and 4000 random
// vectors, and compares each output with the direct product (T8*)^T y of
// adtt_ref_pkg. A last set feeds it coefficient vectors produced by the
// forward transform of 8-bit samples, the case it meets in a decoder. The
// module runs at IN_W = 12, the width of such coefficients. The watchdog ends
// the run after 20000 clocks.
module tb_adtt8_inv;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int IN_W = 12;
  localparam int OW   = IN_W + GROWTH;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0] y [N];
  logic signed [OW-1:0]   x [N];

  int checks = 0, failures = 0;

  adtt8_inv #(.IN_W(IN_W)) dut (.y(y), .x(x));

  task automatic apply_and_check(vec_t v, vec_t expect_x);
    for (int i = 0; i < N; i++) y[i] = IN_W'(v[i]);
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (longint'(x[n]) != expect_x[n]) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH x[%0d] = %0d, expected %0d", n, x[n], expect_x[n]);
      end
    end
  endtask

  initial begin
    vec_t v, s;
    localparam longint MAXV = (1 <<< (IN_W-1)) - 1;
    localparam longint MINV = -(1 <<< (IN_W-1));
    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < N; i++) v[i] = (i == k) ? 1 : 0;
      apply_and_check(v, inv1d(v));
    end
    for (int c = 0; c < N; c++) begin
      for (int i = 0; i < N; i++) v[i] = (T8[i][c] >= 0) ? MAXV : MINV;
      apply_and_check(v, inv1d(v));
      for (int i = 0; i < N; i++) v[i] = (T8[i][c] >= 0) ? MINV : MAXV;
      apply_and_check(v, inv1d(v));
    end
    for (int t = 0; t < 4000; t++) begin
      for (int i = 0; i < N; i++) v[i] = longint'($signed(IN_W'($urandom)));
      apply_and_check(v, inv1d(v));
    end
    // coefficients produced by the forward transform of 8-bit samples
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) s[i] = longint'($signed(8'($urandom)));
      v = fwd1d(s);
      apply_and_check(v, inv1d(v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
