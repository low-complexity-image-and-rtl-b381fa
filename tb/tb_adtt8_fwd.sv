// tb_adtt8_fwd -- self-checking testbench of adtt8_fwd (combinational 8-point
// forward approximate DTT).
//
// Applies the eight unit vectors (so every column of T8* is checked on its
// own), extreme vectors along the sign pattern of every row of T8* (they
// reach each output's largest magnitude, 12 * 128 for row 3), and 4000
// random vectors, and compares each output with the direct matrix product of
// adtt_ref_pkg. A clock only paces the stimulus; the watchdog ends the run
// after 20000 clocks.
module tb_adtt8_fwd;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int IN_W = 8;
  localparam int OW   = IN_W + GROWTH;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0] x [N];
  logic signed [OW-1:0]   y [N];

  int checks = 0, failures = 0;

  adtt8_fwd #(.IN_W(IN_W)) dut (.x(x), .y(y));

  task automatic apply_and_check(vec_t v);
    vec_t ref_y;
    for (int i = 0; i < N; i++) x[i] = IN_W'(v[i]);
    @(posedge clk);
    ref_y = fwd1d(v);
    for (int m = 0; m < N; m++) begin
      checks++;
      if (longint'(y[m]) != ref_y[m]) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH y[%0d] = %0d, expected %0d", m, y[m], ref_y[m]);
      end
    end
  endtask

  initial begin
    vec_t v;
    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < N; i++) v[i] = (i == k) ? 1 : 0;
      apply_and_check(v);
    end
    for (int r = 0; r < N; r++) begin
      for (int i = 0; i < N; i++) v[i] = (T8[r][i] >= 0) ? 127 : -128;
      apply_and_check(v);
      for (int i = 0; i < N; i++) v[i] = (T8[r][i] >= 0) ? -128 : 127;
      apply_and_check(v);
    end
    for (int t = 0; t < 4000; t++) begin
      for (int i = 0; i < N; i++) v[i] = longint'($signed(IN_W'($urandom)));
      apply_and_check(v);
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
