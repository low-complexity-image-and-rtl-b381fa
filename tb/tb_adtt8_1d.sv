// tb_adtt8_1d -- self-checking testbench of adtt8_1d (registered 1-D stage
// with forward / near-inverse kernel select).
//
// Inputs change on the falling edge: a random valid (about 3 in 4 clocks), a
// random kernel select and tag, random 8-bit samples. On the next falling
// edge, after one rising edge, the stage must show exactly that vector's
// result: out_valid equal to the previous in_valid, the tag passed through,
// and the vector equal to T8* x or (T8*)^T x from the reference package. This
// checks the latency of one clock as well as the arithmetic. Both kernels
// must have been used at least once. Watchdog: 20000 clocks.
module tb_adtt8_1d;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int IN_W = 8;
  localparam int OW   = IN_W + GROWTH;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                   rst_n;
  logic                   in_valid;
  blk_tag_t               in_tag;
  logic signed [IN_W-1:0] in_vec [N];
  logic                   out_valid;
  blk_tag_t               out_tag;
  logic signed [OW-1:0]   out_vec [N];

  int checks = 0, failures = 0;
  int n_fwd = 0, n_inv = 0;

  adtt8_1d #(.IN_W(IN_W)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  initial begin
    vec_t     v, exp_v;
    bit       prev_valid;
    blk_tag_t prev_tag;

    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_tag   = '0;
    for (int i = 0; i < N; i++) in_vec[i] = '0;
    repeat (3) @(negedge clk);
    check(out_valid == 1'b0, "out_valid low in reset");
    rst_n = 1'b1;

    prev_valid = 1'b0;
    prev_tag   = '0;
    for (int t = 0; t < 5000; t++) begin
      // drive this clock's input
      in_valid = ($urandom_range(3) != 0);
      in_tag   = blk_tag_t'($urandom);
      for (int i = 0; i < N; i++) begin
        v[i]      = longint'($signed(IN_W'($urandom)));
        in_vec[i] = IN_W'(v[i]);
      end
      exp_v = in_tag.inv ? inv1d(v) : fwd1d(v);
      prev_valid = in_valid;
      prev_tag   = in_tag;
      @(negedge clk);
      // one rising edge later: the result of that input
      check(out_valid == prev_valid, "out_valid one clock after in_valid");
      if (prev_valid) begin
        if (prev_tag.inv) n_inv++; else n_fwd++;
        check(out_tag == prev_tag, "tag passed through");
        for (int m = 0; m < N; m++)
          check(longint'(out_vec[m]) == exp_v[m],
                $sformatf("out_vec[%0d]=%0d expected %0d (inv=%0b)",
                          m, out_vec[m], exp_v[m], prev_tag.inv));
      end
    end
    $display("forward vectors %0d, inverse vectors %0d", n_fwd, n_inv);
    check(n_fwd > 0, "forward kernel used");
    check(n_inv > 0, "inverse kernel used");
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
