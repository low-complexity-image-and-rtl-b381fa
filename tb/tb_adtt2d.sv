// tb_adtt2d -- end-to-end, self-checking testbench of adtt2d, the 2-D 8x8
// approximate DTT, at its default parameters (8-bit signed samples).
//
// Sends 10000 blocks of random samples through the design, one row per clock
// where the stimulus allows it. The stream is cut into stretches of 16
// blocks, each with its own pattern:
//   - forward only or near-inverse only, or a random mode per block, so the
//     mode changes between back-to-back blocks in both directions;
//   - rows back to back (the full rate of one block per 8 clocks, both
//     transpose banks busy at once) or with random gaps between rows.
// Every 50th block is an extreme forward block (-128 where T8*[3][m] T8*[3][n]
// is positive, 127 elsewhere), which drives M[3][3] to -18360, close to the
// bound 12 * 12 * 128 = 18432 and beyond the 15-bit range: it shows that
// the 16-bit output holds the largest coefficients.
// Each output column is compared with K f K^T from the reference package,
// K = T8* (forward) or (T8*)^T (inverse). Timing is checked too: column q of
// a block must leave 4 + q falling edges after its row 7 was driven, which is
// 10 clocks from row 0 to column 0 for a block sent at full rate.
// Counted, and each must happen at least once: back-to-back blocks, blocks
// with gaps, forward and inverse blocks, forward->inverse and
// inverse->forward switches between consecutive blocks, extreme blocks.
// Watchdog: 400000 clocks.
module tb_adtt2d;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int IN_W = 8;
  localparam int OW   = IN_W + 2*GROWTH;
  localparam int NBLK = 10000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                   rst_n;
  logic                   in_valid;
  logic                   in_inv;
  logic signed [IN_W-1:0] in_row  [N];
  logic                   out_valid;
  logic                   out_inv;
  logic [IDX_W-1:0]       out_idx;
  logic signed [OW-1:0]   out_col [N];

  adtt2d dut (.*);

  typedef struct {
    blk_t m;            // expected result
    bit   inv;
    int   last_cycle;   // cycle in which row 7 was driven
  } blk_rec_t;

  blk_rec_t exp_q[$];
  int checks = 0, failures = 0;
  int cycle = 0, n_cols = 0;
  int n_b2b = 0, n_gappy = 0, n_fwd = 0, n_inv = 0;
  int n_f2i = 0, n_i2f = 0, n_extreme = 0;
  longint max_abs = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL at cycle %0d: %s", cycle, what);
    end
  endtask

  initial begin
    blk_t     f;
    blk_rec_t b;
    bit       gappy, had_gap, prev_inv;
    int       mode_sel, since_last;

    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_inv   = 1'b0;
    for (int i = 0; i < N; i++) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    since_last = 99;
    prev_inv   = 1'b0;
    for (int k = 0; k < NBLK; k++) begin
      mode_sel = (k / 16) % 3;             // 0 fwd, 1 inv, 2 random per block
      gappy    = ((k / 48) % 2 == 1);
      had_gap  = 1'b0;
      b.inv    = (mode_sel == 2) ? 1'($urandom) : (mode_sel == 1);
      if (k % 50 == 49) begin
        b.inv = 1'b0;
        for (int m = 0; m < N; m++)
          for (int n = 0; n < N; n++)
            f[m][n] = (T8[3][m] * T8[3][n] > 0) ? -128 : 127;
        n_extreme++;
      end else begin
        for (int m = 0; m < N; m++)
          for (int n = 0; n < N; n++)
            f[m][n] = longint'($signed(IN_W'($urandom)));
      end
      b.m = tr2d(f, b.inv);
      if (k > 0 && !prev_inv &&  b.inv) n_f2i++;
      if (k > 0 &&  prev_inv && !b.inv) n_i2f++;
      prev_inv = b.inv;
      if (b.inv) n_inv++; else n_fwd++;

      for (int r = 0; r < N; r++) begin
        while (gappy && $urandom_range(3) == 0) begin
          in_valid = 1'b0;
          in_inv   = 1'($urandom);         // ignored while idle
          had_gap  = 1'b1;
          @(negedge clk);
          since_last++;
        end
        in_valid = 1'b1;
        // the mode is sampled with row 0 only; scramble it on the others
        in_inv   = (r == 0) ? b.inv : 1'($urandom);
        for (int n = 0; n < N; n++) in_row[n] = IN_W'(f[r][n]);
        if (r == 0 && since_last == 1) n_b2b++;
        if (r == N-1) begin
          b.last_cycle = cycle;
          exp_q.push_back(b);
        end
        @(negedge clk);
        since_last = (r == N-1) ? 1 : since_last + 1;
      end
      if (had_gap) n_gappy++;
    end
    in_valid = 1'b0;
    repeat (30) @(negedge clk);

    check(exp_q.size() == 0, "every block came out");
    check(n_cols == 8 * NBLK, "number of output columns");
    $display("blocks %0d: fwd %0d inv %0d, fwd->inv %0d inv->fwd %0d, back-to-back %0d, with gaps %0d, extreme %0d, max |coef| %0d",
             NBLK, n_fwd, n_inv, n_f2i, n_i2f, n_b2b, n_gappy, n_extreme, max_abs);
    check(n_fwd > 0,     "forward blocks");
    check(n_inv > 0,     "inverse blocks");
    check(n_f2i > 0,     "forward->inverse switch");
    check(n_i2f > 0,     "inverse->forward switch");
    check(n_b2b > 0,     "back-to-back blocks");
    check(n_gappy > 0,   "blocks with gaps");
    check(n_extreme > 0, "extreme blocks");
    check(max_abs >= 18360, "largest output magnitude reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      n_cols++;
      if (exp_q.size() == 0) begin
        check(1'b0, "output column with no block pending");
      end else begin
        int q;
        q = int'(out_idx);
        check(out_inv == exp_q[0].inv, "mode of block");
        check(cycle == exp_q[0].last_cycle + 4 + q,
              $sformatf("column %0d at cycle %0d, row 7 driven at %0d", q, cycle, exp_q[0].last_cycle));
        for (int p = 0; p < N; p++) begin
          check(longint'(out_col[p]) == exp_q[0].m[p][q],
                $sformatf("M[%0d][%0d] = %0d expected %0d (inv=%0b)",
                          p, q, out_col[p], exp_q[0].m[p][q], exp_q[0].inv));
          if (longint'(out_col[p]) > max_abs)  max_abs = longint'(out_col[p]);
          if (-longint'(out_col[p]) > max_abs) max_abs = -longint'(out_col[p]);
        end
        if (q == N-1) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
