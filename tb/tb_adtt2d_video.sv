// tb_adtt2d_video -- adtt2d on the block stream of one CIF video frame.
//
// Video coders transform prediction residuals, the difference of two 8-bit
// pictures, so samples span -255..255 and need 9 bits: the 2-D transform is
// built here with IN_W = 9 (17-bit output). One 4:2:0 CIF frame (352 x 288
// luma, two 176 x 144 chroma planes) is 1584 + 2 * 396 = 2376 blocks of 8x8.
// They are sent back to back, forward transform only, as an encoder does.
// Residuals are random in -255..255; every 25th block is an extreme block
// (-256 where T8*[3][m] T8*[3][n] is positive, 255 elsewhere) that drives
// M[3][3] to -36792, beyond the 16-bit range. Every output column is compared
// with T8* f (T8*)^T from the reference package. The frame must take 8 clocks
// per block: the last column leaves 8 * 2376 + 10 falling edges after the
// first row was driven. Watchdog: 100000 clocks.
module tb_adtt2d_video;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int IN_W = 9;
  localparam int OW   = IN_W + 2*GROWTH;
  localparam int NBLK = 1584 + 2 * 396;

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

  adtt2d #(.IN_W(IN_W)) dut (.*);

  blk_t exp_q[$];
  int checks = 0, failures = 0;
  int cycle = 0, n_cols = 0, first_cycle = 0, last_out_cycle = 0;
  longint max_abs = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL at cycle %0d: %s", cycle, what);
    end
  endtask

  initial begin
    blk_t f;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_inv   = 1'b0;
    for (int i = 0; i < N; i++) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int k = 0; k < NBLK; k++) begin
      for (int m = 0; m < N; m++)
        for (int n = 0; n < N; n++)
          if (k % 25 == 24) f[m][n] = (T8[3][m] * T8[3][n] > 0) ? -256 : 255;
          else              f[m][n] = longint'($urandom_range(510)) - 255;
      exp_q.push_back(tr2d(f, 1'b0));
      for (int r = 0; r < N; r++) begin
        if (k == 0 && r == 0) first_cycle = cycle;
        in_valid = 1'b1;
        in_inv   = 1'b0;
        for (int n = 0; n < N; n++) in_row[n] = IN_W'(f[r][n]);
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (30) @(negedge clk);

    check(exp_q.size() == 0, "every block came out");
    check(n_cols == 8 * NBLK, "number of output columns");
    $display("frame of %0d blocks: %0d clocks from first row in to last column out, max |coef| %0d",
             NBLK, last_out_cycle - first_cycle, max_abs);
    check(last_out_cycle - first_cycle == 8 * NBLK + 10, "8 clocks per block");
    check(max_abs == 36792, "largest output magnitude reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      n_cols++;
      last_out_cycle = cycle;
      if (exp_q.size() == 0) begin
        check(1'b0, "output column with no block pending");
      end else begin
        int q;
        q = int'(out_idx);
        check(out_inv == 1'b0, "forward mode");
        for (int p = 0; p < N; p++) begin
          check(longint'(out_col[p]) == exp_q[0][p][q],
                $sformatf("M[%0d][%0d] = %0d expected %0d", p, q, out_col[p], exp_q[0][p][q]));
          if (longint'(out_col[p]) > max_abs)  max_abs = longint'(out_col[p]);
          if (-longint'(out_col[p]) > max_abs) max_abs = -longint'(out_col[p]);
        end
        if (q == N-1) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
