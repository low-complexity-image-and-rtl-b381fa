// tb_transpose_buffer -- self-checking testbench of transpose_buffer (8x8
// ping-pong transpose memory).
//
// Writes 400 blocks of 8 random rows. Within and between blocks the valid
// pattern is random: stretches of back-to-back rows (full rate, both banks
// busy at once) alternate with stretches that have gaps. Each block gets a
// random inv bit. The monitor expects every block back as 8 columns,
// column q holding element q of every row, with tag.idx = q and the block's
// inv bit, in block order. It also checks timing: column 0 two falling edges
// after row 7 was driven (row written on the first rising edge, column
// registered on the next), and the other columns on the following clocks.
// Counts: back-to-back block starts, blocks with gaps, and blocks read from
// each bank must all be non-zero. Watchdog: 20000 clocks.
module tb_transpose_buffer;
  import adtt_pkg::*;

  localparam int W = 12;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                rst_n;
  logic                in_valid;
  blk_tag_t            in_tag;
  logic signed [W-1:0] in_row  [N];
  logic                out_valid;
  blk_tag_t            out_tag;
  logic signed [W-1:0] out_col [N];

  transpose_buffer #(.W(W)) dut (.*);

  typedef struct {
    logic signed [W-1:0] m [N][N];
    bit                  inv;
    int                  last_cycle;   // cycle in which row 7 was driven
  } blk_rec_t;

  blk_rec_t exp_q[$];
  int checks = 0, failures = 0;
  int cycle = 0;
  int n_b2b = 0, n_gappy = 0, n_bank0 = 0, n_bank1 = 0, n_cols = 0;
  localparam int NBLK = 400;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL at cycle %0d: %s", cycle, what);
    end
  endtask

  // stimulus: drive on the falling edge
  initial begin
    blk_rec_t b;
    bit       gappy, had_gap;
    int       since_last;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_tag   = '0;
    for (int i = 0; i < N; i++) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    since_last = 99;
    for (int k = 0; k < NBLK; k++) begin
      gappy   = ((k / 10) % 2 == 1);       // alternate 10-block stretches
      had_gap = 1'b0;
      b.inv   = 1'($urandom);
      for (int r = 0; r < N; r++) begin
        while (gappy && $urandom_range(2) == 0) begin
          in_valid = 1'b0;
          had_gap  = 1'b1;
          @(negedge clk);
          since_last++;
        end
        in_valid   = 1'b1;
        in_tag.inv = b.inv;
        in_tag.idx = IDX_W'(r);
        for (int c = 0; c < N; c++) begin
          b.m[r][c] = W'($urandom);
          in_row[c] = b.m[r][c];
        end
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
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "every block read out");
    check(n_cols == 8 * NBLK, "number of columns out");
    $display("blocks: back-to-back starts %0d, with gaps %0d, bank0 %0d, bank1 %0d",
             n_b2b, n_gappy, n_bank0, n_bank1);
    check(n_b2b > 0,   "back-to-back blocks occurred");
    check(n_gappy > 0, "blocks with gaps occurred");
    check(n_bank0 > 0 && n_bank1 > 0, "both banks used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: sample on the falling edge
  always @(negedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      n_cols++;
      if (exp_q.size() == 0) begin
        check(1'b0, "column with no block pending");
      end else begin
        int q;
        q = int'(out_tag.idx);
        check(out_tag.inv == exp_q[0].inv, "inv bit of block");
        check(cycle == exp_q[0].last_cycle + 2 + q,
              $sformatf("column %0d at cycle %0d, row 7 at %0d", q, cycle, exp_q[0].last_cycle));
        for (int r = 0; r < N; r++)
          check(out_col[r] == exp_q[0].m[r][q],
                $sformatf("col %0d row %0d = %0d expected %0d", q, r, out_col[r], exp_q[0].m[r][q]));
        if (q == N-1) begin
          if (dut.rd_bank) n_bank0++; else n_bank1++;   // rd_bank has already toggled
          void'(exp_q.pop_front());
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
