// tb_adtt2d_roundtrip -- encoder/decoder round trip through two adtt2d units.
//
// An encoder unit (adtt2d at its default, 8-bit samples) computes
// M = T8 f T8^T. The testbench then does the dequantiser's share of the work
// without any quantisation: it folds in the diagonal scale twice (once for
// the forward and once for the inverse orthonormal approximation), with 8
// fraction bits,
//   Mq[p][q] = round(256 * M[p][q] / (d[p] d[q])),  d = 8,12,12,20,12,14,12,10
// (d[k] is the squared length of row k of T8, so 1/d[k] is the squared scale).
// |Mq| <= 32768, so a decoder unit built with IN_W = 16 holds it. The decoder
// unit runs in near-inverse mode and returns rec = T8^T Mq T8 (24-bit output).
//
// Checks per block:
//   - rec equals T8^T Mq T8 from the reference package exactly (hardware);
//   - rec / 256 equals R f R^T computed in real arithmetic, R = T8^T S^2 T8,
//     within 0.17: the rounding of Mq moves each output by at most
//     0.5 * 9 * 9 / 256 = 0.16 (column L1 norm of T8 is 9).
// The reconstruction error |rec/256 - f| is only reported, not checked: it is
// set by how far T8 is from orthogonal (R has diagonal 0.90..1.15), not by
// the hardware. Half the blocks are smooth (ramp plus small noise), half are
// random. Watchdog: 200000 clocks.
module tb_adtt2d_roundtrip;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int EW   = 8;               // encoder sample width
  localparam int DW   = 16;              // decoder input width
  localparam int NBLK = 2000;
  localparam int D [8] = '{8, 12, 12, 20, 12, 14, 12, 10};

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  // encoder unit
  logic                       e_in_valid, e_out_valid, e_out_inv;
  logic signed [EW-1:0]       e_in_row  [N];
  logic [IDX_W-1:0]           e_out_idx;
  logic signed [EW+2*GROWTH-1:0] e_out_col [N];

  adtt2d enc (
    .clk, .rst_n, .in_valid(e_in_valid), .in_inv(1'b0), .in_row(e_in_row),
    .out_valid(e_out_valid), .out_inv(e_out_inv), .out_idx(e_out_idx), .out_col(e_out_col)
  );

  // decoder unit
  logic                       d_in_valid, d_out_valid, d_out_inv;
  logic signed [DW-1:0]       d_in_row  [N];
  logic [IDX_W-1:0]           d_out_idx;
  logic signed [DW+2*GROWTH-1:0] d_out_col [N];

  adtt2d #(.IN_W(DW)) dec (
    .clk, .rst_n, .in_valid(d_in_valid), .in_inv(1'b1), .in_row(d_in_row),
    .out_valid(d_out_valid), .out_inv(d_out_inv), .out_idx(d_out_idx), .out_col(d_out_col)
  );

  int checks = 0, failures = 0;
  real R [8][8];
  real max_err_smooth = 0.0, max_err_random = 0.0, sum_err = 0.0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  function automatic longint round_div(longint num, longint den);
    return (num >= 0) ? (num + den/2) / den : -((-num + den/2) / den);
  endfunction

  // send one block of rows through a unit and collect its 8 columns
  task automatic run_enc(blk_t f, output blk_t m);
    for (int r = 0; r < N; r++) begin
      e_in_valid = 1'b1;
      for (int n = 0; n < N; n++) e_in_row[n] = EW'(f[r][n]);
      @(negedge clk);
    end
    e_in_valid = 1'b0;
    for (int q = 0; q < N; q++) begin
      while (!e_out_valid) @(negedge clk);
      check(int'(e_out_idx) == q && !e_out_inv, "encoder column order and mode");
      for (int p = 0; p < N; p++) m[p][q] = longint'(e_out_col[p]);
      @(negedge clk);
    end
  endtask

  task automatic run_dec(blk_t mq, output blk_t x);
    for (int r = 0; r < N; r++) begin
      d_in_valid = 1'b1;
      for (int n = 0; n < N; n++) d_in_row[n] = DW'(mq[r][n]);
      @(negedge clk);
    end
    d_in_valid = 1'b0;
    for (int q = 0; q < N; q++) begin
      while (!d_out_valid) @(negedge clk);
      check(int'(d_out_idx) == q && d_out_inv, "decoder column order and mode");
      for (int p = 0; p < N; p++) x[p][q] = longint'(d_out_col[p]);
      @(negedge clk);
    end
  endtask

  initial begin
    blk_t f, m, mq, rec, ref_rec, ref_m;
    real  tmp [8][8];
    real  e, expect_v, err;
    bit   smooth;

    // R = T8^T S^2 T8
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        R[i][j] = 0.0;
        for (int k = 0; k < 8; k++) R[i][j] += real'(T8[k][i] * T8[k][j]) / real'(D[k]);
      end

    rst_n      = 1'b0;
    e_in_valid = 1'b0;
    d_in_valid = 1'b0;
    for (int i = 0; i < N; i++) begin e_in_row[i] = '0; d_in_row[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int k = 0; k < NBLK; k++) begin
      smooth = (k % 2 == 0);
      if (smooth) begin
        int base, gx, gy;
        base = int'($urandom_range(200)) - 100;
        gx   = int'($urandom_range(8)) - 4;
        gy   = int'($urandom_range(8)) - 4;
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            f[r][c] = longint'(base + gx * c + gy * r + int'($urandom_range(6)) - 3);
            if (f[r][c] > 127)  f[r][c] = 127;
            if (f[r][c] < -128) f[r][c] = -128;
          end
      end else begin
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++)
            f[r][c] = longint'($signed(EW'($urandom)));
      end

      run_enc(f, m);
      ref_m = tr2d(f, 1'b0);
      for (int p = 0; p < N; p++)
        for (int q = 0; q < N; q++) begin
          check(m[p][q] == ref_m[p][q], "encoder coefficient");
          mq[p][q] = round_div(m[p][q] * 256, longint'(D[p] * D[q]));
        end

      run_dec(mq, rec);
      ref_rec = tr2d(mq, 1'b1);

      // real-valued model R f R^T
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          tmp[i][j] = 0.0;
          for (int l = 0; l < 8; l++) tmp[i][j] += R[i][l] * real'(f[l][j]);
        end
      for (int p = 0; p < N; p++)
        for (int q = 0; q < N; q++) begin
          check(rec[p][q] == ref_rec[p][q],
                $sformatf("decoder output [%0d][%0d] = %0d expected %0d", p, q, rec[p][q], ref_rec[p][q]));
          expect_v = 0.0;
          for (int l = 0; l < 8; l++) expect_v += tmp[p][l] * R[l][q];
          e = real'(rec[p][q]) / 256.0;
          check((e - expect_v < 0.17) && (expect_v - e < 0.17),
                $sformatf("round trip [%0d][%0d] = %f, model %f", p, q, e, expect_v));
          err = (e > real'(f[p][q])) ? e - real'(f[p][q]) : real'(f[p][q]) - e;
          sum_err += err;
          if (smooth && err > max_err_smooth)  max_err_smooth = err;
          if (!smooth && err > max_err_random) max_err_random = err;
        end
    end
    $display("reconstruction error |rec - f|: mean %f, max on smooth blocks %f, max on random blocks %f",
             sum_err / real'(NBLK * 64), max_err_smooth, max_err_random);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
