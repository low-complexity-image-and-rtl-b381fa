// adtt2d -- 2-D 8x8 approximate discrete Tchebichef transform (and its
// near-inverse), streaming one vector per clock.
//
// The 2-D transform of an 8x8 block f is M = T8* f (T8*)^T. As in the paper,
// it is built from two 1-D stages and a transpose buffer: the row stage
// transforms each input row of f, the transpose buffer collects the 8 results
// and returns them column by column, and the column stage transforms each
// column. With inv = 1 the same hardware computes the near-inverse
// f' = (T8*)^T M T8* instead (both 1-D stages switch to the transposed flow
// graph), which the paper uses in place of the true inverse. The diagonal
// scale factors of the orthonormal approximation are not applied in either
// direction: they belong to the (de)quantiser.
//
// Interface (this design's choices; the paper gives no interface):
//   in_valid, in_row[0..7]  one row of the block per clock, rows 0..7 in
//                           order, signed IN_W bits. Gaps between rows are
//                           allowed. Blocks follow each other back to back.
//   in_inv                  sampled with row 0 of each block; selects the
//                           forward (0) or near-inverse (1) transform for the
//                           whole block.
//   out_valid, out_col[p]   one column q of the result per clock, q = 0..7 in
//                           order, out_col[p] = M[p][q], signed IN_W+8 bits
//                           (exact, no rounding or clipping).
//   out_idx, out_inv        the column index q and the block's mode.
// Timing: with rows on 8 consecutive clocks, column 0 leaves 10 clocks after
// row 0 entered, column 7 leaves 17 clocks after; a new block can enter every
// 8 clocks. rst_n is active low and synchronous.
module adtt2d
  import adtt_pkg::*;
#(
  parameter int IN_W = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            in_inv,
  input  logic signed [IN_W-1:0]          in_row  [N],
  output logic                            out_valid,
  output logic                            out_inv,
  output logic [IDX_W-1:0]                out_idx,
  output logic signed [IN_W+2*GROWTH-1:0] out_col [N]
);

  localparam int MW = IN_W + GROWTH;      // after the row stage

  // input framing: row counter and block mode
  logic [IDX_W-1:0] in_cnt;
  logic             blk_inv;
  blk_tag_t         row_tag;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_cnt  <= '0;
      blk_inv <= 1'b0;
    end else if (in_valid) begin
      in_cnt <= in_cnt + 1'b1;
      if (in_cnt == '0) blk_inv <= in_inv;
    end
  end

  always_comb begin
    row_tag.inv = (in_cnt == '0) ? in_inv : blk_inv;
    row_tag.idx = in_cnt;
  end

  // row stage
  logic                 r_valid;
  blk_tag_t             r_tag;
  logic signed [MW-1:0] r_vec [N];

  adtt8_1d #(.IN_W(IN_W)) u_row (
    .clk, .rst_n,
    .in_valid (in_valid), .in_tag (row_tag), .in_vec (in_row),
    .out_valid(r_valid),  .out_tag(r_tag),   .out_vec(r_vec)
  );

  // transpose buffer
  logic                 t_valid;
  blk_tag_t             t_tag;
  logic signed [MW-1:0] t_vec [N];

  transpose_buffer #(.W(MW)) u_tbuf (
    .clk, .rst_n,
    .in_valid (r_valid), .in_tag (r_tag), .in_row (r_vec),
    .out_valid(t_valid), .out_tag(t_tag), .out_col(t_vec)
  );

  // column stage
  blk_tag_t c_tag;

  adtt8_1d #(.IN_W(MW)) u_col (
    .clk, .rst_n,
    .in_valid (t_valid),   .in_tag (t_tag), .in_vec (t_vec),
    .out_valid(out_valid), .out_tag(c_tag), .out_vec(out_col)
  );

  assign out_inv = c_tag.inv;
  assign out_idx = c_tag.idx;

endmodule
