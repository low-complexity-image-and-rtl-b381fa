// transpose_buffer -- 8x8 ping-pong transpose memory between the row and the
// column 1-D stages of the 2-D transform.
//
// The paper names a transpose buffer between its two 1-D stages and says no
// more; this implementation is this design's own. Two banks of 8x8 words are
// used alternately. Vectors arriving on the write side are stored as rows
// 0..7 of the current write bank; when row 7 is written the bank is marked
// full and the write side moves to the other bank. A full bank is read out as
// columns 0..7, one per clock, then marked empty and the read side moves to
// the other bank. A bank is read in exactly 8 clocks and takes at least 8
// clocks to fill, so with one input vector per clock at most, the write side
// can never catch up with a full bank and no back-pressure is needed; an
// assertion guards that rule (overrun).
//
// The tag's inv bit is captured with row 0 of a block and returned with every
// column of that block; the tag's idx field on output is the column index.
// The write side counts rows itself; in_tag.idx is only checked against that
// count by an assertion.
//
// Timing: row 7 of a block written at clock edge t; column 0 appears on
// out_* after edge t+1, column 7 after edge t+8. rst_n (active low,
// synchronous) empties both banks and resets the counters.
module transpose_buffer
  import adtt_pkg::*;
#(
  parameter int W = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  blk_tag_t             in_tag,
  input  logic signed [W-1:0]  in_row  [N],
  output logic                 out_valid,
  output blk_tag_t             out_tag,
  output logic signed [W-1:0]  out_col [N]
);

  logic signed [W-1:0] mem [2][N][N];   // [bank][row][column]
  logic [1:0]          full;
  logic [1:0]          bank_inv;
  logic                wr_bank, rd_bank;
  logic [IDX_W-1:0]    wr_row, rd_col;

  // write side
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int c = 0; c < N; c++) mem[wr_bank][wr_row][c] <= in_row[c];
      if (wr_row == '0) bank_inv[wr_bank] <= in_tag.inv;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_bank <= 1'b0;
      wr_row  <= '0;
      rd_bank <= 1'b0;
      rd_col  <= '0;
      full    <= '0;
    end else begin
      if (in_valid) begin
        wr_row <= wr_row + 1'b1;
        if (wr_row == IDX_W'(N-1)) begin
          wr_bank       <= ~wr_bank;
          full[wr_bank] <= 1'b1;
        end
      end
      if (full[rd_bank]) begin
        rd_col <= rd_col + 1'b1;
        if (rd_col == IDX_W'(N-1)) begin
          rd_bank       <= ~rd_bank;
          full[rd_bank] <= 1'b0;
        end
      end
    end
  end

  // read side: registered column output
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= full[rd_bank];
  end

  always_ff @(posedge clk) begin
    if (full[rd_bank]) begin
      out_tag.inv <= bank_inv[rd_bank];
      out_tag.idx <= rd_col;
      for (int r = 0; r < N; r++) out_col[r] <= mem[rd_bank][r][rd_col];
    end
  end

  // The write side must never start a bank that is still waiting to be read.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && wr_row == '0) |-> !full[wr_bank])
    else $error("transpose_buffer: write into a full bank");

  // Rows must arrive in order 0..7, as their tags say.
  a_row_order: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_tag.idx == wr_row)
    else $error("transpose_buffer: row %0d arrived as row %0d", in_tag.idx, wr_row);

endmodule
