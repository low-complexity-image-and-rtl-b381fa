// adtt8_1d -- one registered 1-D stage of the approximate DTT.
//
// Takes one 8-sample vector per clock and returns its 1-D transform one clock
// later. Both kernels are built: the forward flow graph (adtt8_fwd, y = T8* x)
// and the transposed one (adtt8_inv, x = (T8*)^T y); the tag's inv bit, sent
// with each vector, selects which result is registered, so the same stage
// serves the encoder and the decoder direction. The paper builds its 2-D
// transform from two 1-D stages; the single output register and the per-vector
// kernel select are this design's choices.
//
// Interface: in_valid/in_tag/in_vec in; out_valid/out_tag/out_vec one clock
// later (latency 1, throughput 1 vector per clock, no back-pressure). The tag
// is passed through unchanged. in_vec is IN_W bits signed, out_vec IN_W+4.
// rst_n (active low, synchronous) clears out_valid only; the data registers
// are not reset.
module adtt8_1d
  import adtt_pkg::*;
#(
  parameter int IN_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  blk_tag_t                      in_tag,
  input  logic signed [IN_W-1:0]        in_vec  [N],
  output logic                          out_valid,
  output blk_tag_t                      out_tag,
  output logic signed [IN_W+GROWTH-1:0] out_vec [N]
);

  localparam int OW = IN_W + GROWTH;

  logic signed [OW-1:0] fwd [N];
  logic signed [OW-1:0] inv [N];

  adtt8_fwd #(.IN_W(IN_W)) u_fwd (.x(in_vec), .y(fwd));
  adtt8_inv #(.IN_W(IN_W)) u_inv (.y(in_vec), .x(inv));

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_tag <= in_tag;
      for (int i = 0; i < N; i++) out_vec[i] <= in_tag.inv ? inv[i] : fwd[i];
    end
  end

endmodule
