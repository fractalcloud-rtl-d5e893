// distance_unit: squared Euclidean distance between two 3-D FP16 points.
//
// Three subtractions, three multiplications and two additions in FP16, with
// one register stage at the output so that the RSPU can run it in a
// pipeline: a result appears one cycle after its operands, one result per
// cycle. A tag travels with each operand pair (the RSPU uses it for the
// point's local address). The squared distance is used throughout because
// every comparison in sampling and neighbour searching (farthest, within
// radius, nearest) is unchanged by the square root; the paper does not say
// whether a square root is taken, and this design takes none.
module distance_unit
  import fc_pkg::*;
#(
  parameter int unsigned TAG_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  point_t           a,
  input  point_t           b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp16_t            dist_out,
  output logic [TAG_W-1:0] out_tag
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dist_out  <= FP16_ZERO;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dist_out <= fp16_dist2(a, b);
        out_tag <= in_tag;
      end
    end
  end
endmodule
