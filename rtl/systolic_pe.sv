// systolic_pe: one processing element of the feature-computation array.
//
// Weight-stationary FP16 multiply-accumulate cell. The weight is loaded
// with `w_ld`. Every cycle the activation entering from the left is passed
// to the right neighbour and the partial sum entering from above leaves
// downward with a_in * w added; both outputs are registered, so a cell
// adds one cycle horizontally and vertically. FP16 arithmetic is the
// paper's; the weight-stationary dataflow is this design's choice.
module systolic_pe
  import fc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_ld,
  input  fp16_t w_in,
  input  fp16_t a_in,
  input  fp16_t p_in,
  output fp16_t a_out,
  output fp16_t p_out
);
  fp16_t w;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w     <= FP16_ZERO;
      a_out <= FP16_ZERO;
      p_out <= FP16_ZERO;
    end else begin
      if (w_ld) w <= w_in;
      a_out <= a_in;
      p_out <= fp16_add(p_in, fp16_mul(a_in, w));
    end
  end
endmodule
