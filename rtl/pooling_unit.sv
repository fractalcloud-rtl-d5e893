// pooling_unit: max pooling over the neighbours of each centre.
//
// Rows arrive one per cycle tagged with a slot number (the gather unit that
// produced them) and a `last` flag on the final neighbour of a centre. Each
// slot keeps a running element-wise FP16 maximum; the first row of a group
// loads the accumulator, later rows take the maximum, and on the last row
// the pooled row is output one cycle later together with the centre tag.
// Interleaved groups from different slots are pooled independently.
//
// Max pooling over the group follows the point networks the paper runs;
// the slot scheme is this design's way of serving two gather streams.
module pooling_unit
  import fc_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned SLOTS = 2,
  parameter int unsigned TAG_W = 14,
  parameter int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp16_t            in_row [LANES],
  input  logic [SW-1:0]    in_slot,
  input  logic [TAG_W-1:0] in_tag,
  input  logic             in_last,
  output logic             out_valid,
  output fp16_t            out_row [LANES],
  output logic [TAG_W-1:0] out_tag,
  output logic [31:0]      groups
);
  fp16_t acc   [SLOTS][LANES];
  logic  fresh [SLOTS];
  fp16_t nxt   [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      nxt[l] = fresh[in_slot] ? in_row[l] : fp16_max(acc[in_slot][l], in_row[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      groups    <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        fresh[s] <= 1'b1;
        for (int l = 0; l < LANES; l++) acc[s][l] <= FP16_ZERO;
      end
      for (int l = 0; l < LANES; l++) out_row[l] <= FP16_ZERO;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) acc[in_slot][l] <= nxt[l];
        fresh[in_slot] <= in_last;
        if (in_last) begin
          out_valid <= 1'b1;
          out_tag   <= in_tag;
          groups    <= groups + 1;
          for (int l = 0; l < LANES; l++) out_row[l] <= nxt[l];
        end
      end
    end
  end
endmodule
