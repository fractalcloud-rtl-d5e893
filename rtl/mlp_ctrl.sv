// mlp_ctrl: feature computation for gathered groups (shared MLP + pooling).
//
// Gathered neighbour rows (LANES = N input channels each) are pushed into
// the systolic array one per cycle; each result row (N output channels) is
// passed through ReLU when `relu` is set and max-pooled over the k
// neighbours of its centre. Pooled rows are written to the global buffer at
// `out_base + centre`. Rows of the two gather streams are pooled in
// separate slots, so interleaving does not mix groups.
//
// Interface: `in_*` accepts a row every cycle (`in_ready` is always high:
// the array never stalls); `w_*` loads the weight matrix row by row; `wr_*`
// is the buffer write, one pooled row per group, 2N cycles after the last
// neighbour entered. `idle` is high when no row is in flight.
//
// One 16 x 16 layer is applied per pass; deeper or wider layers are run as
// further passes over the buffer by the controller. The paper's feature
// computation also uses the array for multi-tile layers; tiling control is
// not built here.
module mlp_ctrl
  import fc_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned MAX_PTS   = 8192,
  parameter int unsigned FEAT_ROWS = 8192,
  parameter int unsigned AW        = $clog2(MAX_PTS),
  parameter int unsigned FA        = $clog2(FEAT_ROWS),
  parameter int unsigned RW        = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           relu,
  input  logic [FA-1:0]  out_base,
  // weights
  input  logic           w_ld,
  input  logic [RW-1:0]  w_row,
  input  fp16_t          w_data [N],
  // gathered rows
  input  logic           in_valid,
  output logic           in_ready,
  input  fp16_t          in_row [N],
  input  logic [AW:0]    in_centre,
  input  logic           in_last,
  input  logic           in_unit,
  // buffer write
  output logic           wr_en,
  output logic [FA-1:0]  wr_addr,
  output fp16_t          wr_data [N],
  // status
  output logic           idle,
  output logic [31:0]    rows_in,
  output logic [31:0]    groups_out
);
  localparam int unsigned TAG_W = AW + 3;

  logic             sa_v;
  fp16_t            sa_y [N];
  logic [TAG_W-1:0] sa_t;
  fp16_t            act  [N];
  logic [AW:0]      p_tag;
  logic             p_v;
  logic [31:0]      inflight;

  assign in_ready = 1'b1;

  systolic_array #(.N(N), .TAG_W(TAG_W)) u_sa (
    .clk, .rst_n, .w_ld, .w_row, .w_data,
    .in_valid(in_valid), .in_vec(in_row), .in_tag({in_unit, in_last, in_centre}),
    .out_valid(sa_v), .out_vec(sa_y), .out_tag(sa_t)
  );

  always_comb begin
    for (int l = 0; l < N; l++) act[l] = (relu && sa_y[l][15]) ? FP16_ZERO : sa_y[l];
  end

  pooling_unit #(.LANES(N), .SLOTS(2), .TAG_W(AW + 1)) u_pool (
    .clk, .rst_n,
    .in_valid(sa_v), .in_row(act), .in_slot(sa_t[TAG_W-1]), .in_tag(sa_t[AW:0]), .in_last(sa_t[AW+1]),
    .out_valid(p_v), .out_row(wr_data), .out_tag(p_tag), .groups(groups_out)
  );

  assign wr_en   = p_v;
  assign wr_addr = out_base + FA'(p_tag);
  assign idle    = (inflight == 0) && !p_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows_in  <= '0;
      inflight <= '0;
    end else begin
      if (in_valid) rows_in <= rows_in + 1;
      // a row is in flight from entry until its pooling step
      inflight <= inflight + (in_valid ? 32'd1 : 32'd0) - (sa_v ? 32'd1 : 32'd0);
    end
  end
endmodule
