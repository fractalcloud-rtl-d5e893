// systolic_array: N x N FP16 systolic array for the shared MLP layers.
//
// Computes y = x * W for one N-element input row per cycle, where W is an
// N x N weight matrix held stationary in the cells (row i of cells = input
// channel i, column j = output channel j). Input element i is delayed by i
// cycles before entering row i, activations move right and partial sums
// move down, and output column j is delayed by N-1-j cycles at the bottom,
// so every result row leaves aligned, LAT = 2N-1 cycles after its input.
// The array accepts a new row every cycle; `in_tag` travels with the row.
//
// Weights: pulse `w_ld` with `w_row` = input channel and `w_data` = the N
// weights of that channel; loads take effect on rows entering afterwards
// (load while the pipeline is empty).
//
// The 16 x 16 size and FP16 arithmetic are the paper's; the
// weight-stationary organisation and the skew buffers are this design's.
module systolic_array
  import fc_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned TAG_W = 16,
  parameter int unsigned RW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             w_ld,
  input  logic [RW-1:0]    w_row,
  input  fp16_t            w_data [N],
  input  logic             in_valid,
  input  fp16_t            in_vec [N],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp16_t            out_vec [N],
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned LAT = 2 * N - 1;

  fp16_t a_h [N][N+1];   // activations, [row][col boundary]
  fp16_t p_v [N+1][N];   // partial sums, [row boundary][col]

  // input skew: element i passes through i registers
  fp16_t skew [N][N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int s = 0; s < N; s++) skew[i][s] <= FP16_ZERO;
    end else begin
      for (int i = 0; i < N; i++) begin
        skew[i][0] <= in_valid ? in_vec[i] : FP16_ZERO;
        for (int s = 1; s < N; s++) skew[i][s] <= skew[i][s-1];
      end
    end
  end
  always_comb begin
    a_h[0][0] = in_valid ? in_vec[0] : FP16_ZERO;
    for (int i = 1; i < N; i++) a_h[i][0] = skew[i][i-1];
    for (int j = 0; j < N; j++) p_v[0][j] = FP16_ZERO;
  end

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      systolic_pe u_pe (
        .clk, .rst_n,
        .w_ld (w_ld && (w_row == RW'(i))),
        .w_in (w_data[j]),
        .a_in (a_h[i][j]),
        .p_in (p_v[i][j]),
        .a_out(a_h[i][j+1]),
        .p_out(p_v[i+1][j])
      );
    end
  end

  // output deskew: column j waits N-1-j cycles
  fp16_t dsk [N][N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++)
        for (int s = 0; s < N; s++) dsk[j][s] <= FP16_ZERO;
    end else begin
      for (int j = 0; j < N; j++) begin
        dsk[j][0] <= p_v[N][j];
        for (int s = 1; s < N; s++) dsk[j][s] <= dsk[j][s-1];
      end
    end
  end
  always_comb begin
    for (int j = 0; j < N; j++)
      out_vec[j] = (j == N - 1) ? p_v[N][j] : dsk[j][N-2-j];
  end

  // valid and tag delay line
  logic             vq [LAT];
  logic [TAG_W-1:0] tq [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) begin vq[s] <= 1'b0; tq[s] <= '0; end
    end else begin
      vq[0] <= in_valid;
      tq[0] <= in_tag;
      for (int s = 1; s < LAT; s++) begin vq[s] <= vq[s-1]; tq[s] <= tq[s-1]; end
    end
  end
  assign out_valid = vq[LAT-1];
  assign out_tag   = tq[LAT-1];
endmodule
