// topk_unit: sorted list of the K smallest distances seen so far.
//
// KMAX register entries hold (distance, index) pairs in ascending order.
// Every entry compares the incoming distance with its own value in
// parallel; entries above the insertion point shift up by one and the new
// pair drops into the gap, so one candidate is accepted per cycle. Only the
// first `k` entries are used. This insertion form is the simplest hardware
// that produces the sorted K smallest values, which is the function the paper
// gives for its merge-sort based top-K unit.
//
// The same registers serve ball query: with `append` set, a candidate is
// written at the next free entry instead (first-found order), so the list
// holds the first K points that passed the radius test.
//
// `clear` empties the list. `count` is the number of valid entries. Results
// are visible the cycle after `in_valid`.
module topk_unit
  import fc_pkg::*;
#(
  parameter int unsigned KMAX  = 32,
  parameter int unsigned IDX_W = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     append,
  input  logic [$clog2(KMAX+1)-1:0] k,
  input  logic                     in_valid,
  input  fp16_t                    in_dist,
  input  logic [IDX_W-1:0]         in_idx,
  output fp16_t                    dist_o [KMAX],
  output logic [IDX_W-1:0]         idx_o  [KMAX],
  output logic [$clog2(KMAX+1)-1:0] count
);
  logic [KMAX-1:0] lt;

  always_comb begin
    for (int i = 0; i < KMAX; i++)
      lt[i] = (i < int'(k)) && ((i >= int'(count)) || fp16_lt(in_dist, dist_o[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < KMAX; i++) begin
        dist_o[i] <= FP16_ZERO;
        idx_o[i]  <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (in_valid) begin
      if (append) begin
        if (count < k) begin
          for (int i = 0; i < KMAX; i++) begin
            if (i == int'(count)) begin
              dist_o[i] <= in_dist;
              idx_o[i]  <= in_idx;
            end
          end
          count <= count + 1'b1;
        end
      end else begin
        for (int i = 0; i < KMAX; i++) begin
          if (lt[i]) begin
            if (i > 0 && lt[i-1]) begin
              dist_o[i] <= dist_o[i-1];
              idx_o[i]  <= idx_o[i-1];
            end else begin
              dist_o[i] <= in_dist;
              idx_o[i]  <= in_idx;
            end
          end
        end
        if (count < k) count <= count + 1'b1;
      end
    end
  end
endmodule
