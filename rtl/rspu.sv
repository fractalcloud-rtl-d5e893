// rspu: reuse-and-skip-enabled point unit.
//
// One point unit executes every point operation of a point network on one
// block of points:
//   * MODE_FPS  farthest point sampling inside the block held in the local
//               buffer (inter-block parallelism: every RSPU samples its own
//               block);
//   * MODE_BQ   ball query for one centre: the first K points whose squared
//               distance is below `radius2` (grouping);
//   * MODE_KNN  the K nearest points to one centre (interpolation).
// For BQ and KNN the candidates come either from the local buffer or, with
// `use_ext` set, from a stream (indices up to IDX_W bits) broadcast by the array controller out of the
// shared search-space buffer (intra-block parallelism: several RSPUs work on
// different centres over the same search-space data).
//
// Pipeline (one candidate per cycle):
//   issue   read buffer entry (point, previous distance) at `ptr`; the window
//           check picks the next unsampled address, so sampled points are
//           skipped without a read;
//   dist    distance_unit, registered;
//   update  comparison unit: FPS keeps min(previous, new) and writes it
//           back, the argmax register tracks the farthest candidate; BQ
//           compares with the radius and appends; KNN inserts into top-K.
// After a traversal drains, FPS marks the argmax point sampled (mask bit 0),
// records it in the output list and uses it as the next centre.
//
// FPS starts from local address 0 (the paper starts from a random point;
// the first point of a block is as arbitrary after partitioning and needs no
// random source). If a ball query finds fewer than K points, the result is
// padded with the first point found, as the PointNet++ reference does; the
// paper does not say how short groups are filled.
//
// Interface: load the buffer with `ld_*` (one point per cycle), then pulse
// `start` with the job fields. `done` pulses when the job is finished and
// `busy` is high while it runs. Results: `samp_idx[i]` (FPS, first `n_samp`
// entries) and `res_idx[j]` / `res_cnt` (BQ/KNN). `fps_visits` counts the
// candidates actually processed by FPS since reset; the difference from
// the points a full traversal would read is the work saved by skipping.
module rspu
  import fc_pkg::*;
#(
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned KMAX   = 32,
  parameter int unsigned W      = 8,
  parameter int unsigned ADDR_W = $clog2(DEPTH),
  parameter int unsigned IDX_W  = ADDR_W,            // candidate index width (>= ADDR_W)
  parameter int unsigned K_W    = $clog2(KMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // local buffer load
  input  logic              ld_valid,
  input  logic [ADDR_W-1:0] ld_addr,
  input  point_t            ld_point,
  // job
  input  logic              start,
  input  rspu_mode_e        mode,
  input  logic [ADDR_W:0]   n_pts,     // points in the local buffer
  input  logic [ADDR_W:0]   n_samp,    // FPS: points to sample
  input  logic [K_W-1:0]    k,         // BQ/KNN: neighbours per centre
  input  fp16_t             radius2,   // BQ: squared radius
  input  point_t            center,    // BQ/KNN: centre point
  input  logic              use_ext,   // BQ/KNN: candidates from ext stream
  // shared search-space stream (intra-block mode)
  input  logic              ext_valid,
  input  point_t            ext_point,
  input  logic [IDX_W-1:0]  ext_idx,
  input  logic              ext_last,
  // status and results
  output logic              busy,
  output logic              done,
  output logic [ADDR_W-1:0] samp_idx [DEPTH],
  output logic [IDX_W-1:0]  res_idx  [KMAX],
  output logic [K_W-1:0]    res_cnt,
  output logic [31:0]       fps_visits
);
  typedef enum logic [2:0] {S_IDLE, S_FPS_INIT, S_FPS_SCAN, S_FPS_DRAIN, S_NS_SCAN, S_NS_DRAIN} state_e;
  state_e state;

  // local buffer
  point_t      pts  [DEPTH];
  fp16_t       prev [DEPTH];
  logic [DEPTH-1:0] mask;

  rspu_mode_e        mode_q;
  logic [ADDR_W:0]   n_q, nsamp_q, ndone;
  logic [K_W-1:0]    k_q;
  fp16_t             r2_q;
  point_t            ctr;
  logic              ext_q;
  logic [ADDR_W:0]   ptr;

  // ---------------- issue stage ----------------
  logic [W-1:0]      window;
  logic [ADDR_W:0]   wc_next;
  logic              wc_hit;
  logic              own_issue, iss_valid, iss_last;
  logic [IDX_W-1:0]  iss_idx;
  point_t            iss_pt;

  always_comb begin
    for (int i = 0; i < W; i++)
      window[i] = (int'(ptr) + 1 + i < DEPTH) ? mask[int'(ptr) + 1 + i] : 1'b0;
  end

  window_check #(.W(W), .ADDR_W(ADDR_W + 1)) u_wc (
    .window   (window),
    .addr     (ptr),
    .next_addr(wc_next),
    .hit      (wc_hit)
  );

  logic [ADDR_W:0] fps_next;
  // the window check moves the pointer to the next candidate (or a full
  // window ahead); it saturates at the end of the block
  assign fps_next = (wc_next >= n_q) ? n_q : wc_next;

  assign own_issue = (state == S_FPS_SCAN && ptr < n_q && mask[ptr[ADDR_W-1:0]]) ||
                     (state == S_NS_SCAN && !ext_q && ptr < n_q);

  always_comb begin
    if (state == S_NS_SCAN && ext_q) begin
      iss_valid = ext_valid;
      iss_pt    = ext_point;
      iss_idx   = ext_idx;
      iss_last  = ext_valid && ext_last;
    end else begin
      iss_valid = own_issue;
      iss_pt    = pts[ptr[ADDR_W-1:0]];
      iss_idx   = IDX_W'(ptr[ADDR_W-1:0]);
      iss_last  = 1'b0;
    end
  end

  // ---------------- distance stage ----------------
  logic              d_valid;
  fp16_t             d_dist;
  logic [IDX_W-1:0]  d_idx;
  logic [ADDR_W-1:0] d_addr;
  fp16_t             d_prev;
  assign d_addr = d_idx[ADDR_W-1:0];

  distance_unit #(.TAG_W(IDX_W)) u_dist (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (iss_valid),
    .a        (iss_pt),
    .b        (ctr),
    .in_tag   (iss_idx),
    .out_valid(d_valid),
    .dist_out (d_dist),
    .out_tag  (d_idx)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) d_prev <= FP16_ZERO;
    else if (iss_valid) d_prev <= prev[iss_idx[ADDR_W-1:0]];
  end

  // ---------------- update stage ----------------
  fp16_t             newd;
  logic              within_r;
  fp16_t             best;
  logic [ADDR_W-1:0] best_idx;
  logic              best_ok;
  assign newd     = fp16_min(d_prev, d_dist);
  assign within_r = fp16_lt(d_dist, r2_q);

  logic              tk_clear;
  logic              tk_valid;
  fp16_t             tk_dist [KMAX];
  logic [IDX_W-1:0]  tk_idx  [KMAX];
  logic [K_W-1:0]    tk_cnt;
  assign tk_valid = d_valid && (mode_q == MODE_KNN || (mode_q == MODE_BQ && within_r)) &&
                    (state == S_NS_SCAN || state == S_NS_DRAIN);
  assign tk_clear = start && !busy;

  topk_unit #(.KMAX(KMAX), .IDX_W(IDX_W)) u_topk (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (tk_clear),
    .append  (mode_q == MODE_BQ),
    .k       (k_q),
    .in_valid(tk_valid),
    .in_dist (d_dist),
    .in_idx  (d_idx),
    .dist_o  (tk_dist),
    .idx_o   (tk_idx),
    .count   (tk_cnt)
  );

  always_comb begin
    for (int j = 0; j < KMAX; j++)
      res_idx[j] = (j < int'(tk_cnt)) ? tk_idx[j] : tk_idx[0];
  end
  assign res_cnt = tk_cnt;

  // ---------------- control ----------------
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      done         <= 1'b0;
      mask         <= '0;
      mode_q       <= MODE_FPS;
      n_q          <= '0;
      nsamp_q      <= '0;
      ndone        <= '0;
      k_q          <= '0;
      r2_q         <= FP16_ZERO;
      ctr          <= '0;
      ext_q        <= 1'b0;
      ptr          <= '0;
      best         <= FP16_ZERO;
      best_idx     <= '0;
      best_ok      <= 1'b0;
      fps_visits   <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        pts[i]      <= '0;
        prev[i]     <= FP16_ZERO;
        samp_idx[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (ld_valid) pts[ld_addr] <= ld_point;

      // FPS distance update and argmax
      if (d_valid && state inside {S_FPS_SCAN, S_FPS_DRAIN}) begin
        prev[d_addr] <= newd;
        if (!best_ok || fp16_gt(newd, best)) begin
          best     <= newd;
          best_idx <= d_addr;
          best_ok  <= 1'b1;
        end
      end

      unique case (state)
        S_IDLE: if (start) begin
          mode_q       <= mode;
          n_q          <= n_pts;
          nsamp_q      <= (n_samp > n_pts) ? n_pts : n_samp;
          k_q          <= k;
          r2_q         <= radius2;
          ext_q        <= use_ext;
          ptr          <= '0;
          if (mode == MODE_FPS) begin
            state <= S_FPS_INIT;
          end else begin
            ctr   <= center;
            state <= S_NS_SCAN;
          end
        end

        S_FPS_INIT: begin
          // candidates are the loaded points; the first one is sampled
          for (int i = 0; i < DEPTH; i++) begin
            mask[i] <= (i < int'(n_q)) && (i != 0);
            prev[i] <= FP16_MAXPOS;
          end
          samp_idx[0] <= '0;
          ctr         <= pts[0];
          ndone       <= 1;
          ptr         <= '0;
          best_ok     <= 1'b0;
          if (nsamp_q <= 1 || n_q <= 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_FPS_SCAN;
          end
        end

        S_FPS_SCAN: begin
          if (own_issue) fps_visits <= fps_visits + 1;
          if (ptr >= n_q) state <= S_FPS_DRAIN;
          else            ptr   <= fps_next;
        end

        S_FPS_DRAIN: if (!d_valid) begin
          // the traversal is complete: best_idx is the farthest point
          mask[best_idx]  <= 1'b0;
          samp_idx[ndone[ADDR_W-1:0]] <= best_idx;
          ctr             <= pts[best_idx];
          ndone           <= ndone + 1;
          ptr             <= '0;
          best_ok         <= 1'b0;
          if (ndone + 1 >= nsamp_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_FPS_SCAN;
          end
        end

        S_NS_SCAN: begin
          if (ext_q) begin
            if (iss_last) state <= S_NS_DRAIN;
          end else begin
            if (ptr + 1 >= n_q) state <= S_NS_DRAIN;
            ptr <= ptr + 1;
          end
        end

        S_NS_DRAIN: if (!d_valid) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
