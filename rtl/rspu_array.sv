// rspu_array: N reuse-and-skip-enabled point units and the controller that
// runs block-parallel point operations on the blocks made by the fractal
// engine.
//
// Two workflows, selected per job:
//
// Sampling (op = OP_FPS), inter-block parallelism. Leaves are taken N at a
// time in depth-first order; each RSPU gets one leaf in its local buffer and
// all N run farthest point sampling at once. Every leaf is sampled at the
// same fixed rate, n_samp = max(1, len >> rate_shift). The sampled points
// are written, leaf after leaf, to the sample table as addresses in the
// partitioned point order; `soff_tab`/`scnt_tab` give each leaf's slice.
//
// Neighbour search (op = OP_NS), intra-block parallelism. Leaves are visited
// in depth-first order. The search space of a leaf is the leaf itself at
// depth <= 1 and its parent block otherwise. It is copied into the shared
// search-space buffer, unless the previous leaf used the same one (siblings
// share their parent), in which case it is reused without any read. The
// centres of the leaf are then handed out N at a time, one per RSPU, and
// the search space is broadcast once to all N units, so each read of the
// buffer serves N centres.
//   * ns_mode = MODE_BQ (grouping): centres are the leaf's sampled points,
//     candidates the points of the search space; result row = sample number.
//   * ns_mode = MODE_KNN (interpolation): centres are all points of the leaf,
//     candidates the sampled points inside the search space; result row =
//     the point's address.
// Each result row holds k neighbour addresses at nbr_tab[row * k + j].
//
// A search space larger than SS_DEPTH is cut to a window of SS_DEPTH points
// around the leaf, and a leaf larger than the RSPU buffer is cut to DEPTH
// points; both are counted (`clamp_cnt`). The paper bounds leaves by the
// threshold but gives no buffer sizes; these limits are this design's.
//
// Point coordinates are read one per cycle through the fractal engine's
// read port (`pt_addr` -> `pt_point`, combinational) and the block table
// through `blk_idx`.
//
// Statistics: `fps_batches` and `ns_batches` count parallel launches,
// `ss_loads` and `ss_reuses` the search-space loads and reuses,
// `bcast_reads` the buffer reads broadcast and `served` the candidate
// evaluations they fed (served / bcast_reads is the reuse factor).
module rspu_array
  import fc_pkg::*;
#(
  parameter int unsigned N_RSPU   = 4,
  parameter int unsigned DEPTH    = 256,
  parameter int unsigned SS_DEPTH = 1024,
  parameter int unsigned KMAX     = 32,
  parameter int unsigned MAX_PTS  = 8192,
  parameter int unsigned MAX_BLK  = 128,
  parameter int unsigned NBR_DEPTH = 65536,
  parameter int unsigned AW       = $clog2(MAX_PTS),
  parameter int unsigned BW       = $clog2(MAX_BLK),
  parameter int unsigned LAW      = $clog2(DEPTH),
  parameter int unsigned SAW      = $clog2(SS_DEPTH),
  parameter int unsigned NAW      = $clog2(NBR_DEPTH),
  parameter int unsigned K_W      = $clog2(KMAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // job
  input  logic          start,
  input  logic          op,          // 0 = sampling, 1 = neighbour search
  input  rspu_mode_e    ns_mode,
  input  logic [3:0]    rate_shift,
  input  logic [K_W-1:0] k,
  input  fp16_t         radius2,
  output logic          busy,
  output logic          done,
  // fractal engine: block table and points
  input  logic [BW:0]   n_blocks,
  output logic [BW-1:0] blk_idx,
  input  logic [AW-1:0] blk_start,
  input  logic [AW:0]   blk_len,
  input  logic [AW-1:0] blk_pstart,
  input  logic [AW:0]   blk_plen,
  input  logic [4:0]    blk_depth,
  output logic [AW-1:0] pt_addr,
  input  point_t        pt_point,
  // results
  output logic [AW:0]   n_samples,
  input  logic [AW-1:0] samp_rd,
  output logic [AW-1:0] samp_addr,
  output logic [AW:0]   soff_tab [MAX_BLK],
  output logic [AW:0]   scnt_tab [MAX_BLK],
  input  logic [NAW-1:0] nbr_rd,
  output logic [AW-1:0] nbr_addr,
  // statistics
  output logic [31:0]   fps_batches,
  output logic [31:0]   ns_batches,
  output logic [31:0]   ss_loads,
  output logic [31:0]   ss_reuses,
  output logic [31:0]   bcast_reads,
  output logic [31:0]   served,
  output logic [31:0]   clamp_cnt,
  output logic [31:0]   fps_visits_total
);
  localparam int unsigned RW = $clog2(N_RSPU + 1);
  localparam int unsigned RI = (N_RSPU > 1) ? $clog2(N_RSPU) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_F_LOAD, S_F_START, S_F_WAIT, S_F_DRAIN,
    S_N_LEAF, S_N_SSLOAD, S_N_CTR, S_N_START, S_N_STREAM, S_N_WAIT, S_N_WRITE, S_DONE
  } state_e;
  state_e state;

  // tables
  logic [AW-1:0] samp_tab [MAX_PTS];
  logic [AW-1:0] nbr_tab  [NBR_DEPTH];
  point_t        ss_pt    [SS_DEPTH];
  logic [AW-1:0] ss_ad    [SS_DEPTH];

  // job registers
  rspu_mode_e    mode_q;
  logic [3:0]    rs_q;
  logic [K_W-1:0] k_q;
  fp16_t         r2_q;

  // RSPU ports
  logic              r_ld   [N_RSPU];
  logic              r_start[N_RSPU];
  logic              r_busy [N_RSPU];
  logic              r_done [N_RSPU];
  logic [LAW-1:0]    r_samp [N_RSPU][DEPTH];
  logic [SAW-1:0]    r_res  [N_RSPU][KMAX];
  logic [K_W-1:0]    r_cnt  [N_RSPU];
  logic [31:0]       r_vis  [N_RSPU];
  logic [LAW:0]      r_n    [N_RSPU];
  logic [LAW:0]      r_ns   [N_RSPU];
  point_t            r_ctr  [N_RSPU];
  logic              r_act  [N_RSPU];
  logic [AW:0]       r_row  [N_RSPU];
  logic [AW-1:0]     r_bst  [N_RSPU];
  logic [BW-1:0]     r_blk  [N_RSPU];

  logic [LAW-1:0]    ld_addr;
  logic              ext_valid, ext_last;
  logic [SAW-1:0]    ext_idx;
  point_t            ext_point;
  logic              any_busy;

  // controller state
  logic [BW:0]   b0, bcur;        // batch base / current leaf
  logic [RW-1:0] r;               // RSPU being loaded / drained
  logic [RI-1:0] ri;              // r as an array index (r < N_RSPU)
  assign ri = RI'(r);
  logic [AW:0]   i;               // element counter
  logic [AW:0]   ns_total;
  logic [AW-1:0] ss_start_q;
  logic [AW:0]   ss_len_q;
  logic [SAW:0]  ss_fill;
  logic          ss_valid;
  logic [AW-1:0] ss_key_start;
  logic [AW:0]   ss_key_len;
  logic [AW:0]   c0, ncent;       // centre batch base / centres in leaf

  genvar g;
  generate
    for (g = 0; g < N_RSPU; g++) begin : g_rspu
      rspu #(.DEPTH(DEPTH), .KMAX(KMAX), .IDX_W(SAW)) u_rspu (
        .clk       (clk),
        .rst_n     (rst_n),
        .ld_valid  (r_ld[g]),
        .ld_addr   (ld_addr),
        .ld_point  (pt_point),
        .start     (r_start[g]),
        .mode      (mode_q),
        .n_pts     (r_n[g]),
        .n_samp    (r_ns[g]),
        .k         (k_q),
        .radius2   (r2_q),
        .center    (r_ctr[g]),
        .use_ext   (state != S_F_START),
        .ext_valid (ext_valid),
        .ext_point (ext_point),
        .ext_idx   (ext_idx),
        .ext_last  (ext_last),
        .busy      (r_busy[g]),
        .done      (r_done[g]),
        .samp_idx  (r_samp[g]),
        .res_idx   (r_res[g]),
        .res_cnt   (r_cnt[g]),
        .fps_visits(r_vis[g])
      );
    end
  endgenerate

  always_comb begin
    any_busy = 1'b0;
    fps_visits_total = '0;
    for (int q = 0; q < N_RSPU; q++) begin
      any_busy = any_busy | r_busy[q];
      fps_visits_total = fps_visits_total + r_vis[q];
    end
  end

  // search space of the current leaf (before clamping)
  logic [AW-1:0] sp_start;
  logic [AW:0]   sp_len;
  logic [AW:0]   lo_start;
  always_comb begin
    logic [AW+1:0] centre, lo, hi;
    if (blk_depth <= 5'd1) begin
      sp_start = blk_start;  sp_len = blk_len;
    end else begin
      sp_start = blk_pstart; sp_len = blk_plen;
    end
    // window of SS_DEPTH points centred on the leaf, kept inside the space
    centre   = {2'b0, blk_start} + (AW+2)'(blk_len >> 1);
    lo       = (centre > (AW+2)'(SS_DEPTH / 2)) ? centre - (AW+2)'(SS_DEPTH / 2) : '0;
    hi       = {2'b0, sp_start} + (AW+2)'(sp_len) - (AW+2)'(SS_DEPTH);
    if (lo < {2'b0, sp_start}) lo = {2'b0, sp_start};
    if (lo > hi)               lo = hi;
    lo_start = lo[AW:0];
  end

  // outputs and read ports
  assign busy      = (state != S_IDLE);
  assign samp_addr = samp_tab[samp_rd];
  assign nbr_addr  = nbr_tab[nbr_rd];
  assign blk_idx   = (state == S_F_LOAD || state == S_F_DRAIN) ? (b0[BW-1:0] + BW'(r)) : bcur[BW-1:0];
  assign ld_addr   = i[LAW-1:0];

  always_comb begin
    pt_addr = '0;
    unique case (state)
      S_F_LOAD:   pt_addr = blk_start + AW'(i);
      S_N_SSLOAD: pt_addr = (mode_q == MODE_BQ) ? ss_start_q + AW'(i) : samp_tab[i[AW-1:0]];
      S_N_CTR:    pt_addr = (mode_q == MODE_BQ) ? samp_tab[AW'(soff_tab[bcur[BW-1:0]] + c0 + AW'(r))]
                                                : blk_start + AW'(c0) + AW'(r);
      default:    pt_addr = '0;
    endcase
  end

  always_comb begin
    for (int q = 0; q < N_RSPU; q++) begin
      r_ld[q]    = (state == S_F_LOAD) && (RW'(q) == r) && (i < (AW+1)'(DEPTH)) && (i < blk_len);
      r_start[q] = (state == S_F_START || state == S_N_START) && r_act[q];
    end
  end

  assign ext_valid = (state == S_N_STREAM);
  assign ext_idx   = i[SAW-1:0];
  assign ext_point = ss_pt[i[SAW-1:0]];
  assign ext_last  = (state == S_N_STREAM) && (i + 1'b1 >= (AW+1)'(ss_fill));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      done         <= 1'b0;
      mode_q       <= MODE_FPS;
      rs_q         <= '0;
      k_q          <= '0;
      r2_q         <= FP16_ZERO;
      b0           <= '0;
      bcur         <= '0;
      r            <= '0;
      i            <= '0;
      ns_total     <= '0;
      n_samples    <= '0;
      ss_start_q   <= '0;
      ss_len_q     <= '0;
      ss_fill      <= '0;
      ss_valid     <= 1'b0;
      ss_key_start <= '0;
      ss_key_len   <= '0;
      c0           <= '0;
      ncent        <= '0;
      fps_batches  <= '0;
      ns_batches   <= '0;
      ss_loads     <= '0;
      ss_reuses    <= '0;
      bcast_reads  <= '0;
      served       <= '0;
      clamp_cnt    <= '0;
      for (int q = 0; q < N_RSPU; q++) begin
        r_n[q]   <= '0;
        r_ns[q]  <= '0;
        r_ctr[q] <= '0;
        r_act[q] <= 1'b0;
        r_row[q] <= '0;
        r_bst[q] <= '0;
        r_blk[q] <= '0;
      end
      for (int q = 0; q < MAX_BLK; q++) begin
        soff_tab[q] <= '0;
        scnt_tab[q] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rs_q     <= rate_shift;
          k_q      <= k;
          r2_q     <= radius2;
          b0       <= '0;
          bcur     <= '0;
          r        <= '0;
          i        <= '0;
          ss_valid <= 1'b0;
          for (int q = 0; q < N_RSPU; q++) r_act[q] <= 1'b0;
          if (n_blocks == 0) begin
            state <= S_DONE;
          end else if (!op) begin
            mode_q   <= MODE_FPS;
            ns_total <= '0;
            state    <= S_F_LOAD;
          end else begin
            mode_q <= ns_mode;
            state  <= S_N_LEAF;
          end
        end

        // ---------------- sampling: load one leaf per RSPU ----------------
        S_F_LOAD: begin
          if ((b0 + (BW+1)'(r)) >= n_blocks) begin
            state <= S_F_START;
          end else begin
            if (i == 0) begin
              logic [AW:0] len_c, nsv;
              len_c = (blk_len > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : blk_len;
              nsv   = len_c >> rs_q;
              if (nsv == 0) nsv = 1;
              r_n[ri]   <= len_c[LAW:0];
              r_ns[ri]  <= nsv[LAW:0];
              r_act[ri] <= 1'b1;
              r_bst[ri] <= blk_start;
              r_blk[ri] <= b0[BW-1:0] + BW'(r);
              if (blk_len > (AW+1)'(DEPTH)) clamp_cnt <= clamp_cnt + 1;
            end
            if (i + 1'b1 >= blk_len || i + 1'b1 >= (AW+1)'(DEPTH)) begin
              i <= '0;
              if (r + 1'b1 == RW'(N_RSPU)) state <= S_F_START;
              else                         r <= r + 1'b1;
            end else begin
              i <= i + 1'b1;
            end
          end
        end

        S_F_START: begin
          fps_batches <= fps_batches + 1;
          state       <= S_F_WAIT;
        end

        S_F_WAIT: if (!any_busy) begin
          r     <= '0;
          i     <= '0;
          state <= S_F_DRAIN;
        end

        // ---------------- sampling: collect sampled addresses ----------------
        S_F_DRAIN: begin
          if (!r_act[ri]) begin
            b0    <= b0 + (BW+1)'(N_RSPU);
            r     <= '0;
            i     <= '0;
            for (int q = 0; q < N_RSPU; q++) r_act[q] <= 1'b0;
            state <= (b0 + (BW+1)'(N_RSPU) >= n_blocks) ? S_DONE : S_F_LOAD;
          end else begin
            if (i == 0) begin
              soff_tab[r_blk[ri]] <= ns_total;
              scnt_tab[r_blk[ri]] <= (AW+1)'(r_ns[ri]);
            end
            samp_tab[ns_total[AW-1:0]] <= r_bst[ri] + AW'(r_samp[ri][i[LAW-1:0]]);
            ns_total  <= ns_total + 1'b1;
            n_samples <= ns_total + 1'b1;
            if (i + 1'b1 >= (AW+1)'(r_ns[ri])) begin
              i <= '0;
              if (r + 1'b1 == RW'(N_RSPU)) begin
                b0    <= b0 + (BW+1)'(N_RSPU);
                r     <= '0;
                for (int q = 0; q < N_RSPU; q++) r_act[q] <= 1'b0;
                state <= (b0 + (BW+1)'(N_RSPU) >= n_blocks) ? S_DONE : S_F_LOAD;
              end else begin
                r <= r + 1'b1;
              end
            end else begin
              i <= i + 1'b1;
            end
          end
        end

        // ---------------- neighbour search: one leaf ----------------
        S_N_LEAF: begin
          logic [AW-1:0] st;
          logic [AW:0]   ln;
          if (sp_len > (AW+1)'(SS_DEPTH)) begin
            st = lo_start[AW-1:0];
            ln = (AW+1)'(SS_DEPTH);
          end else begin
            st = sp_start;
            ln = sp_len;
          end
          ncent <= (mode_q == MODE_BQ) ? scnt_tab[bcur[BW-1:0]] : blk_len;
          c0    <= '0;
          r     <= '0;
          i     <= '0;
          if (ss_valid && ss_key_start == st && ss_key_len == ln) begin
            ss_reuses <= ss_reuses + 1;
            state     <= S_N_CTR;
          end else begin
            if (sp_len > (AW+1)'(SS_DEPTH)) clamp_cnt <= clamp_cnt + 1;
            ss_key_start <= st;
            ss_key_len   <= ln;
            ss_start_q   <= st;
            ss_len_q     <= ln;
            ss_fill      <= '0;
            ss_loads     <= ss_loads + 1;
            state        <= S_N_SSLOAD;
          end
        end

        // BQ: the points of the space; KNN: the samples that lie inside it
        S_N_SSLOAD: begin
          logic take;
          if (mode_q == MODE_BQ) begin
            take = 1'b1;
          end else begin
            take = (i < n_samples) &&
                   (samp_tab[i[AW-1:0]] >= ss_start_q) &&
                   ({1'b0, samp_tab[i[AW-1:0]]} < {1'b0, ss_start_q} + ss_len_q) &&
                   (ss_fill < (SAW+1)'(SS_DEPTH));
          end
          if (take) begin
            ss_pt[ss_fill[SAW-1:0]] <= pt_point;
            ss_ad[ss_fill[SAW-1:0]] <= pt_addr;
            ss_fill <= ss_fill + 1'b1;
          end
          if ((mode_q == MODE_BQ) ? (i + 1'b1 >= ss_len_q) : (i + 1'b1 >= n_samples)) begin
            i        <= '0;
            ss_valid <= 1'b1;
            state    <= S_N_CTR;
          end else begin
            i <= i + 1'b1;
          end
        end

        // hand one centre to each RSPU
        S_N_CTR: begin
          if (c0 + (AW+1)'(r) < ncent) begin
            r_ctr[ri] <= pt_point;
            r_act[ri] <= 1'b1;
            r_row[ri] <= (mode_q == MODE_BQ) ? soff_tab[bcur[BW-1:0]] + c0 + (AW+1)'(r)
                                            : {1'b0, pt_addr};
          end else begin
            r_act[ri] <= 1'b0;
          end
          if (r + 1'b1 == RW'(N_RSPU)) begin
            r     <= '0;
            state <= S_N_START;
          end else begin
            r <= r + 1'b1;
          end
        end

        S_N_START: begin
          ns_batches <= ns_batches + 1;
          i          <= '0;
          state      <= S_N_STREAM;
        end

        // broadcast the search space to all RSPUs
        S_N_STREAM: begin
          int act;
          act = 0;
          for (int q = 0; q < N_RSPU; q++) act += int'(r_act[q]);
          bcast_reads <= bcast_reads + 1;
          served      <= served + 32'(act);
          if (ext_last) state <= S_N_WAIT;
          i <= i + 1'b1;
        end

        S_N_WAIT: if (!any_busy) begin
          r     <= '0;
          state <= S_N_WRITE;
        end

        S_N_WRITE: begin
          if (r_act[ri]) begin
            for (int j = 0; j < KMAX; j++)
              if (j < int'(k_q))
                nbr_tab[NAW'(r_row[ri]) * NAW'(k_q) + NAW'(j)] <= ss_ad[r_res[ri][j]];
          end
          if (r + 1'b1 == RW'(N_RSPU)) begin
            r <= '0;
            if (c0 + (AW+1)'(N_RSPU) < ncent) begin
              c0    <= c0 + (AW+1)'(N_RSPU);
              state <= S_N_CTR;
            end else if (bcur + 1'b1 < n_blocks) begin
              bcur  <= bcur + 1'b1;
              state <= S_N_LEAF;
            end else begin
              state <= S_DONE;
            end
          end else begin
            r <= r + 1'b1;
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
