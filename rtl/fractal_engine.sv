// fractal_engine: on-chip Fractal partitioning of a point cloud.
//
// Fractal splits a block in two at the midpoint of its extent along one
// dimension, (max + min) / 2, cycling x -> y -> z with the tree depth, and
// keeps splitting every block that holds more than `th` points. The blocks
// are stored in depth-first order: the two children of a block occupy the
// address range of their parent, lower child first, so leaves that are
// neighbours in the tree are neighbours in memory.
//
// How it works. Points live in two ping-pong buffers. One pass (a
// traversal) streams every point from the source buffer to the destination
// buffer, LANES points per cycle:
//   * blocks still above the threshold go through the partition unit:
//     LANES parallel comparators test coordinate > mid; points at or below
//     mid are packed upward from the block's first address, the others
//     downward from its last address, so no counting pass is needed;
//   * at the same time two midpoint units (argmax/argmin registers, an adder
//     and a one-bit right shift) find the extent of each new child along the
//     next dimension, so the children's midpoints are ready for the next
//     pass (the partition/midpoint pipelining of the paper's workflow);
//   * counters give each child's size, which decides whether it is a leaf;
//   * leaves are copied unchanged so that all blocks end in one buffer.
// An initial pass only finds the x extent of the whole cloud. A cloud of
// 2^n * th points therefore needs about n + 1 traversals.
//
// The block table (one entry per block, in address order) is also
// ping-ponged; each entry holds start, length, depth, midpoint, leaf flag
// and the range of the block's parent, which later bounds the search space
// of neighbour searching. Splitting stops at MAX_DEPTH levels (coincident
// points can never be separated) and when the table would exceed MAX_BLK
// entries; the latter raises `overflow`.
//
// Interface: write points with `ld_*` (original index = load address), pulse
// `start` with `n_pts` and `th`; `done` pulses at the end. Then read blocks
// through `blk_idx` and points (coordinates and original index) through
// `rd_addr`, both combinational. `traversals` counts the passes.
//
// From the paper: the split rule, threshold, dimension cycling, DFT layout,
// comparator partition unit, min-max midpoint units, counters and the
// pipelined partition/midpoint workflow. This design's choices: LANES, the
// buffer and table sizes, packing from both ends of a block, ties (= mid)
// going to the lower child, and level-by-level processing. The uniform and
// KD-tree modes of the paper's engine (the latter uses a sorter) are not
// built.
module fractal_engine
  import fc_pkg::*;
#(
  parameter int unsigned MAX_PTS   = 8192,
  parameter int unsigned LANES     = 4,
  parameter int unsigned MAX_BLK   = 128,
  parameter int unsigned MAX_DEPTH = 24,
  parameter int unsigned AW        = $clog2(MAX_PTS),
  parameter int unsigned BW        = $clog2(MAX_BLK)
) (
  input  logic          clk,
  input  logic          rst_n,
  // point load (into buffer 0)
  input  logic          ld_valid,
  input  logic [AW-1:0] ld_addr,
  input  point_t        ld_point,
  // control
  input  logic          start,
  input  logic [AW:0]   n_pts,
  input  logic [AW:0]   th,
  output logic          busy,
  output logic          done,
  output logic [BW:0]   n_blocks,
  output logic          overflow,
  output logic [7:0]    traversals,
  // block table read
  input  logic [BW-1:0] blk_idx,
  output logic [AW-1:0] blk_start,
  output logic [AW:0]   blk_len,
  output logic [AW-1:0] blk_pstart,
  output logic [AW:0]   blk_plen,
  output logic [4:0]    blk_depth,
  // point read (partitioned order)
  input  logic [AW-1:0] rd_addr,
  output point_t        rd_point,
  output logic [AW-1:0] rd_orig
);
  typedef struct packed {
    point_t        p;
    logic [AW-1:0] orig;
  } entry_t;

  typedef struct packed {
    logic [AW-1:0] start;
    logic [AW:0]   len;
    logic [AW-1:0] pstart;
    logic [AW:0]   plen;
    logic [4:0]    depth;
    fp16_t         mid;
    logic          leaf;
  } blk_t;

  typedef enum logic [2:0] {S_IDLE, S_ROOT, S_ROOT_END, S_BLK, S_STREAM, S_BLK_END, S_ITER_END} state_e;
  state_e state;

  entry_t buf0 [MAX_PTS];
  entry_t buf1 [MAX_PTS];
  blk_t   tab0 [MAX_BLK];
  blk_t   tab1 [MAX_BLK];
  logic   par;            // source buffer / current table

  logic [AW:0] n_q, th_q;
  logic [BW:0] bi, n_cur, n_nxt;
  logic        any_split;
  blk_t        cb;        // block being streamed
  logic        do_split;
  logic [AW:0] off;       // offset inside the block
  logic [AW:0] lcnt, rcnt;
  fp16_t       lmin, lmax, rmin, rmax;
  logic        lseen, rseen;

  // ---------------- lane datapath ----------------
  logic [1:0]    dim, ndim;
  entry_t        lane_e   [LANES];
  logic          lane_v   [LANES];
  logic          lane_r   [LANES];   // goes to the upper child
  logic [AW-1:0] lane_wa  [LANES];
  logic [AW:0]   lcnt_n, rcnt_n;
  fp16_t         lmin_n, lmax_n, rmin_n, rmax_n;
  logic          lseen_n, rseen_n;
  logic [AW:0]   base;

  assign dim  = 2'(cb.depth % 3);
  assign ndim = next_dim(dim);
  assign base = (state == S_ROOT) ? off : ({1'b0, cb.start} + off);

  always_comb begin
    logic [AW:0] lc, rc;
    lc = '0; rc = '0;
    lmin_n = lmin; lmax_n = lmax; rmin_n = rmin; rmax_n = rmax;
    lseen_n = lseen; rseen_n = rseen;
    for (int i = 0; i < LANES; i++) begin
      logic [AW:0] a;
      fp16_t       c;
      a         = base + (AW+1)'(i);
      lane_e[i] = par ? buf1[a[AW-1:0]] : buf0[a[AW-1:0]];
      if (state == S_ROOT) begin
        lane_v[i] = (off + (AW+1)'(i)) < n_q;
        lane_r[i] = 1'b0;
        c         = lane_e[i].p.x;
      end else begin
        lane_v[i] = (off + (AW+1)'(i)) < cb.len;
        lane_r[i] = do_split && fp16_gt(pt_dim(lane_e[i].p, dim), cb.mid);
        c         = pt_dim(lane_e[i].p, ndim);
      end
      // write address: packed from the bottom (lower child) or top (upper)
      if (!do_split)      lane_wa[i] = a[AW-1:0];
      else if (lane_r[i]) lane_wa[i] = AW'({1'b0, cb.start} + cb.len - 1'b1 - rcnt - rc);
      else                lane_wa[i] = AW'({1'b0, cb.start} + lcnt + lc);
      if (lane_v[i]) begin
        if (lane_r[i]) begin
          rc++;
          rmin_n = (!rseen_n || fp16_lt(c, rmin_n)) ? c : rmin_n;
          rmax_n = (!rseen_n || fp16_gt(c, rmax_n)) ? c : rmax_n;
          rseen_n = 1'b1;
        end else begin
          lc++;
          lmin_n = (!lseen_n || fp16_lt(c, lmin_n)) ? c : lmin_n;
          lmax_n = (!lseen_n || fp16_gt(c, lmax_n)) ? c : lmax_n;
          lseen_n = 1'b1;
        end
      end
    end
    lcnt_n = lcnt + lc;
    rcnt_n = rcnt + rc;
  end

  // ---------------- child entries ----------------
  blk_t lchild, rchild;
  always_comb begin
    lchild        = cb;
    lchild.len    = lcnt;
    lchild.pstart = cb.start;
    lchild.plen   = cb.len;
    lchild.depth  = cb.depth + 1'b1;
    lchild.mid    = fp16_half(fp16_add(lmax, lmin));
    lchild.leaf   = (lcnt <= th_q) || (int'(cb.depth) + 1 >= MAX_DEPTH);
    rchild        = lchild;
    rchild.start  = AW'({1'b0, cb.start} + lcnt);
    rchild.len    = rcnt;
    rchild.mid    = fp16_half(fp16_add(rmax, rmin));
    rchild.leaf   = (rcnt <= th_q) || (int'(cb.depth) + 1 >= MAX_DEPTH);
  end

  // ---------------- outputs ----------------
  blk_t   rb;
  entry_t re;
  assign busy       = (state != S_IDLE);
  assign rb         = par ? tab1[blk_idx] : tab0[blk_idx];
  assign blk_start  = rb.start;
  assign blk_len    = rb.len;
  assign blk_pstart = rb.pstart;
  assign blk_plen   = rb.plen;
  assign blk_depth  = rb.depth;
  assign re         = par ? buf1[rd_addr] : buf0[rd_addr];
  assign rd_point   = re.p;
  assign rd_orig    = re.orig;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      par        <= 1'b0;
      n_q        <= '0;
      th_q       <= '0;
      bi         <= '0;
      n_cur      <= '0;
      n_nxt      <= '0;
      n_blocks   <= '0;
      any_split  <= 1'b0;
      cb         <= '0;
      do_split   <= 1'b0;
      off        <= '0;
      lcnt       <= '0;
      rcnt       <= '0;
      lmin       <= FP16_ZERO;
      lmax       <= FP16_ZERO;
      rmin       <= FP16_ZERO;
      rmax       <= FP16_ZERO;
      lseen      <= 1'b0;
      rseen      <= 1'b0;
      overflow   <= 1'b0;
      traversals <= '0;
    end else begin
      done <= 1'b0;
      if (ld_valid && state == S_IDLE) buf0[ld_addr] <= '{p: ld_point, orig: ld_addr};

      unique case (state)
        S_IDLE: if (start) begin
          n_q        <= n_pts;
          th_q       <= th;
          par        <= 1'b0;
          off        <= '0;
          lseen      <= 1'b0;
          overflow   <= 1'b0;
          traversals <= 8'd1;
          cb         <= '0;
          do_split   <= 1'b0;
          state      <= S_ROOT;
        end

        // extent of the whole cloud along x
        S_ROOT: begin
          lmin  <= lmin_n;
          lmax  <= lmax_n;
          lseen <= lseen_n;
          off   <= off + (AW+1)'(LANES);
          if (off + (AW+1)'(LANES) >= n_q) state <= S_ROOT_END;
        end

        S_ROOT_END: begin
          tab0[0] <= '{start: '0, len: n_q, pstart: '0, plen: n_q, depth: '0,
                       mid: fp16_half(fp16_add(lmax, lmin)), leaf: (n_q <= th_q)};
          n_cur    <= (n_q == 0) ? '0 : (BW+1)'(1);
          n_blocks <= (n_q == 0) ? '0 : (BW+1)'(1);
          bi       <= '0;
          n_nxt    <= '0;
          any_split <= 1'b0;
          if (n_q <= th_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state      <= S_BLK;
            traversals <= traversals + 1'b1;
          end
        end

        S_BLK: begin
          blk_t e;
          e = par ? tab1[bi[BW-1:0]] : tab0[bi[BW-1:0]];
          if (!e.leaf && (int'(n_nxt) + int'(n_cur) - int'(bi) + 1 > MAX_BLK)) begin
            e.leaf   = 1'b1;
            overflow <= 1'b1;
          end
          cb       <= e;
          do_split <= !e.leaf;
          off      <= '0;
          lcnt     <= '0;
          rcnt     <= '0;
          lseen    <= 1'b0;
          rseen    <= 1'b0;
          state    <= S_STREAM;
        end

        S_STREAM: begin
          for (int i = 0; i < LANES; i++)
            if (lane_v[i]) begin
              if (par) buf0[lane_wa[i]] <= lane_e[i];
              else     buf1[lane_wa[i]] <= lane_e[i];
            end
          lcnt  <= lcnt_n;
          rcnt  <= rcnt_n;
          lmin  <= lmin_n;
          lmax  <= lmax_n;
          rmin  <= rmin_n;
          rmax  <= rmax_n;
          lseen <= lseen_n;
          rseen <= rseen_n;
          off   <= off + (AW+1)'(LANES);
          if (off + (AW+1)'(LANES) >= cb.len) state <= S_BLK_END;
        end

        S_BLK_END: begin
          if (!do_split) begin
            if (par) tab0[n_nxt[BW-1:0]] <= cb;
            else     tab1[n_nxt[BW-1:0]] <= cb;
            n_nxt <= n_nxt + 1'b1;
          end else if (rcnt == 0 || lcnt == 0) begin
            // nothing to separate along this dimension: try the next one
            blk_t c;
            c = (rcnt == 0) ? lchild : rchild;
            c.start = cb.start;
            if (par) tab0[n_nxt[BW-1:0]] <= c;
            else     tab1[n_nxt[BW-1:0]] <= c;
            n_nxt <= n_nxt + 1'b1;
            if (!c.leaf) any_split <= 1'b1;
          end else begin
            if (par) begin
              tab0[n_nxt[BW-1:0]]        <= lchild;
              tab0[n_nxt[BW-1:0] + 1'b1] <= rchild;
            end else begin
              tab1[n_nxt[BW-1:0]]        <= lchild;
              tab1[n_nxt[BW-1:0] + 1'b1] <= rchild;
            end
            n_nxt <= n_nxt + (BW+1)'(2);
            if (!lchild.leaf || !rchild.leaf) any_split <= 1'b1;
          end
          bi <= bi + 1'b1;
          state <= (bi + 1'b1 == n_cur) ? S_ITER_END : S_BLK;
        end

        S_ITER_END: begin
          par      <= ~par;
          n_cur    <= n_nxt;
          n_blocks <= n_nxt;
          n_nxt    <= '0;
          bi       <= '0;
          any_split <= 1'b0;
          if (any_split) begin
            state      <= S_BLK;
            traversals <= traversals + 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
