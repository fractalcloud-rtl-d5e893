// tb_fractal_engine: random clouds are partitioned by the engine and by a
// recursive reference of the Fractal algorithm (split at (max+min)/2 of the
// current dimension, dimensions cycled with depth, stop at th points, leaves
// listed depth first). Checked: the number of blocks, every block's start,
// length, depth and parent range, that each block holds exactly the
// reference's set of points (order inside a block is free), that
// coordinates travel with their original index, the number of traversals
// and the cycle count of the whole run.
module tb_fractal_engine;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int MAX_PTS = 1024, LANES = 4, MAX_BLK = 64, AW = 10, BW = 6;
  logic clk = 0, rst_n = 0;
  logic ld_valid, start, busy, done, overflow;
  logic [AW-1:0] ld_addr, rd_addr, rd_orig, blk_start, blk_pstart;
  point_t ld_point, rd_point;
  logic [AW:0] n_pts, th, blk_len, blk_plen;
  logic [BW:0] n_blocks;
  logic [BW-1:0] blk_idx;
  logic [4:0] blk_depth;
  logic [7:0] traversals;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fractal_engine #(.MAX_PTS(MAX_PTS), .LANES(LANES), .MAX_BLK(MAX_BLK)) dut (.*);

  point_t pts [MAX_PTS];
  // reference leaves
  int r_start [$], r_len [$], r_depth [$], r_pstart [$], r_plen [$];
  int r_members [$][$];
  int max_depth;

  function automatic real coord(int i, int d);
    return fp16_to_real(pt_dim(pts[i], 2'(d)));
  endfunction

  function automatic void frac(int idx [$], int depth, int start, int pstart, int plen, int thv);
    int  d, l [$], r [$];
    real mx, mn, mid;
    if (idx.size() <= thv || depth >= 24) begin
      r_start.push_back(start); r_len.push_back(idx.size()); r_depth.push_back(depth);
      r_pstart.push_back(pstart); r_plen.push_back(plen); r_members.push_back(idx);
      if (depth > max_depth) max_depth = depth;
      return;
    end
    d = depth % 3;
    mx = -1e9; mn = 1e9;
    foreach (idx[i]) begin
      if (coord(idx[i], d) > mx) mx = coord(idx[i], d);
      if (coord(idx[i], d) < mn) mn = coord(idx[i], d);
    end
    mid = (mx + mn) / 2.0;
    foreach (idx[i]) if (coord(idx[i], d) > mid) r.push_back(idx[i]); else l.push_back(idx[i]);
    if (r.size() == 0)      frac(l, depth + 1, start, start, idx.size(), thv);
    else if (l.size() == 0) frac(r, depth + 1, start, start, idx.size(), thv);
    else begin
      frac(l, depth + 1, start, start, idx.size(), thv);
      frac(r, depth + 1, start + l.size(), start, idx.size(), thv);
    end
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, thv, cyc, all [$], seen [MAX_PTS];
    ld_valid = 0; start = 0; ld_addr = 0; ld_point = '0; n_pts = 0; th = 0; blk_idx = 0; rd_addr = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 10; trial++) begin
      n   = (trial == 0) ? 80 : 50 + $urandom_range(MAX_PTS - 50);
      thv = (trial == 0) ? 24 : 8 + $urandom_range(120);
      if (trial == 1) begin n = 100; thv = 200; end   // a single block
      for (int i = 0; i < n; i++) begin
        // clustered clouds: two dense lumps and a sparse background
        int c = $urandom_range(2);
        int s = (c == 0) ? 255 : 31;
        int o = (c == 1) ? 20 : (c == 2) ? 180 : 0;
        pts[i] = '{real_to_fp16(real'(o + $urandom_range(s)) / 64.0),
                   real_to_fp16(real'(o + $urandom_range(s)) / 64.0),
                   real_to_fp16(real'($urandom_range(255)) / 64.0)};
        @(negedge clk); ld_valid = 1; ld_addr = AW'(i); ld_point = pts[i];
      end
      @(negedge clk); ld_valid = 0;
      n_pts = (AW+1)'(n); th = (AW+1)'(thv); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      r_start.delete(); r_len.delete(); r_depth.delete(); r_pstart.delete(); r_plen.delete(); r_members.delete();
      all.delete(); max_depth = 0;
      for (int i = 0; i < n; i++) all.push_back(i);
      frac(all, 0, 0, 0, n, thv);
      checks++;
      if (int'(n_blocks) != r_start.size()) begin
        failures++; $display("FAIL trial %0d blocks %0d exp %0d", trial, n_blocks, r_start.size());
      end else begin
        for (int b = 0; b < r_start.size(); b++) begin
          blk_idx = BW'(b); #1;
          checks++;
          if (int'(blk_start) != r_start[b] || int'(blk_len) != r_len[b] || int'(blk_depth) != r_depth[b] ||
              int'(blk_pstart) != r_pstart[b] || int'(blk_plen) != r_plen[b]) begin
            failures++;
            $display("FAIL trial %0d blk %0d: %0d+%0d d%0d p%0d+%0d exp %0d+%0d d%0d p%0d+%0d", trial, b,
                     blk_start, blk_len, blk_depth, blk_pstart, blk_plen, r_start[b], r_len[b], r_depth[b], r_pstart[b], r_plen[b]);
          end
          for (int i = 0; i < n; i++) seen[i] = -1;
          foreach (r_members[b][m]) seen[r_members[b][m]] = b;
          for (int a = r_start[b]; a < r_start[b] + r_len[b]; a++) begin
            rd_addr = AW'(a); #1;
            checks++;
            if (seen[rd_orig] != b || rd_point != pts[rd_orig]) begin
              failures++;
              if (failures < 20) $display("FAIL trial %0d addr %0d orig %0d not in block %0d", trial, a, rd_orig, b);
            end
          end
        end
      end
      checks++;
      if (int'(traversals) != max_depth + 1) begin
        failures++; $display("FAIL traversals %0d exp %0d", traversals, max_depth + 1);
      end
      checks++;
      if (cyc > (max_depth + 1) * ((n + LANES - 1) / LANES + 2 * MAX_BLK + 2) + 4) begin
        failures++; $display("FAIL cycles %0d", cyc);
      end
      checks++;
      if (overflow) begin failures++; $display("FAIL unexpected overflow"); end
      $display("trial %0d: n=%0d th=%0d blocks=%0d traversals=%0d cycles=%0d", trial, n, thv, n_blocks, traversals, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
