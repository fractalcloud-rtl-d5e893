// tb_rspu_array: block-parallel sampling, grouping and interpolation.
//
// A random cloud is partitioned by the fractal engine; the array then runs
// FPS on every leaf, ball query for every sampled centre, and KNN for every
// point. Each result is compared with a reference computed here from the
// block table and the partitioned points: FPS inside the leaf, search
// space = leaf (depth <= 1) or parent, first-k-within-radius for ball
// query, k nearest samples for KNN (ties: lower index first). Also checks
// that sibling leaves reused the search space, that every broadcast read
// served all active RSPUs, and that sampling ran in parallel batches.
module tb_rspu_array;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 4, DEPTH = 64, SS = 256, KMAX = 8, MAXP = 512, MAXB = 32, NBRD = 4096;
  localparam int AW = 9, BW = 5, NAW = 12;
  logic clk = 0, rst_n = 0;
  // engine
  logic ld_valid, fe_start, fe_busy, fe_done, overflow;
  logic [AW-1:0] ld_addr, rd_addr, rd_orig, blk_start, blk_pstart, samp_rd, samp_addr, nbr_addr;
  point_t ld_point, rd_point;
  logic [AW:0] n_pts, th, blk_len, blk_plen, n_samples;
  logic [BW:0] n_blocks;
  logic [BW-1:0] blk_idx, a_blk_idx, tb_blk;
  logic [4:0] blk_depth;
  logic [7:0] traversals;
  logic tb_own;
  logic [AW-1:0] tb_rd, a_pt_addr;
  // array
  logic start, op, busy, done;
  rspu_mode_e ns_mode;
  logic [3:0] rate_shift, k;
  fp16_t radius2;
  logic [AW:0] soff_tab [MAXB];
  logic [AW:0] scnt_tab [MAXB];
  logic [NAW-1:0] nbr_rd;
  logic [31:0] fps_batches, ns_batches, ss_loads, ss_reuses, bcast_reads, served, clamp_cnt, fps_visits_total;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  assign blk_idx = tb_own ? tb_blk : a_blk_idx;
  assign rd_addr = tb_own ? tb_rd : a_pt_addr;

  fractal_engine #(.MAX_PTS(MAXP), .LANES(4), .MAX_BLK(MAXB)) u_fe (
    .clk, .rst_n, .ld_valid, .ld_addr, .ld_point, .start(fe_start), .n_pts, .th, .busy(fe_busy), .done(fe_done),
    .n_blocks, .overflow, .traversals, .blk_idx, .blk_start, .blk_len, .blk_pstart, .blk_plen, .blk_depth,
    .rd_addr, .rd_point, .rd_orig);

  rspu_array #(.N_RSPU(N), .DEPTH(DEPTH), .SS_DEPTH(SS), .KMAX(KMAX), .MAX_PTS(MAXP), .MAX_BLK(MAXB), .NBR_DEPTH(NBRD)) dut (
    .clk, .rst_n, .start, .op, .ns_mode, .rate_shift, .k, .radius2, .busy, .done,
    .n_blocks, .blk_idx(a_blk_idx), .blk_start, .blk_len, .blk_pstart, .blk_plen, .blk_depth,
    .pt_addr(a_pt_addr), .pt_point(rd_point), .n_samples, .samp_rd, .samp_addr, .soff_tab, .scnt_tab,
    .nbr_rd, .nbr_addr, .fps_batches, .ns_batches, .ss_loads, .ss_reuses, .bcast_reads, .served, .clamp_cnt, .fps_visits_total);

  point_t P [MAXP];          // partitioned points, by address
  int bst [MAXB], bln [MAXB], bss [MAXB], bsl [MAXB];
  int samp [$];
  int soff [MAXB], scnt [MAXB];

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real d2(point_t a, point_t b);
    real dx, dy, dz;
    dx = fp16_to_real(a.x) - fp16_to_real(b.x);
    dy = fp16_to_real(a.y) - fp16_to_real(b.y);
    dz = fp16_to_real(a.z) - fp16_to_real(b.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  task automatic run(logic o, rspu_mode_e m, int kk, real r2);
    @(negedge clk); op = o; ns_mode = m; k = 4'(kk); radius2 = real_to_fp16(r2); rate_shift = 2; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    int n, nb, kk, cand [$], tmp, c, row, exp_reuse, found, ns, bb;
    real best, dref [DEPTH], r2;
    logic smp [DEPTH];
    point_t pt;
    ld_valid = 0; fe_start = 0; ld_addr = 0; ld_point = '0; n_pts = 0; th = 0; tb_own = 1; tb_blk = 0; tb_rd = 0;
    start = 0; op = 0; ns_mode = MODE_BQ; rate_shift = 2; k = 0; radius2 = 0; samp_rd = 0; nbr_rd = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    n = 400;
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ld_valid = 1; ld_addr = AW'(i);
      ld_point = '{real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0),
                   real_to_fp16(real'($urandom_range(7)) / 8.0)};
    end
    @(negedge clk); ld_valid = 0; n_pts = (AW+1)'(n); th = 40; fe_start = 1;
    @(negedge clk); fe_start = 0;
    while (!fe_done) @(negedge clk);
    nb = int'(n_blocks);
    for (int a = 0; a < n; a++) begin tb_rd = AW'(a); #1; P[a] = rd_point; end
    exp_reuse = 0;
    for (int b = 0; b < nb; b++) begin
      tb_blk = BW'(b); #1;
      bst[b] = int'(blk_start); bln[b] = int'(blk_len);
      bss[b] = (blk_depth <= 1) ? bst[b] : int'(blk_pstart);
      bsl[b] = (blk_depth <= 1) ? bln[b] : int'(blk_plen);
      if (b > 0 && bss[b] == bss[b-1] && bsl[b] == bsl[b-1]) exp_reuse++;
    end
    $display("%0d points -> %0d blocks, %0d traversals", n, nb, traversals);
    tb_own = 0;

    // ---------- sampling ----------
    run(0, MODE_FPS, 0, 0.0);
    samp.delete();
    for (int b = 0; b < nb; b++) begin
      ns = bln[b] >> 2;
      if (ns == 0) ns = 1;
      soff[b] = samp.size(); scnt[b] = ns;
      for (int i = 0; i < bln[b]; i++) begin dref[i] = 1e9; smp[i] = 0; end
      samp.push_back(bst[b]); smp[0] = 1; c = 0;
      for (int s = 1; s < ns; s++) begin
        best = -1.0;
        for (int i = 0; i < bln[b]; i++) if (!smp[i]) begin
          if (d2(P[bst[b] + i], P[bst[b] + c]) < dref[i]) dref[i] = d2(P[bst[b] + i], P[bst[b] + c]);
          if (dref[i] > best) begin best = dref[i]; tmp = i; end
        end
        c = tmp; smp[c] = 1; samp.push_back(bst[b] + c);
      end
      checks++;
      if (int'(soff_tab[b]) != soff[b] || int'(scnt_tab[b]) != scnt[b]) begin
        failures++; $display("FAIL leaf %0d soff %0d/%0d scnt %0d/%0d", b, soff_tab[b], soff[b], scnt_tab[b], scnt[b]);
      end
    end
    checks++;
    if (int'(n_samples) != samp.size()) begin failures++; $display("FAIL n_samples %0d exp %0d", n_samples, samp.size()); end
    foreach (samp[s]) begin
      samp_rd = AW'(s); #1; checks++;
      if (int'(samp_addr) != samp[s]) begin failures++; if (failures < 10) $display("FAIL sample %0d: %0d exp %0d", s, samp_addr, samp[s]); end
    end
    checks++;
    if (int'(fps_batches) != (nb + N - 1) / N) begin failures++; $display("FAIL fps batches %0d", fps_batches); end

    // ---------- ball query ----------
    kk = 6; r2 = 0.1;
    run(1, MODE_BQ, kk, r2);
    foreach (samp[s]) begin

      for (int q = 0; q < nb; q++) if (samp[s] >= bst[q] && samp[s] < bst[q] + bln[q]) bb = q;
      cand.delete();
      for (int a = bss[bb]; a < bss[bb] + bsl[bb]; a++)
        if (d2(P[a], P[samp[s]]) < r2 && cand.size() < kk) cand.push_back(a);
      found = cand.size();
      for (int j = 0; j < kk; j++) begin
        nbr_rd = NAW'(s * kk + j); #1; checks++;
        if (int'(nbr_addr) != cand[(j < found) ? j : 0]) begin
          failures++; if (failures < 20) $display("FAIL bq centre %0d j %0d got %0d exp %0d", s, j, nbr_addr, cand[(j < found) ? j : 0]);
        end
      end
    end
    checks++;
    if (int'(ss_reuses) != exp_reuse || int'(ss_loads) != nb - exp_reuse) begin
      failures++; $display("FAIL reuse %0d loads %0d exp reuse %0d", ss_reuses, ss_loads, exp_reuse);
    end
    checks++;
    if (int'(served) > N * int'(bcast_reads) || int'(served) < int'(bcast_reads)) begin failures++; $display("FAIL served"); end
    $display("BQ: loads=%0d reuses=%0d bcast=%0d served=%0d batches=%0d", ss_loads, ss_reuses, bcast_reads, served, ns_batches);

    // ---------- KNN (interpolation) ----------
    kk = 3;
    run(1, MODE_KNN, kk, 0.0);
    for (int b = 0; b < nb; b++) begin
      for (int a = bst[b]; a < bst[b] + bln[b]; a++) begin
        cand.delete();
        foreach (samp[s]) if (samp[s] >= bss[b] && samp[s] < bss[b] + bsl[b]) cand.push_back(samp[s]);
        for (int i = 1; i < cand.size(); i++)
          for (int j = i; j > 0 && d2(P[cand[j]], P[a]) < d2(P[cand[j-1]], P[a]); j--) begin
            tmp = cand[j]; cand[j] = cand[j-1]; cand[j-1] = tmp;
          end
        found = (cand.size() < kk) ? cand.size() : kk;
        for (int j = 0; j < kk; j++) begin
          nbr_rd = NAW'(a * kk + j); #1; checks++;
          if (int'(nbr_addr) != cand[(j < found) ? j : 0]) begin
            failures++; if (failures < 30) $display("FAIL knn point %0d j %0d got %0d exp %0d", a, j, nbr_addr, cand[(j < found) ? j : 0]);
          end
        end
      end
    end
    checks++;
    if (clamp_cnt != 0) begin failures++; $display("FAIL clamp"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
