// tb_fractalcloud_top: end-to-end run of one set-abstraction layer on the
// accelerator at its default (full) parameters.
//
// A DRAM model (one beat per cycle when not stalling, 3-cycle read
// latency, random stalls in the later phases) holds a 1024-point cloud.
// A CPU model sends instruction words through the cfg port: load
// coordinates, partition (threshold 64), then, after the host has read the
// partitioned order and laid out features accordingly, load features and
// weights, sample at 1/4 per leaf, ball query (k = 16), gather + MLP +
// ReLU + max-pool, and store the pooled rows back to DRAM.
//
// Checks: partition against a recursive reference (leaf membership), the
// sample list against per-leaf FPS, and every pooled output value against
// a bit-exact FP16 reference of ball query -> shared MLP -> ReLU -> max.
// Mechanisms counted (a failure for any that never happened): window-check
// skipping, parallel FPS batches, search-space reuse, broadcast serving
// several RSPUs, gathering from both ends, local-buffer reuse, DRAM stalls,
// config wait for a busy accelerator, bank conflicts. Cycle check: the
// coordinate load runs at one beat per cycle (16 B/cycle, the paper's
// DDR4 bandwidth class).
module tb_fractalcloud_top;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 1024, TH = 64, K = 16, L = 16, OB = 4096;
  localparam int AW = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid, cfg_ready, idle;
  logic [31:0] cfg_data;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [31:0] dram_addr;
  logic [127:0] dram_wdata, dram_rdata;
  logic [AW-1:0] pt_rd_addr, pt_rd_orig, samp_rd, samp_addr;
  point_t pt_rd_point;
  logic [AW:0] n_samples;
  logic [7:0] n_blocks;
  logic [7:0] traversals;
  logic overflow;
  logic [31:0] fps_visits, fps_batches, ns_batches, ss_reuses, bcast_reads, served, clamp_cnt,
               g_blk_u0, g_blk_u1, g_lb_reuses, g_rows_loaded, g_rows_out, bank_conflicts,
               cfg_wait_cycles, mlp_groups, dma_beats;

  fractalcloud_top dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #100000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DRAM model ----------------
  logic [127:0] dram [bit [31:0]];
  logic         stall_en = 0;
  int           stalls = 0;
  logic [127:0] rq [$];
  int           rt [$];
  int           cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb dram_gnt = dram_req && !(stall_en && (cyc % 7 == 3));
  always @(posedge clk) begin
    dram_rvalid <= 1'b0;
    if (dram_req && !dram_gnt) stalls++;
    if (dram_req && dram_gnt) begin
      if (dram_we) dram[dram_addr] = dram_wdata;
      else begin rq.push_back(dram.exists(dram_addr) ? dram[dram_addr] : '0); rt.push_back(cyc + 3); end
    end
    if (rt.size() > 0 && rt[0] <= cyc) begin
      dram_rvalid <= 1'b1;
      dram_rdata  <= rq.pop_front();
      void'(rt.pop_front());
    end
  end

  task automatic send(logic [31:0] w);
    @(negedge clk); cfg_valid = 1; cfg_data = w;
    @(posedge clk); while (!cfg_ready) @(posedge clk);
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic wait_idle();
    repeat (4) @(negedge clk);
    while (!idle) @(negedge clk);
  endtask
  task automatic dma_job(int kind, int loc, int base, int cnt);
    send({4'd3, 2'(kind), 12'd0, 14'(loc)}); send(base); send(32'(cnt));
  endtask

  // ---------------- reference data ----------------
  point_t Po [N];        // original order
  fp16_t  Fo [N][L];     // features, original order
  fp16_t  Wt [L][L];
  point_t P [N];         // partitioned order
  int     orig [N];
  int r_start [$], r_len [$], r_depth [$], r_pstart [$], r_plen [$];
  int r_members [$][$];

  function automatic real coord(int i, int d);
    return fp16_to_real(d == 0 ? Po[i].x : d == 1 ? Po[i].y : Po[i].z);
  endfunction
  function automatic void frac(int idx [$], int depth, int start, int pstart, int plen);
    int d, l [$], r [$];
    real mx, mn, mid;
    if (idx.size() <= TH || depth >= 24) begin
      r_start.push_back(start); r_len.push_back(idx.size()); r_depth.push_back(depth);
      r_pstart.push_back(pstart); r_plen.push_back(plen); r_members.push_back(idx);
      return;
    end
    d = depth % 3; mx = -1e9; mn = 1e9;
    foreach (idx[i]) begin
      if (coord(idx[i], d) > mx) mx = coord(idx[i], d);
      if (coord(idx[i], d) < mn) mn = coord(idx[i], d);
    end
    mid = (mx + mn) / 2.0;
    foreach (idx[i]) if (coord(idx[i], d) > mid) r.push_back(idx[i]); else l.push_back(idx[i]);
    if (r.size() == 0)      frac(l, depth + 1, start, start, idx.size());
    else if (l.size() == 0) frac(r, depth + 1, start, start, idx.size());
    else begin
      frac(l, depth + 1, start, start, idx.size());
      frac(r, depth + 1, start + l.size(), start, idx.size());
    end
  endfunction
  function automatic real d2(point_t a, point_t b);
    real dx, dy, dz;
    dx = fp16_to_real(a.x) - fp16_to_real(b.x);
    dy = fp16_to_real(a.y) - fp16_to_real(b.y);
    dz = fp16_to_real(a.z) - fp16_to_real(b.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  initial begin
    int all [$], samp [$], nb, ns, c, tmp, nbrs [$], found, t0, t1, full_visits, bad;
    real best, dref [256], r2;
    logic smp [256];
    fp16_t y [L], acc [L], v;
    logic [127:0] beat;
    int mem_ok [$];
    cfg_valid = 0; cfg_data = 0; pt_rd_addr = 0; samp_rd = 0; dram_rdata = '0;
    for (int i = 0; i < N; i++) begin
      Po[i] = '{real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0),
                real_to_fp16(real'($urandom_range(15)) / 8.0)};
      dram[i] = {80'd0, Po[i]};
      for (int l = 0; l < L; l++)
        Fo[i][l] = (l < 3) ? (l == 0 ? Po[i].x : l == 1 ? Po[i].y : Po[i].z) : real_to_fp16(real'($urandom_range(15)) / 8.0 - 0.5);
    end
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++) Wt[i][j] = real_to_fp16(real'($urandom_range(15)) / 8.0 - 1.0);
    repeat (3) @(negedge clk); rst_n = 1;

    // coordinates and partitioning
    dma_job(0, 0, 0, N);
    while (!dut.dma_busy) @(negedge clk);
    t0 = cyc;
    while (dut.dma_busy) @(negedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 > N + 12) begin failures++; $display("FAIL coordinate load took %0d cycles", t1 - t0); end
    send({4'd0, 14'(N), 14'(TH)});
    wait_idle();
    for (int i = 0; i < N; i++) all.push_back(i);
    frac(all, 0, 0, 0, N);
    nb = r_start.size();
    checks++;
    if (int'(n_blocks) != nb) begin failures++; $display("FAIL blocks %0d exp %0d", n_blocks, nb); end
    for (int a = 0; a < N; a++) begin pt_rd_addr = AW'(a); #1; P[a] = pt_rd_point; orig[a] = int'(pt_rd_orig); end
    bad = 0;
    for (int b = 0; b < nb; b++) begin
      int m [$];
      m = r_members[b]; m.sort();
      mem_ok.delete();
      for (int a = r_start[b]; a < r_start[b] + r_len[b]; a++) mem_ok.push_back(orig[a]);
      mem_ok.sort();
      checks++;
      if (m != mem_ok) begin failures++; bad++; end
    end
    $display("%0d points -> %0d leaves in %0d traversals (membership errors %0d)", N, nb, traversals, bad);

    // features in partitioned order, weights
    for (int a = 0; a < N; a++)
      for (int h = 0; h < 2; h++) begin
        for (int e = 0; e < 8; e++) beat[16*e +: 16] = Fo[orig[a]][h*8 + e];
        dram[32'h10000 + 2*a + h] = beat;
      end
    for (int i = 0; i < L; i++)
      for (int h = 0; h < 2; h++) begin
        for (int e = 0; e < 8; e++) beat[16*e +: 16] = Wt[i][h*8 + e];
        dram[32'h20000 + 2*i + h] = beat;
      end
    stall_en = 1;
    r2 = 0.3;
    dma_job(1, 0, 32'h10000, N);
    dma_job(2, 0, 32'h20000, L);
    send({4'd1, 1'b0, 2'd0, 4'd2, 6'd0, 15'd0}); send(32'd0);
    send({4'd1, 1'b1, 2'd1, 4'd2, 6'(K), 15'd0}); send({16'd0, real_to_fp16(r2)});
    send({4'd2, 1'b1, 6'd0, 6'(K), 1'b0, 14'd0}); send(32'(OB));
    wait_idle();

    // reference sampling
    full_visits = 0;
    for (int b = 0; b < nb; b++) begin
      ns = r_len[b] >> 2; if (ns == 0) ns = 1;
      full_visits += (ns - 1) * r_len[b];
      for (int i = 0; i < r_len[b]; i++) begin dref[i] = 1e9; smp[i] = 0; end
      samp.push_back(r_start[b]); smp[0] = 1; c = 0;
      for (int s = 1; s < ns; s++) begin
        best = -1.0;
        for (int i = 0; i < r_len[b]; i++) if (!smp[i]) begin
          if (d2(P[r_start[b] + i], P[r_start[b] + c]) < dref[i]) dref[i] = d2(P[r_start[b] + i], P[r_start[b] + c]);
          if (dref[i] > best) begin best = dref[i]; tmp = i; end
        end
        c = tmp; smp[c] = 1; samp.push_back(r_start[b] + c);
      end
    end
    checks++;
    if (int'(n_samples) != samp.size()) begin failures++; $display("FAIL samples %0d exp %0d", n_samples, samp.size()); end
    bad = 0;
    foreach (samp[s]) begin
      samp_rd = AW'(s); #1; checks++;
      if (int'(samp_addr) != samp[s]) begin failures++; bad++; end
    end
    $display("%0d samples, %0d mismatches", samp.size(), bad);

    // store results and compare with the reference layer
    dma_job(3, OB, 32'h30000, samp.size());
    wait_idle();
    bad = 0;
    foreach (samp[s]) begin
      int bb;
      for (int q = 0; q < nb; q++) if (samp[s] >= r_start[q] && samp[s] < r_start[q] + r_len[q]) bb = q;
      nbrs.delete();
      if (r_depth[bb] <= 1) begin
        for (int a = r_start[bb]; a < r_start[bb] + r_len[bb]; a++) if (d2(P[a], P[samp[s]]) < r2 && nbrs.size() < K) nbrs.push_back(a);
      end else begin
        for (int a = r_pstart[bb]; a < r_pstart[bb] + r_plen[bb]; a++) if (d2(P[a], P[samp[s]]) < r2 && nbrs.size() < K) nbrs.push_back(a);
      end
      found = nbrs.size();
      for (int j = found; j < K; j++) nbrs.push_back(nbrs[0]);
      for (int j = 0; j < K; j++) begin
        for (int o = 0; o < L; o++) begin
          v = FP16_ZERO;
          for (int i = 0; i < L; i++) v = fp16_add(v, fp16_mul(Fo[orig[nbrs[j]]][i], Wt[i][o]));
          if (v[15]) v = FP16_ZERO;
          acc[o] = (j == 0) ? v : fp16_max(acc[o], v);
        end
      end
      for (int h = 0; h < 2; h++) begin
        beat = dram.exists(32'h30000 + 2*s + h) ? dram[32'h30000 + 2*s + h] : '1;
        for (int e = 0; e < 8; e++) begin
          checks++;
          if (beat[16*e +: 16] !== acc[h*8 + e]) begin
            failures++; bad++;
            if (bad < 6) $display("FAIL out centre %0d lane %0d got %h exp %h", s, h*8 + e, beat[16*e +: 16], acc[h*8 + e]);
          end
        end
      end
    end
    $display("output mismatches %0d", bad);

    // mechanisms
    $display("fps_visits=%0d (no skip %0d) fps_batches=%0d ns_batches=%0d ss_reuses=%0d bcast=%0d served=%0d",
             fps_visits, full_visits, fps_batches, ns_batches, ss_reuses, bcast_reads, served);
    $display("gather u0=%0d u1=%0d lb_reuses=%0d rows_loaded=%0d rows_out=%0d conflicts=%0d cfg_wait=%0d dram_stalls=%0d groups=%0d",
             g_blk_u0, g_blk_u1, g_lb_reuses, g_rows_loaded, g_rows_out, bank_conflicts, cfg_wait_cycles, stalls, mlp_groups);
    checks++; if (!(fps_visits < full_visits)) begin failures++; $display("FAIL no window skipping"); end
    checks++; if (!(fps_batches > 0 && fps_batches < nb)) begin failures++; $display("FAIL no parallel FPS batches"); end
    checks++; if (ss_reuses == 0) begin failures++; $display("FAIL no search-space reuse"); end
    checks++; if (!(served > bcast_reads)) begin failures++; $display("FAIL broadcast served one unit only"); end
    checks++; if (g_blk_u0 == 0 || g_blk_u1 == 0 || int'(g_blk_u0 + g_blk_u1) != nb) begin failures++; $display("FAIL two-ended gather"); end
    checks++; if (g_lb_reuses == 0) begin failures++; $display("FAIL no gather buffer reuse"); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no DRAM stall"); end
    checks++; if (cfg_wait_cycles == 0) begin failures++; $display("FAIL config never waited"); end
    checks++; if (bank_conflicts == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (int'(g_rows_out) != K * samp.size() || int'(mlp_groups) != samp.size()) begin failures++; $display("FAIL row counts"); end
    checks++; if (overflow || clamp_cnt != 0) begin failures++; $display("FAIL overflow/clamp"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
