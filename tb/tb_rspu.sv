// tb_rspu: farthest point sampling, ball query and KNN on random blocks,
// checked against reference algorithms in the testbench.
//
// Coordinates are multiples of 1/8 below 2, so every squared distance is
// exact in FP16 and the reference (double precision) must match bit for
// bit, including tie-breaking (first index wins). Also checked: the number
// of candidates FPS actually visits (the window check must skip every
// sampled point) and an upper bound on the cycles of an FPS job.
module tb_rspu;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int DEPTH = 64, KMAX = 8, AW = 6;
  logic clk = 0, rst_n = 0;
  logic ld_valid, start, use_ext, ext_valid, ext_last, busy, done;
  logic [AW-1:0] ld_addr, ext_idx;
  point_t ld_point, center, ext_point;
  rspu_mode_e mode;
  logic [AW:0] n_pts, n_samp;
  logic [3:0] k, res_cnt;
  fp16_t radius2;
  logic [AW-1:0] samp_idx [DEPTH];
  logic [AW-1:0] res_idx [KMAX];
  logic [31:0] fps_visits;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rspu #(.DEPTH(DEPTH), .KMAX(KMAX), .W(8)) dut (.*);

  point_t pts [DEPTH];
  real    dref [DEPTH];

  initial begin
    #20000000;
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

  function automatic point_t rnd_pt();
    return '{real_to_fp16(real'($urandom_range(15)) / 8.0),
             real_to_fp16(real'($urandom_range(15)) / 8.0),
             real_to_fp16(real'($urandom_range(15)) / 8.0)};
  endfunction

  task automatic load(int n);
    for (int i = 0; i < n; i++) begin
      pts[i] = rnd_pt();
      @(negedge clk); ld_valid = 1; ld_addr = AW'(i); ld_point = pts[i];
    end
    @(negedge clk); ld_valid = 0;
  endtask

  task automatic run_job(rspu_mode_e m, int n, int ns, int kk, real r2, point_t c, bit ext, output int cycles);
    @(negedge clk);
    mode = m; n_pts = (AW+1)'(n); n_samp = (AW+1)'(ns); k = 4'(kk); radius2 = real_to_fp16(r2);
    center = c; use_ext = ext; start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    if (ext) begin
      for (int i = 0; i < n; i++) begin
        ext_valid = 1; ext_point = pts[i]; ext_idx = AW'(i); ext_last = (i == n - 1);
        @(negedge clk); cycles++;
      end
      ext_valid = 0; ext_last = 0;
    end
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int n, ns, kk, cyc, exp_vis, found, cand [DEPTH], nc, tmp;
    logic sampled [DEPTH];
    int sref [DEPTH];
    real best, r2;
    logic [31:0] vis0;
    point_t c;
    ld_valid = 0; start = 0; use_ext = 0; ext_valid = 0; ext_last = 0; ld_addr = 0; ext_idx = 0;
    ld_point = '0; center = '0; ext_point = '0; mode = MODE_FPS; n_pts = 0; n_samp = 0; k = 0; radius2 = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- FPS ----------------
    for (int trial = 0; trial < 12; trial++) begin
      n  = 8 + $urandom_range(DEPTH - 8);
      ns = 1 + $urandom_range(n / 2);
      load(n);
      vis0 = fps_visits;
      run_job(MODE_FPS, n, ns, 0, 0.0, '0, 0, cyc);
      // reference FPS
      for (int i = 0; i < n; i++) begin dref[i] = 1e9; sampled[i] = 0; end
      sref[0] = 0; sampled[0] = 1;
      for (int s = 1; s < ns; s++) begin
        best = -1.0; tmp = 0;
        for (int i = 0; i < n; i++) if (!sampled[i]) begin
          if (d2(pts[i], pts[sref[s-1]]) < dref[i]) dref[i] = d2(pts[i], pts[sref[s-1]]);
          if (dref[i] > best) begin best = dref[i]; tmp = i; end
        end
        sref[s] = tmp; sampled[tmp] = 1;
      end
      for (int s = 0; s < ns; s++) begin
        checks++;
        if (int'(samp_idx[s]) != sref[s]) begin
          failures++; $display("FAIL fps trial %0d sample %0d got %0d exp %0d", trial, s, samp_idx[s], sref[s]);
        end
      end
      exp_vis = 0;
      for (int s = 1; s < ns; s++) exp_vis += n - s;
      checks++;
      if (int'(fps_visits - vis0) != exp_vis) begin
        failures++; $display("FAIL fps visits %0d exp %0d", fps_visits - vis0, exp_vis);
      end
      checks++;
      if (cyc > exp_vis + (ns - 1) * (n / 8 + 4) + 4) begin
        failures++; $display("FAIL fps cycles %0d for %0d visits", cyc, exp_vis);
      end
    end

    // ---------------- BQ and KNN ----------------
    for (int trial = 0; trial < 24; trial++) begin
      bit ext, knn;
      n   = 4 + $urandom_range(DEPTH - 4);
      kk  = 1 + $urandom_range(KMAX - 1);
      ext = trial[0];
      knn = trial[1];
      load(n);
      c  = pts[$urandom_range(n - 1)];
      r2 = real'($urandom_range(1, 40)) / 64.0;
      run_job(knn ? MODE_KNN : MODE_BQ, n, 0, kk, r2, c, ext, cyc);
      nc = 0;
      for (int i = 0; i < n; i++) if (knn || d2(pts[i], c) < r2) begin cand[nc] = i; nc++; end
      if (knn)  // stable sort by distance
        for (int i = 1; i < nc; i++)
          for (int j = i; j > 0 && d2(pts[cand[j]], c) < d2(pts[cand[j-1]], c); j--) begin
            tmp = cand[j]; cand[j] = cand[j-1]; cand[j-1] = tmp;
          end
      found = (nc < kk) ? nc : kk;
      checks++;
      if (int'(res_cnt) != found) begin failures++; $display("FAIL ns count %0d exp %0d", res_cnt, found); end
      for (int j = 0; j < kk; j++) begin
        checks++;
        if (int'(res_idx[j]) != cand[(j < found) ? j : 0]) begin
          failures++; $display("FAIL %s trial %0d j %0d got %0d exp %0d", knn ? "knn" : "bq", trial, j, res_idx[j], cand[(j < found) ? j : 0]);
        end
      end
      checks++;
      if (cyc > n + 6) begin failures++; $display("FAIL ns cycles %0d n %0d", cyc, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
