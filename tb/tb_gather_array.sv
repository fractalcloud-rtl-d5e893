// tb_gather_array: a 7-leaf block table (leaves at depth <= 1 and deeper
// ones sharing parents) and a neighbour table built here. The merged output
// must contain, for every centre, its k neighbour rows in order; both units
// must have served leaves (unit 0 from the front, unit 1 from the back) and
// together every leaf exactly once; sibling search spaces must be reused.
module tb_gather_array;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 16, MB = 16, NB = 7, K = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, g_valid, g_ready, g_last, g_unit;
  logic [3:0] k;
  logic [9:0] feat_base;
  logic [4:0] n_blocks, meet;
  logic [3:0] blk_idx;
  logic [9:0] blk_start, blk_pstart, nbr_addr;
  logic [10:0] blk_len, blk_plen;
  logic [4:0] blk_depth;
  logic [10:0] soff_tab [MB], scnt_tab [MB], g_centre;
  logic [11:0] nbr_rd;
  logic mr_req [2], mr_gnt [2], mr_rvalid [2];
  logic [9:0] mr_addr [2];
  fp16_t mr_data [2][L], g_row [L];
  logic [31:0] blk_u0, blk_u1, rows_loaded, lb_reuses, rows_out, miss_cnt;
  gather_array #(.LANES(L), .LB_DEPTH(128), .KMAX(8), .MAX_PTS(1024), .MAX_BLK(MB), .FEAT_ROWS(1024), .NBR_DEPTH(4096)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int bs [NB] = '{0, 30, 50, 80, 100, 140, 170};
  int bl [NB] = '{30, 20, 30, 20, 40, 30, 30};
  int bd [NB] = '{2, 2, 2, 2, 1, 2, 2};
  int ps [NB] = '{0, 0, 50, 50, 100, 140, 140};
  int pl [NB] = '{50, 50, 50, 50, 40, 60, 60};
  int nbt [4096];
  function automatic fp16_t F(int row, int l);
    return 16'((row * 29 + l * 7) & 16'h3fff);
  endfunction
  assign n_blocks   = 5'(NB);
  assign blk_start  = 10'(bs[blk_idx]);
  assign blk_len    = 11'(bl[blk_idx]);
  assign blk_pstart = 10'(ps[blk_idx]);
  assign blk_plen   = 11'(pl[blk_idx]);
  assign blk_depth  = 5'(bd[blk_idx]);
  assign nbr_addr   = 10'(nbt[nbr_rd]);
  for (genvar u = 0; u < 2; u++) begin : g_m
    always @(posedge clk) begin
      mr_rvalid[u] <= mr_req[u] && mr_gnt[u];
      if (mr_req[u] && mr_gnt[u]) for (int l = 0; l < L; l++) mr_data[u][l] <= F(int'(mr_addr[u]) - 300, l);
    end
  end
  always @(negedge clk) begin
    mr_gnt[0] = ($urandom_range(3) != 0);
    mr_gnt[1] = ($urandom_range(3) != 0);
    g_ready = ($urandom_range(4) != 0);
  end

  int exp_r [int][$];     // per centre: expected rows
  int got_n [int];
  int ncent;
  always @(posedge clk) if (rst_n && g_valid && g_ready) begin
    int c;
    c = int'(g_centre);
    checks++;
    if (!exp_r.exists(c) || exp_r[c].size() == 0) failures++;
    else begin
      for (int l = 0; l < L; l++) if (g_row[l] != F(exp_r[c][0], l)) begin failures++; break; end
      if (g_last != (exp_r[c].size() == 1)) failures++;
      void'(exp_r[c].pop_front());
    end
  end
  initial begin
    int s, left;
    start = 0; k = 4'(K); feat_base = 10'd300; mr_gnt[0] = 0; mr_gnt[1] = 0; g_ready = 0;
    s = 0;
    for (int b = 0; b < NB; b++) begin
      soff_tab[b] = 11'(s); scnt_tab[b] = 11'(2 + b % 3);
      for (int c = s; c < s + 2 + b % 3; c++)
        for (int j = 0; j < K; j++) begin
          int sp, sn;
          sp = (bd[b] <= 1) ? bs[b] : ps[b];
          sn = (bd[b] <= 1) ? bl[b] : pl[b];
          nbt[c * K + j] = sp + $urandom_range(sn - 1);
          exp_r[c].push_back(nbt[c * K + j]);
        end
      s += 2 + b % 3;
    end
    for (int b = NB; b < MB; b++) begin soff_tab[b] = 0; scnt_tab[b] = 0; end
    ncent = s;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    left = 0;
    foreach (exp_r[c]) left += exp_r[c].size();
    checks++; if (left != 0) begin failures++; $display("FAIL %0d rows missing", left); end
    checks++; if (blk_u0 == 0 || blk_u1 == 0 || blk_u0 + blk_u1 != NB) begin failures++; $display("FAIL split %0d/%0d", blk_u0, blk_u1); end
    checks++; if (lb_reuses == 0) begin failures++; $display("FAIL no reuse"); end
    checks++; if (rows_out != ncent * K || miss_cnt != 0) begin failures++; $display("FAIL rows_out %0d", rows_out); end
    $display("u0=%0d u1=%0d meet=%0d reuse=%0d loaded=%0d", blk_u0, blk_u1, meet, lb_reuses, rows_loaded);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
