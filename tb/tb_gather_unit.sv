// tb_gather_unit: a sequence of block jobs (two consecutive ones share a
// search space) with random grants on the buffer and neighbour ports and a
// random output ready. Every emitted row must be the feature row of the
// referenced neighbour, in centre-major, neighbour-minor order with `last`
// on the k-th row; the shared search space must be reused, not reloaded.
module tb_gather_unit;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 16, LB = 64, KM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic job_valid, job_ready, mr_req, mr_gnt, mr_rvalid, nb_req, nb_gnt, o_valid, o_ready, o_last;
  logic [9:0] ss_start, nb_addr;
  logic [10:0] ss_len, c_off, c_cnt, o_centre;
  logic [3:0] k;
  logic [9:0] feat_base, mr_addr;
  fp16_t mr_data [L], o_row [L];
  logic [11:0] nb_idx;
  logic [31:0] rows_loaded, lb_reuses, rows_out, blocks_done, miss_cnt;
  gather_unit #(.LANES(L), .LB_DEPTH(LB), .KMAX(KM), .MAX_PTS(1024), .FEAT_ROWS(1024), .NBR_DEPTH(4096)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic fp16_t F(int row, int l);
    return 16'((row * 37 + l * 11) & 16'h3fff);
  endfunction
  int nbt [4096];
  always @(posedge clk) begin
    mr_rvalid <= mr_req && mr_gnt;
    if (mr_req && mr_gnt) for (int l = 0; l < L; l++) mr_data[l] <= F(int'(mr_addr), l);
  end
  always @(negedge clk) begin
    mr_gnt = ($urandom_range(2) != 0);
    nb_gnt = ($urandom_range(2) != 0);
    o_ready = ($urandom_range(3) != 0);
  end
  assign nb_addr = 10'(nbt[nb_idx]);

  int eq_row [$], eq_ctr [$];
  logic eq_last [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    checks++;
    if (eq_row.size() == 0) begin failures++; end
    else begin
      for (int l = 0; l < L; l++) if (o_row[l] != F(eq_row[0], l)) begin failures++; break; end
      if (int'(o_centre) != eq_ctr[0] || o_last != eq_last[0]) failures++;
      void'(eq_row.pop_front()); void'(eq_ctr.pop_front()); void'(eq_last.pop_front());
    end
  end
  initial begin
    int ss [4], sl [4], co [4], cc [4];
    int kk, nj;
    job_valid = 0; ss_start = 0; ss_len = 0; c_off = 0; c_cnt = 0; k = 0; feat_base = 10'd200;
    mr_gnt = 0; nb_gnt = 0; o_ready = 0;
    ss[0] = 10; sl[0] = 40; ss[1] = 10; sl[1] = 40; ss[2] = 50; sl[2] = 64; ss[3] = 120; sl[3] = 20;
    co[0] = 0; cc[0] = 5; co[1] = 5; cc[1] = 4; co[2] = 9; cc[2] = 7; co[3] = 16; cc[3] = 3;
    kk = 6;
    for (int c = 0; c < 19; c++) begin
      int b;
      b = (c < 5) ? 0 : (c < 9) ? 1 : (c < 16) ? 2 : 3;
      for (int j = 0; j < kk; j++) begin
        nbt[c * kk + j] = ss[b] + $urandom_range(sl[b] - 1);
        eq_row.push_back(200 + nbt[c * kk + j]); eq_ctr.push_back(c); eq_last.push_back(j == kk - 1);
      end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    nj = 0;
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); while (!job_ready) @(negedge clk);
      job_valid = 1; ss_start = 10'(ss[b]); ss_len = 11'(sl[b]); c_off = 11'(co[b]); c_cnt = 11'(cc[b]); k = 4'(kk);
      @(negedge clk); job_valid = 0;
    end
    @(negedge clk); while (!job_ready || eq_row.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (eq_row.size() != 0) begin failures++; $display("FAIL %0d rows missing", eq_row.size()); end
    checks++; if (lb_reuses != 1 || rows_loaded != 40 + 64 + 20) begin failures++; $display("FAIL reuse %0d loaded %0d", lb_reuses, rows_loaded); end
    checks++; if (blocks_done != 4 || rows_out != 19 * kk || miss_cnt != 0) begin failures++; $display("FAIL counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
