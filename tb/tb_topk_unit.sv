// tb_topk_unit: streams random distances into the unit and compares the
// sorted K smallest against a software selection; also checks append
// (ball-query) order and the k limit.
module tb_topk_unit;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int KMAX = 8;
  logic clk = 0, rst_n = 0;
  logic clear, append, in_valid;
  logic [3:0] k, count;
  fp16_t in_dist;
  logic [9:0] in_idx;
  fp16_t dist_o [KMAX];
  logic [9:0] idx_o [KMAX];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  topk_unit #(.KMAX(KMAX), .IDX_W(10)) dut (.clk, .rst_n, .clear, .append, .k, .in_valid, .in_dist, .in_idx, .dist_o, .idx_o, .count);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vals [64];
    int  n, kk, tmp, order [64];
    clear = 0; append = 0; in_valid = 0; k = 0; in_dist = 0; in_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      n  = 1 + $urandom_range(63);
      kk = 1 + $urandom_range(KMAX - 1);
      append = (trial % 4 == 3);
      @(negedge clk); clear = 1; k = 4'(kk); @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        // distinct values: i is mixed into the low bits
        vals[i] = real'($urandom_range(31) * 64 + i) / 16.0;
        in_valid = 1; in_dist = real_to_fp16(vals[i]); in_idx = 10'(i);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      // reference: selection of the kk smallest (or first kk for append)
      for (int i = 0; i < n; i++) order[i] = i;
      if (!append)
        for (int i = 0; i < n; i++)
          for (int j = i + 1; j < n; j++)
            if (vals[order[j]] < vals[order[i]]) begin tmp = order[i]; order[i] = order[j]; order[j] = tmp; end
      checks++;
      if (int'(count) != ((n < kk) ? n : kk)) begin failures++; $display("FAIL count %0d", count); end
      for (int i = 0; i < kk && i < n; i++) begin
        checks++;
        if (int'(idx_o[i]) != order[i] || fp16_to_real(dist_o[i]) != vals[order[i]]) begin
          failures++;
          $display("FAIL trial %0d pos %0d got idx %0d exp %0d", trial, i, idx_o[i], order[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
