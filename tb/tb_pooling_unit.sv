// tb_pooling_unit: interleaved groups from two slots, random lengths, each
// pooled row compared with the element-wise maximum of its group and
// checked to appear exactly one cycle after the group's last row.
module tb_pooling_unit;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_last, out_valid;
  fp16_t in_row [L], out_row [L];
  logic [0:0] in_slot;
  logic [13:0] in_tag, out_tag;
  logic [31:0] groups;
  pooling_unit #(.LANES(L), .SLOTS(2), .TAG_W(14)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  fp16_t acc [2][L];
  int    len [2], pos [2], tagc [2];
  fp16_t exp_row [L];
  int    exp_tag, pend;
  initial begin
    int s, ng;
    in_valid = 0; in_last = 0; in_slot = 0; in_tag = 0;
    for (int l = 0; l < L; l++) in_row[l] = 0;
    pend = 0; ng = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int u = 0; u < 2; u++) begin len[u] = 1 + $urandom_range(7); pos[u] = 0; tagc[u] = u * 1000; end
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      // check output of previous cycle
      checks++;
      if (out_valid != (pend != 0)) begin failures++; $display("FAIL out_valid timing"); end
      if (pend != 0) begin
        checks++;
        if (out_tag != 14'(exp_tag) || out_row != exp_row) begin failures++; $display("FAIL pooled row tag %0d", out_tag); end
      end
      pend = 0;
      if ($urandom_range(3) == 0) begin in_valid = 0; continue; end
      s = $urandom_range(1);
      in_valid = 1; in_slot = 1'(s);
      for (int l = 0; l < L; l++) begin
        in_row[l] = real_to_fp16((real'($urandom_range(255)) - 128.0) / 16.0);
        acc[s][l] = (pos[s] == 0) ? in_row[l] : fp16_max(acc[s][l], in_row[l]);
      end
      in_tag = 14'(tagc[s]);
      in_last = (pos[s] + 1 == len[s]);
      if (in_last) begin
        exp_row = acc[s]; exp_tag = tagc[s]; pend = 1; ng++;
        pos[s] = 0; len[s] = 1 + $urandom_range(7); tagc[s]++;
      end else pos[s]++;
    end
    @(negedge clk); in_valid = 0;
    checks++; if (out_valid != (pend != 0)) failures++;
    if (pend != 0) begin checks++; if (out_row != exp_row) failures++; end
    checks++; if (int'(groups) != ng) begin failures++; $display("FAIL groups %0d exp %0d", groups, ng); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
