// tb_systolic_array: 16 x 16 array, random weights, 200 input rows streamed
// back to back (one per cycle) with random gaps; every output row must
// equal the FP16 reference y_j = sum_i x_i w_ij (accumulated in channel
// order) and leave exactly 2N-1 cycles after its input, tag intact.
module tb_systolic_array;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_ld, in_valid, out_valid;
  logic [3:0] w_row;
  fp16_t w_data [N], in_vec [N], out_vec [N];
  logic [15:0] in_tag, out_tag;
  systolic_array #(.N(N), .TAG_W(16)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  fp16_t W [N][N];
  fp16_t expq [$][N];
  int    tq [$], cq [$];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      if (out_vec != expq[0] || int'(out_tag) != tq[0] || cyc - cq[0] != 2 * N - 1) begin
        failures++; if (failures < 10) $display("FAIL row tag %0d/%0d latency %0d", out_tag, tq[0], cyc - cq[0]);
      end
      expq.pop_front(); void'(tq.pop_front()); void'(cq.pop_front());
    end
  end
  initial begin
    fp16_t y [N], v;
    w_ld = 0; w_row = 0; in_valid = 0; in_tag = 0;
    for (int i = 0; i < N; i++) begin w_data[i] = 0; in_vec[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); w_ld = 1; w_row = 4'(i);
      for (int j = 0; j < N; j++) begin W[i][j] = real_to_fp16((real'($urandom_range(31)) - 16.0) / 8.0); w_data[j] = W[i][j]; end
    end
    @(negedge clk); w_ld = 0;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      if (in_valid) begin
        for (int i = 0; i < N; i++) in_vec[i] = real_to_fp16((real'($urandom_range(31)) - 16.0) / 8.0);
        for (int j = 0; j < N; j++) begin
          v = FP16_ZERO;
          for (int i = 0; i < N; i++) v = fp16_add(v, fp16_mul(in_vec[i], W[i][j]));
          y[j] = v;
        end
        in_tag = 16'(r);
        expq.push_back(y); tq.push_back(r); cq.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d rows missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
