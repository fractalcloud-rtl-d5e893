// tb_mlp_ctrl: groups of k gathered rows from two interleaved streams go
// through the 16 x 16 layer, ReLU and max-pool. Each buffer write must hold
// the FP16 reference of max_j relu(x_j W) at out_base + centre and appear
// 2N cycles after the group's last row entered.
module tb_mlp_ctrl;
  import fc_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 16, K = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic relu, w_ld, in_valid, in_ready, in_last, in_unit, wr_en, idle;
  logic [12:0] out_base, wr_addr;
  logic [3:0] w_row;
  fp16_t w_data [N], in_row [N], wr_data [N];
  logic [13:0] in_centre;
  logic [31:0] rows_in, groups_out;
  mlp_ctrl #(.N(N), .MAX_PTS(8192), .FEAT_ROWS(8192)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  fp16_t W [N][N];
  fp16_t acc [2][N];
  int    pos [2], ctr [2];
  fp16_t eq [$][N];
  int    ea [$], ec [$];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && wr_en) begin
    checks++;
    if (eq.size() == 0) begin failures++; $display("FAIL unexpected write"); end
    else begin
      if (wr_data != eq[0] || int'(wr_addr) != ea[0] || cyc - ec[0] != 2 * N) begin
        failures++; if (failures < 10) $display("FAIL write addr %0d/%0d latency %0d", wr_addr, ea[0], cyc - ec[0]);
      end
      eq.pop_front(); void'(ea.pop_front()); void'(ec.pop_front());
    end
  end
  initial begin
    fp16_t v;
    int u, ng;
    relu = 1; w_ld = 0; w_row = 0; in_valid = 0; in_last = 0; in_unit = 0; in_centre = 0; out_base = 13'd100;
    for (int i = 0; i < N; i++) begin w_data[i] = 0; in_row[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); w_ld = 1; w_row = 4'(i);
      for (int j = 0; j < N; j++) begin W[i][j] = real_to_fp16((real'($urandom_range(31)) - 16.0) / 8.0); w_data[j] = W[i][j]; end
    end
    @(negedge clk); w_ld = 0;
    pos[0] = 0; pos[1] = 0; ctr[0] = 0; ctr[1] = 1000; ng = 0;
    for (int r = 0; r < 400; r++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (!in_valid) continue;
      u = $urandom_range(1);
      in_unit = 1'(u); in_centre = 14'(ctr[u]); in_last = (pos[u] == K - 1);
      for (int i = 0; i < N; i++) in_row[i] = real_to_fp16((real'($urandom_range(31)) - 16.0) / 8.0);
      for (int j = 0; j < N; j++) begin
        v = FP16_ZERO;
        for (int i = 0; i < N; i++) v = fp16_add(v, fp16_mul(in_row[i], W[i][j]));
        if (v[15]) v = FP16_ZERO;
        acc[u][j] = (pos[u] == 0) ? v : fp16_max(acc[u][j], v);
      end
      if (in_last) begin
        eq.push_back(acc[u]); ea.push_back(100 + ctr[u]); ec.push_back(cyc); ng++;
        pos[u] = 0; ctr[u]++;
      end else pos[u]++;
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N) @(negedge clk);
    checks++; if (eq.size() != 0 || int'(groups_out) != ng || !idle) begin failures++; $display("FAIL leftover %0d groups %0d/%0d", eq.size(), groups_out, ng); end
    checks++; if (!in_ready) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
