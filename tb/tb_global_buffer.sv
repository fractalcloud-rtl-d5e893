// tb_global_buffer: fill every row through the write port, then drive
// random read requests on the three ports (held until granted) while
// writes continue. Checks: returned rows match a model, data arrive the
// cycle after the grant, no bank serves two accesses in a cycle, and the
// conflict counter equals the refusals seen here.
module tb_global_buffer;
  import fc_pkg::*;
  localparam int L = 16, R = 256, B = 4, P = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [7:0] wr_addr;
  fp16_t wr_data [L];
  logic rd_req [P], rd_gnt [P], rd_valid [P];
  logic [7:0] rd_addr [P];
  fp16_t rd_data [P][L];
  logic [31:0] conflicts;
  global_buffer #(.LANES(L), .ROWS(R), .BANKS(B), .NRD(P)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  fp16_t M [R][L];
  fp16_t pend [P][L];
  logic  pv [P];
  int    refused = 0;
  initial begin
    int used [B];
    wr_en = 0; wr_addr = 0;
    for (int p = 0; p < P; p++) begin rd_req[p] = 0; rd_addr[p] = 0; pv[p] = 0; end
    for (int l = 0; l < L; l++) wr_data[l] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(r);
      for (int l = 0; l < L; l++) begin wr_data[l] = 16'($urandom); M[r][l] = wr_data[l]; end
    end
    @(negedge clk); wr_en = 0;
    for (int c = 0; c < 3000; c++) begin
      // new requests / writes at the negative edge
      for (int p = 0; p < P; p++)
        if (!rd_req[p] && $urandom_range(2) != 0) begin rd_req[p] = 1; rd_addr[p] = 8'($urandom_range(R - 1)); end
      wr_en = ($urandom_range(4) == 0);
      wr_addr = 8'($urandom_range(R - 1));
      for (int l = 0; l < L; l++) wr_data[l] = 16'($urandom);
      #1;
      for (int b = 0; b < B; b++) used[b] = 0;
      if (wr_en) used[int'(wr_addr) % B]++;
      for (int p = 0; p < P; p++) begin
        if (rd_gnt[p]) begin used[int'(rd_addr[p]) % B]++; pend[p] = M[rd_addr[p]]; end
        else if (rd_req[p]) refused++;
        pv[p] = rd_gnt[p];
      end
      for (int b = 0; b < B; b++) begin checks++; if (used[b] > 1) failures++; end
      @(posedge clk);
      if (wr_en) M[wr_addr] = wr_data;
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rd_valid[p] != pv[p] || (pv[p] && rd_data[p] != pend[p])) begin failures++; if (failures < 10) $display("FAIL port %0d", p); end
        if (pv[p]) rd_req[p] = 0;
      end
      wr_en = 0;
    end
    checks++; if (int'(conflicts) != refused || refused == 0) begin failures++; $display("FAIL conflicts %0d refused %0d", conflicts, refused); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
