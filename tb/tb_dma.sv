// tb_dma: the four descriptor kinds against a DRAM model (3-cycle read
// latency, random stalls except in the bandwidth run). Checks: points,
// buffer rows and weight rows carry the DRAM beats in order to the right
// addresses; stores write each buffer row as two beats; an unstalled load
// of n points takes at most n + 6 cycles (one 16-byte beat per cycle).
module tb_dma;
  import fc_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [1:0] kind;
  logic [31:0] dram_base, dram_addr, beats;
  logic [12:0] loc_base, wr_addr, rd_addr, pt_addr;
  logic [15:0] count;
  logic [127:0] dram_wdata, dram_rdata;
  logic pt_valid, wr_en, rd_req, rd_gnt, rd_valid, w_ld;
  point_t pt_point;
  fp16_t wr_data [L], rd_data [L], w_data [L];
  logic [3:0] w_row;
  dma #(.LANES(L), .BEAT_W(128), .MAX_PTS(8192), .FEAT_ROWS(8192)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [127:0] D(int a);
    return {32'(a * 7 + 1), 32'(a * 5 + 2), 32'(a * 3 + 3), 32'(a)};
  endfunction
  function automatic fp16_t BUF(int r, int l);
    return 16'(r * 17 + l);
  endfunction
  logic stall_en;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [127:0] rq [$];
  int rt [$];
  logic [127:0] wmem [int];
  always_comb dram_gnt = dram_req && !(stall_en && (cyc % 3 == 1));
  always @(posedge clk) begin
    dram_rvalid <= 1'b0;
    if (dram_req && dram_gnt) begin
      if (dram_we) wmem[int'(dram_addr)] = dram_wdata;
      else begin rq.push_back(D(int'(dram_addr))); rt.push_back(cyc + 3); end
    end
    if (rt.size() > 0 && rt[0] <= cyc) begin dram_rvalid <= 1'b1; dram_rdata <= rq.pop_front(); void'(rt.pop_front()); end
  end
  // buffer read model
  always_comb rd_gnt = rd_req && (cyc % 2 == 0);
  always @(posedge clk) begin
    rd_valid <= rd_req && rd_gnt;
    if (rd_req && rd_gnt) for (int l = 0; l < L; l++) rd_data[l] <= BUF(int'(rd_addr), l);
  end
  // sinks
  int np, nr, nw;
  always @(posedge clk) if (rst_n) begin
    logic [127:0] b0, b1;
    if (pt_valid) begin
      checks++; if (pt_point != D(1000 + np)[47:0] || int'(pt_addr) != 5 + np) failures++;
      np++;
    end
    if (wr_en) begin
      b0 = D(2000 + 2 * nr); b1 = D(2000 + 2 * nr + 1);
      checks++;
      if (int'(wr_addr) != 40 + nr) failures++;
      for (int l = 0; l < L; l++) if (wr_data[l] != ((l < 8) ? b0[16*l +: 16] : b1[16*(l-8) +: 16])) begin failures++; break; end
      nr++;
    end
    if (w_ld) begin
      b0 = D(3000 + 2 * nw); b1 = D(3000 + 2 * nw + 1);
      checks++;
      if (int'(w_row) != nw) failures++;
      for (int l = 0; l < L; l++) if (w_data[l] != ((l < 8) ? b0[16*l +: 16] : b1[16*(l-8) +: 16])) begin failures++; break; end
      nw++;
    end
  end
  task automatic run(int kd, int base, int loc, int cnt, output int cycles);
    int t0;
    @(negedge clk); start = 1; kind = 2'(kd); dram_base = base; loc_base = 13'(loc); count = 16'(cnt); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
    @(negedge clk);      // the last item is strobed in the cycle of `done`
  endtask
  initial begin
    int cy;
    logic [127:0] e;
    start = 0; kind = 0; dram_base = 0; loc_base = 0; count = 0; stall_en = 0; np = 0; nr = 0; nw = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0, 1000, 5, 200, cy);
    checks++; if (np != 200 || cy > 206) begin failures++; $display("FAIL points %0d cycles %0d", np, cy); end
    stall_en = 1;
    run(1, 2000, 40, 50, cy);
    checks++; if (nr != 50) begin failures++; $display("FAIL rows %0d", nr); end
    run(2, 3000, 0, 16, cy);
    checks++; if (nw != 16) begin failures++; $display("FAIL weights %0d", nw); end
    run(3, 5000, 70, 30, cy);
    for (int r = 0; r < 30; r++)
      for (int h = 0; h < 2; h++) begin
        for (int e8 = 0; e8 < 8; e8++) e[16*e8 +: 16] = BUF(70 + r, h * 8 + e8);
        checks++;
        if (!wmem.exists(5000 + 2 * r + h) || wmem[5000 + 2 * r + h] != e) failures++;
      end
    checks++; if (beats != 200 + 100 + 32 + 60) begin failures++; $display("FAIL beats %0d", beats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
