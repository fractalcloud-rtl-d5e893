// tb_window_check: exhaustive check of the mask-window lowest-one detector.
// Every 8-bit window at several addresses is compared against a direct
// search for the first set bit.
module tb_window_check;
  localparam int W = 8;
  localparam int AW = 10;
  logic [W-1:0]  window;
  logic [AW-1:0] addr, next_addr;
  logic          hit;
  int checks = 0, failures = 0;

  window_check #(.W(W), .ADDR_W(AW)) dut (.window, .addr, .next_addr, .hit);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_off;
    logic exp_hit;
    for (int a = 0; a < 4; a++) begin
      for (int w = 0; w < (1 << W); w++) begin
        window = W'(w);
        addr   = AW'(a * 37);
        #1;
        exp_off = W; exp_hit = 0;
        for (int i = 0; i < W; i++) if (!exp_hit && w[i]) begin exp_off = i + 1; exp_hit = 1; end
        checks++;
        if (hit !== exp_hit || next_addr !== AW'(a * 37 + exp_off)) begin
          failures++;
          $display("FAIL w=%b addr=%0d next=%0d hit=%0d exp %0d", window, addr, next_addr, hit, a*37+exp_off);
        end
      end
    end
    // the figure's example: mask P4..P0 = 1 1 0 0 1, current P0 -> next P3
    window = 8'b0000_1100; addr = 0; #1;
    checks++; if (next_addr !== 10'd3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
