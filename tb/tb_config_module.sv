// tb_config_module: a random stream of instructions for four targets with
// lengths 1, 2, 2, 3 words is written through the cfg port while target
// ready flags toggle at random. Each dispatched instruction must arrive in
// order, on its target's strobe, with its words intact, only while that
// target is ready; a bad target word is dropped and counted; waiting for a
// busy target must have occurred.
module tb_config_module;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid, cfg_ready, empty;
  logic [31:0] cfg_data, instrs, wait_cycles, bad_target;
  logic [3:0] tgt_ready, ins_valid;
  logic [127:0] ins_data;
  config_module #(.NT(4), .MAXW(4), .DEPTH(8), .HOLD(2), .LEN({4'd3, 4'd2, 4'd2, 4'd1})) dut (.*);
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int len [4] = '{1, 2, 2, 3};
  int et [$];
  logic [127:0] ed [$];
  logic [3:0] rdy_q;
  always @(negedge clk) tgt_ready = 4'($urandom);
  always @(posedge clk) rdy_q <= tgt_ready;
  always @(negedge clk) if (rst_n && ins_valid != 0) begin
    checks++;
    if (et.size() == 0) failures++;
    else begin
      if (ins_valid != (4'd1 << et[0]) || ins_data != ed[0] || !rdy_q[et[0]]) begin
        failures++; if (failures < 10) $display("FAIL ins %b exp tgt %0d", ins_valid, et[0]);
      end
      void'(et.pop_front()); ed.pop_front();
    end
  end
  task automatic push(logic [31:0] w);
    @(negedge clk); cfg_valid = 1; cfg_data = w;
    @(posedge clk); while (!cfg_ready) @(posedge clk);
    #1 cfg_valid = 0;
  endtask
  initial begin
    int t;
    logic [127:0] d;
    logic [31:0] w;
    cfg_valid = 0; cfg_data = 0; tgt_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      t = $urandom_range(3);
      d = '0;
      for (int j = 0; j < len[t]; j++) begin
        w = $urandom;
        if (j == 0) w[31:28] = 4'(t);
        d[32*j +: 32] = w;
      end
      et.push_back(t); ed.push_back(d);
      for (int j = 0; j < len[t]; j++) push(d[32*j +: 32]);
      if (i == 70) push(32'hF000_0000);     // no such target
    end
    repeat (400) @(negedge clk);
    checks++; if (et.size() != 0) begin failures++; $display("FAIL %0d instructions missing", et.size()); end
    checks++; if (instrs != 150 || bad_target != 1 || wait_cycles == 0 || !empty) begin failures++; $display("FAIL counters %0d %0d %0d", instrs, bad_target, wait_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
