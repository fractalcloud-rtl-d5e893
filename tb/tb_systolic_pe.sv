// tb_systolic_pe: one MAC cell; after every clock a_out must equal the
// previous a_in and p_out the FP16 value p_in + a_in * w, with w loaded
// at random times.
module tb_systolic_pe;
  import fc_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, w_ld;
  always #5 clk = ~clk;
  fp16_t w_in, a_in, p_in, a_out, p_out, w_ref, ea, ep;
  systolic_pe dut (.*);
  int checks = 0, failures = 0;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    w_ld = 0; w_in = 0; a_in = 0; p_in = 0; w_ref = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      w_ld = ($urandom_range(9) == 0);
      w_in = real_to_fp16((real'($urandom_range(63)) - 32.0) / 16.0);
      a_in = real_to_fp16((real'($urandom_range(63)) - 32.0) / 16.0);
      p_in = real_to_fp16((real'($urandom_range(255)) - 128.0) / 16.0);
      if (w_ld) begin
        // a load and a multiply in the same cycle use the old weight
        ep = fp16_add(p_in, fp16_mul(a_in, w_ref)); w_ref = w_in;
      end else ep = fp16_add(p_in, fp16_mul(a_in, w_ref));
      ea = a_in;
      @(negedge clk);
      checks++;
      if (a_out != ea || p_out != ep) begin failures++; $display("FAIL a %h/%h p %h/%h", a_out, ea, p_out, ep); end
      w_ld = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
