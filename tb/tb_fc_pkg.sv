// tb_fc_pkg: FP16 helpers against real arithmetic.
// Operands are drawn from grids that binary16 holds exactly and whose sums
// and products are exact, so every result must match bit for bit; ordering
// (fp16_lt/gt/max/min) is checked on random signed values, fp16_half on
// halving, and fp16_dist2 on grid points.
module tb_fc_pkg;
  import fc_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(fp16_t got, real exp, string what);
    checks++;
    if (got != real_to_fp16(exp) && !(got[14:0] == 0 && real_to_fp16(exp) == 0)) begin
      failures++; if (failures < 10) $display("FAIL %s got %h exp %h (%f)", what, got, real_to_fp16(exp), exp);
    end
  endtask
  initial begin
    real a, b;
    fp16_t fa, fb;
    point_t p, q;
    for (int i = 0; i < 2000; i++) begin
      a = (real'($urandom_range(63)) - 32.0) / 8.0;
      b = (real'($urandom_range(63)) - 32.0) / 8.0;
      fa = real_to_fp16(a); fb = real_to_fp16(b);
      chk(fp16_add(fa, fb), a + b, "add");
      chk(fp16_sub(fa, fb), a - b, "sub");
      chk(fp16_mul(fa, fb), a * b, "mul");
      chk(fp16_half(fa), a / 2.0, "half");
      checks++; if (fp16_lt(fa, fb) != (a < b)) failures++;
      checks++; if (fp16_gt(fa, fb) != (a > b)) failures++;
      chk(fp16_max(fa, fb), (a > b) ? a : b, "max");
      chk(fp16_min(fa, fb), (a < b) ? a : b, "min");
      p = '{real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0)};
      q = '{real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0), real_to_fp16(real'($urandom_range(15)) / 8.0)};
      chk(fp16_dist2(p, q), (fp16_to_real(p.x) - fp16_to_real(q.x)) ** 2 + (fp16_to_real(p.y) - fp16_to_real(q.y)) ** 2 +
                            (fp16_to_real(p.z) - fp16_to_real(q.z)) ** 2, "dist2");
    end
    // saturation and dimension helpers
    chk(fp16_mul(16'h7800, 16'h7800), 65504.0, "saturate");
    checks++; if (pt_dim('{16'h1, 16'h2, 16'h3}, 2'd1) != 16'h2) failures++;
    checks++; if (next_dim(2'd2) != 2'd0 || next_dim(2'd0) != 2'd1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
