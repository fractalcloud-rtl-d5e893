// tb_distance_unit: random grid points; the squared distance is computed in
// double precision and the FP16 result must match within the truncation
// error of the FP16 datapath. Also checks the one-cycle latency and tags.
module tb_distance_unit;
  import fc_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  point_t a, b;
  logic [9:0] in_tag, out_tag;
  fp16_t dist_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  distance_unit #(.TAG_W(10)) dut (.clk, .rst_n, .in_valid, .a, .b, .in_tag, .out_valid, .dist_out, .out_tag);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_d, got, dx, dy, dz;
    in_valid = 0; a = '0; b = '0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      a = '{grid_coord(256), grid_coord(256), grid_coord(256)};
      b = '{grid_coord(256), grid_coord(256), grid_coord(256)};
      if (t % 3 == 0) b = a;
      in_valid = 1; in_tag = 10'(t);
      dx = fp16_to_real(a.x) - fp16_to_real(b.x);
      dy = fp16_to_real(a.y) - fp16_to_real(b.y);
      dz = fp16_to_real(a.z) - fp16_to_real(b.z);
      ref_d = dx*dx + dy*dy + dz*dz;
      @(negedge clk);
      in_valid = 0;
      got = fp16_to_real(dist_out);
      checks++;
      if (!out_valid || out_tag != 10'(t) || rabs(got - ref_d) > ref_d * 0.004 + 1e-6) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d got %f exp %f", t, got, ref_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
