// tb_fp32_dot -- checks fp32_dot. For N = 1 and N = 2 the exact rounding
// sequence (products, then the tree, then the bias) is reproduced; for
// N = 25 the result is compared with a double-precision sum within a bound
// of a few single-precision rounding errors per term.
module tb_fp32_dot;
  import tb_fp_pkg::*;
  logic [24:0][31:0] a25, b25;
  logic [0:0][31:0]  a1, b1;
  logic [1:0][31:0]  a2, b2;
  logic [31:0] bias, y25, y1, y2;
  int checks = 0, failures = 0;

  fp32_dot #(.N(25)) dut25 (.a(a25), .b(b25), .bias(bias), .y(y25));
  fp32_dot #(.N(1))  dut1  (.a(a1),  .b(b1),  .bias(bias), .y(y1));
  fp32_dot #(.N(2))  dut2  (.a(a2),  .b(b2),  .bias(bias), .y(y2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      real s, mag, p0, p1;
      bias = rand_uniform(-1.0, 1.0);
      s = from_f32(bias); mag = absr(s);
      for (int k = 0; k < 25; k++) begin
        a25[k] = rand_uniform(-2.0, 2.0);
        b25[k] = rand_uniform(-1.0, 1.0);
        s   += from_f32(a25[k]) * from_f32(b25[k]);
        mag += absr(from_f32(a25[k]) * from_f32(b25[k]));
      end
      a1[0] = a25[0]; b1[0] = b25[0];
      a2[0] = a25[1]; b2[0] = b25[1]; a2[1] = a25[2]; b2[1] = b25[2];
      #1;
      checks++;
      if (absr(from_f32(y25) - s) > 1e-6 * mag) begin
        failures++;
        $display("FAIL N=25: %h (%f) expected %f", y25, from_f32(y25), s);
      end
      checks++;
      if (y1 !== to_f32(from_f32(bias) + rnd(from_f32(a1[0]) * from_f32(b1[0])))) begin
        failures++;
        $display("FAIL N=1: %h", y1);
      end
      p0 = rnd(from_f32(a2[0]) * from_f32(b2[0]));
      p1 = rnd(from_f32(a2[1]) * from_f32(b2[1]));
      checks++;
      if (y2 !== to_f32(from_f32(bias) + rnd(p0 + p1))) begin
        failures++;
        $display("FAIL N=2: %h", y2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
