// tb_fp32_mul -- checks fp32_mul against a double-precision reference.
// Random normal operands (including products that overflow and underflow)
// and the special cases zero, infinity and NaN.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(logic [31:0] aa, logic [31:0] bb, logic [31:0] ee);
    a = aa; b = bb; #1;
    checks++;
    if (y !== ee) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", aa, bb, y, ee);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, z;
      if (i < 15000) begin x = rand_f32(100, 154); z = rand_f32(100, 154); end
      else           begin x = rand_f32(1, 254);   z = rand_f32(1, 254);   end
      exp_y = to_f32(from_f32(x) * from_f32(z));
      // the hardware does not round up into the smallest normal from below
      if (exp_y[30:23] == 8'd1 && exp_y[22:0] == 0) continue;
      check(x, z, exp_y);
    end
    // x * 1.5 is an exact tie whenever x's mantissa is odd: tests ties-to-even
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] x, z;
      x = rand_f32(110, 140);
      z = {1'($urandom), 8'(120 + $urandom_range(15)), 23'h400000};
      check(x, z, to_f32(from_f32(x) * from_f32(z)));
    end
    check(32'h3f800000, 32'h3f800000, 32'h3f800000);   // 1*1
    check(32'h40000000, 32'hc0400000, 32'hc0c00000);   // 2*-3 = -6
    check(32'h00000000, 32'h40400000, 32'h00000000);   // 0*3
    check(32'h80000000, 32'h40400000, 32'h80000000);   // -0*3
    check(32'h7f800000, 32'h40400000, 32'h7f800000);   // inf*3
    check(32'h7f800000, 32'h00000000, 32'h7fc00000);   // inf*0
    check(32'h7fc00000, 32'h3f800000, 32'h7fc00000);   // nan
    check(32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow
    check(32'h00800000, 32'h00800000, 32'h00000000);   // underflow
    check(32'h3f800001, 32'h3f800001, 32'h3f800002);   // rounding
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
