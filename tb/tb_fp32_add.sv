// tb_fp32_add -- checks fp32_add against a double-precision reference.
// Random operands of both signs with exponents close together (exact in
// double), far apart, exact cancellations and special values.
module tb_fp32_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check(logic [31:0] aa, logic [31:0] bb, logic [31:0] ee);
    a = aa; b = bb; #1;
    checks++;
    if (y !== ee) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", aa, bb, y, ee);
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
      int ex;
      ex = 30 + int'($urandom_range(190));
      x  = rand_f32(ex, ex);
      if (i % 4 == 0)      z = rand_f32(ex - 1, ex + 1);
      else if (i % 4 == 1) z = rand_f32(ex - 28, ex + 28);
      else if (i % 4 == 2) z = {~x[31], x[30:8], 8'($urandom)};  // near cancellation
      else                 z = rand_f32(ex - 3, ex);
      exp_y = to_f32(from_f32(x) + from_f32(z));
      if (exp_y[30:0] == 0) exp_y = 32'h0;                // exact cancellation gives +0
      check(x, z, exp_y);
    end
    check(32'h3f800000, 32'h3f800000, 32'h40000000);   // 1+1
    check(32'h3f800000, 32'hbf800000, 32'h00000000);   // 1-1 = +0
    check(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1+2^-24: tie, stays even
    check(32'h3f800001, 32'h33800000, 32'h3f800002);   // tie, rounds up to even
    check(32'h3f800000, 32'hb3000000, 32'h3f7fffff + 32'h1);  // 1-2^-25 rounds to 1
    check(32'h4b800000, 32'h00000000, 32'h4b800000);   // x+0
    check(32'h80000000, 32'h80000000, 32'h80000000);   // -0+-0
    check(32'h7f800000, 32'hff800000, 32'h7fc00000);   // inf-inf
    check(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    check(32'h00800000, 32'h80800001, 32'h80000000);   // underflow flushes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
