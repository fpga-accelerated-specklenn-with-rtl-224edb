// tb_relu -- checks relu on random positive, negative and zero lanes.
module tb_relu;
  localparam int N = 4;
  logic [N-1:0][31:0] x, y;
  int checks = 0, failures = 0;

  relu #(.N(N)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k < N; k++) begin
        x[k] = $urandom;
        if (i % 7 == 0) x[k] = {1'($urandom), 31'd0};       // +0 / -0
      end
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (y[k] !== (x[k][31] ? 32'd0 : x[k])) begin
          failures++;
          $display("FAIL relu(%h) = %h", x[k], y[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
