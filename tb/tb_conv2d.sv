// tb_conv2d -- checks conv2d with 2 input and 4 output channels, a 3x3
// kernel and PAR = 2 (two cycles per output position) on an 8 x 6 map.
// Weights are loaded through the parameter port; outputs are compared with
// a double-precision convolution (bias, ReLU) within a rounding bound.
// Frame 1 runs with random input gaps and random output ready; frame 2 at
// full rate checks the stall count: one extra cycle per output position.
module tb_conv2d;
  import tb_fp_pkg::*;
  import snl_pkg::*;
  localparam int IC = 2, OC = 4, K = 3, W = 8, H = 6, PAR = 2;
  localparam int OW = W - K + 1, OH = H - K + 1, NG = OC / PAR;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t pw;
  vec_stream_if #(.N(IC)) s (.clk, .rst_n);
  vec_stream_if #(.N(OC)) m (.clk, .rst_n);
  conv2d #(.IN_CH(IC), .OUT_CH(OC), .IN_W(W), .IN_H(H), .K(K), .PAR(PAR), .RELU(1'b1))
    dut (.clk, .rst_n, .pw, .s, .m);

  int checks = 0, failures = 0;
  logic [31:0] wt [OC*IC*K*K];
  logic [31:0] bs [OC];
  logic [IC-1:0][31:0] img [2][H][W];
  int frame_out = 0, nout = 0, stalls = 0, relu_zero = 0;
  bit full_rate = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expected(int f, int oc, int oy, int ox, output real v, output real mag);
    v = from_f32(bs[oc]); mag = absr(v);
    for (int ic = 0; ic < IC; ic++)
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++) begin
          real p;
          p = from_f32(img[f][oy+kh][ox+kw][ic]) * from_f32(wt[((oc*IC + ic)*K + kh)*K + kw]);
          v += p; mag += absr(p);
        end
    if (v < 0.0) v = 0.0;
  endtask

  initial begin
    m.ready = 0;
    forever begin
      @(negedge clk);
      m.ready = full_rate ? 1'b1 : 1'($urandom_range(1));
      #1;
      if (rst_n && m.valid && m.ready) begin
        int oy, ox;
        oy = nout / OW; ox = nout % OW;
        for (int oc = 0; oc < OC; oc++) begin
          real v, mag;
          expected(frame_out, oc, oy, ox, v, mag);
          checks++;
          if (absr(from_f32(m.data[oc]) - v) > 1e-6 * mag + 1e-30 || m.data[oc][31]) begin
            failures++;
            $display("FAIL frame %0d (%0d,%0d) oc%0d: %f expected %f", frame_out, oy, ox, oc,
                     from_f32(m.data[oc]), v);
          end
          if (m.data[oc] == 0) relu_zero++;
        end
        checks++;
        if (m.last !== (nout == OW*OH - 1)) begin failures++; $display("FAIL last at %0d", nout); end
        nout++;
        if (nout == OW*OH) begin nout = 0; frame_out++; end
      end
    end
  end

  initial begin
    s.valid = 0; s.data = '0; s.last = 0; pw = '0;
    foreach (wt[i]) wt[i] = rand_uniform(-1.0, 1.0);
    foreach (bs[i]) bs[i] = rand_uniform(-0.5, 0.5);
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int ic = 0; ic < IC; ic++)
            img[f][y][x][ic] = rand_uniform(-1.0, 1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the parameters
    foreach (wt[i]) begin
      @(negedge clk); pw = '{we: 1'b1, bias: 1'b0, addr: POFF_W'(i), data: wt[i]};
    end
    foreach (bs[i]) begin
      @(negedge clk); pw = '{we: 1'b1, bias: 1'b1, addr: POFF_W'(i), data: bs[i]};
    end
    @(negedge clk); pw = '0;
    for (int f = 0; f < 2; f++) begin
      full_rate = (f == 1);
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while (!full_rate && $urandom_range(3) == 0) begin
            s.valid = 0; @(negedge clk);
          end
          s.valid = 1; s.data = img[f][y][x]; s.last = (y == H-1 && x == W-1);
          #1;
          while (!s.ready) begin
            if (full_rate) stalls++;
            @(negedge clk); #1;
          end
        end
      @(negedge clk);
      s.valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (frame_out != 2) begin failures++; $display("FAIL %0d frames out", frame_out); end
    checks++;
    // at full rate every window-completing pixel but the last holds the input
    // for NG-1 extra cycles
    if (stalls != (NG - 1) * (OW*OH - 1)) begin
      failures++; $display("FAIL %0d stalls, expected %0d", stalls, (NG - 1) * (OW*OH - 1));
    end
    checks++;
    if (relu_zero == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
