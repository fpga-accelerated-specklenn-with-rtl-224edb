// tb_dense -- checks dense with 12 inputs arriving as 4 beats of 3 lanes
// (channel-major flattening), 5 outputs and ReLU, over three frames with
// random gaps and random output ready; the bias must be reapplied every
// frame. At full rate the input is held for IN_LANES-1 cycles per beat.
module tb_dense;
  import tb_fp_pkg::*;
  import snl_pkg::*;
  localparam int IN_N = 12, OUT_N = 5, L = 3, STRIDE = IN_N / L, NF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t pw;
  vec_stream_if #(.N(L)) s (.clk, .rst_n);
  vec_stream_if #(.N(1)) m (.clk, .rst_n);
  dense #(.IN_N(IN_N), .OUT_N(OUT_N), .IN_LANES(L), .RELU(1'b1)) dut (.clk, .rst_n, .pw, .s, .m);

  int checks = 0, failures = 0;
  logic [31:0] wt [OUT_N][IN_N];
  logic [31:0] bs [OUT_N];
  logic [31:0] x [NF][IN_N];
  int frame_out = 0, nout = 0, stalls = 0, relu_zero = 0;
  bit full_rate = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m.ready = 0;
    forever begin
      @(negedge clk);
      m.ready = full_rate ? 1'b1 : 1'($urandom_range(1));
      #1;
      if (rst_n && m.valid && m.ready) begin
        real v, mag;
        v = from_f32(bs[nout]); mag = absr(v);
        for (int i = 0; i < IN_N; i++) begin
          v   += from_f32(x[frame_out][i]) * from_f32(wt[nout][i]);
          mag += absr(from_f32(x[frame_out][i]) * from_f32(wt[nout][i]));
        end
        if (v < 0.0) v = 0.0;
        checks++;
        if (absr(from_f32(m.data[0]) - v) > 1e-6 * mag || m.data[0][31]) begin
          failures++;
          $display("FAIL frame %0d neuron %0d: %f expected %f", frame_out, nout, from_f32(m.data[0]), v);
        end
        if (m.data[0] == 0) relu_zero++;
        checks++;
        if (m.last !== (nout == OUT_N - 1)) begin failures++; $display("FAIL last at %0d", nout); end
        nout++;
        if (nout == OUT_N) begin nout = 0; frame_out++; end
      end
    end
  end

  initial begin
    s.valid = 0; s.data = '0; s.last = 0; pw = '0;
    foreach (wt[o, i]) wt[o][i] = rand_uniform(-1.0, 1.0);
    foreach (bs[o]) bs[o] = rand_uniform(-1.0, 1.0);
    foreach (x[f, i]) x[f][i] = rand_uniform(0.0, 2.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (wt[o, i]) begin
      @(negedge clk); pw = '{we: 1'b1, bias: 1'b0, addr: {7'(o), 10'(i)}, data: wt[o][i]};
    end
    foreach (bs[o]) begin
      @(negedge clk); pw = '{we: 1'b1, bias: 1'b1, addr: POFF_W'(o), data: bs[o]};
    end
    @(negedge clk); pw = '0;
    for (int f = 0; f < NF; f++) begin
      full_rate = (f == NF - 1);
      for (int p = 0; p < STRIDE; p++) begin
        @(negedge clk);
        while (!full_rate && $urandom_range(3) == 0) begin
          s.valid = 0; @(negedge clk);
        end
        s.valid = 1; s.last = (p == STRIDE - 1);
        for (int ch = 0; ch < L; ch++) s.data[ch] = x[f][ch*STRIDE + p];
        #1;
        while (!s.ready) begin
          if (full_rate && p > 0) stalls++;
          @(negedge clk); #1;
        end
      end
      @(negedge clk);
      s.valid = 0;
    end
    repeat (40) @(posedge clk);
    checks++;
    if (frame_out != NF) begin failures++; $display("FAIL %0d frames out", frame_out); end
    checks++;
    if (stalls != (L - 1) * (STRIDE - 1)) begin
      failures++; $display("FAIL %0d stalls, expected %0d", stalls, (L - 1) * (STRIDE - 1));
    end
    checks++;
    if (relu_zero == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
