// tb_maxpool2d -- checks maxpool2d on a 7 x 5 two-channel map (odd sides,
// so the last row and column form one-wide windows), over two frames with
// random valid gaps on the input and random ready on the output, and checks
// that with an always-ready output the layer never stalls its input.
module tb_maxpool2d;
  import tb_fp_pkg::*;
  localparam int CH = 2, W = 7, H = 5, OW = (W + 1) / 2, OH = (H + 1) / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  vec_stream_if #(.N(CH)) s (.clk, .rst_n);
  vec_stream_if #(.N(CH)) m (.clk, .rst_n);
  maxpool2d #(.CH(CH), .IN_W(W), .IN_H(H)) dut (.clk, .rst_n, .s, .m);

  int checks = 0, failures = 0;
  logic [CH-1:0][31:0] img [2][H][W];
  int frame_out = 0, nout = 0, stalls = 0;
  bit  full_rate = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: max over the (clipped) 2x2 window
  function automatic logic [31:0] ref_max(int f, int ch, int oy, int ox);
    logic [31:0] best = img[f][2*oy][2*ox][ch];
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++)
        if (2*oy + dy < H && 2*ox + dx < W)
          if (from_f32(img[f][2*oy+dy][2*ox+dx][ch]) > from_f32(best))
            best = img[f][2*oy+dy][2*ox+dx][ch];
    return best;
  endfunction

  // sink
  initial begin
    m.ready = 0;
    forever begin
      @(negedge clk);
      m.ready = full_rate ? 1'b1 : 1'($urandom_range(1));
      #1;
      if (rst_n && m.valid && m.ready) begin
        int oy, ox;
        oy = nout / OW; ox = nout % OW;
        for (int ch = 0; ch < CH; ch++) begin
          checks++;
          if (m.data[ch] !== ref_max(frame_out, ch, oy, ox)) begin
            failures++;
            $display("FAIL frame %0d (%0d,%0d) ch%0d: %h expected %h", frame_out, oy, ox, ch,
                     m.data[ch], ref_max(frame_out, ch, oy, ox));
          end
        end
        checks++;
        if (m.last !== (nout == OW*OH - 1)) begin
          failures++;
          $display("FAIL last flag at output %0d", nout);
        end
        nout++;
        if (nout == OW*OH) begin nout = 0; frame_out++; end
      end
    end
  end

  initial begin
    s.valid = 0; s.data = '0; s.last = 0;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int ch = 0; ch < CH; ch++)
            img[f][y][x][ch] = rand_uniform(-4.0, 4.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
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
    if (stalls != 0) begin failures++; $display("FAIL %0d stalls at full rate", stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
