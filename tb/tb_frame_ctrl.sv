// tb_frame_ctrl -- frame control with a 10-pixel frame. Checks ap_idle,
// that exactly 10 pixels pass (rx_tready falls after the last), the `last`
// marker, that backpressure from the layer reaches rx_tready, the one-cycle
// ap_done after out_done, back-to-back frames while ap_start stays high,
// and the sticky frame_err on a misplaced tLast.
module tb_frame_ctrl;
  localparam int NP = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ap_start = 0, ap_done, ap_idle, busy, rx_tready, out_done = 0, frame_err;
  logic [31:0] rx_tdata = '0;
  logic rx_tlast = 0, rx_tvalid = 0;
  int checks = 0, failures = 0, passed = 0, stalls = 0, dones = 0;

  vec_stream_if #(.N(1)) m (.clk, .rst_n);
  frame_ctrl #(.N_PIXELS(NP)) dut (.clk, .rst_n, .ap_start, .ap_done, .ap_idle, .busy,
    .rx_tdata, .rx_tkeep(4'hf), .rx_tstrb(4'hf), .rx_tlast, .rx_tvalid, .rx_tready,
    .m, .out_done, .frame_err);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && ap_done) dones++;

  // layer side: random ready, check data and last
  initial begin
    m.ready = 0;
    forever begin
      @(negedge clk);
      m.ready = 1'($urandom_range(1));
      #1;
      if (m.valid && !m.ready) stalls++;
      if (m.valid && m.ready) begin
        chk(m.data[0] == 32'(passed % NP), "pixel data");
        chk(m.last == ((passed % NP) == NP - 1), "last marker");
        chk(rx_tready == 1'b1, "rx_tready follows layer ready");
        passed++;
      end
    end
  end

  task automatic send_frame(int bad_last_at);
    for (int i = 0; i < NP; i++) begin
      @(negedge clk);
      rx_tvalid = 1; rx_tdata = i; rx_tlast = (i == NP - 1) || (i == bad_last_at);
      #1;
      while (!rx_tready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    rx_tvalid = 1; rx_tdata = 32'hdead; rx_tlast = 0;    // extra word must wait
    repeat (5) begin
      #1; chk(!rx_tready, "no pixel beyond the frame"); @(negedge clk);
    end
    rx_tvalid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ap_idle && !busy, "idle after reset");
    rx_tvalid = 1; #1; chk(!rx_tready, "no data before ap_start"); rx_tvalid = 0;
    ap_start = 1;
    @(negedge clk);
    chk(!ap_idle && !busy, "not busy before the first pixel");
    send_frame(-1);
    chk(!ap_idle && busy, "busy until output done");
    @(negedge clk); out_done = 1; @(negedge clk); out_done = 0;
    #1; chk(ap_done, "ap_done after out_done");
    chk(!ap_idle, "next frame starts while ap_start held");
    chk(!frame_err, "no error on good frame");
    ap_start = 0;
    send_frame(4);                                      // tLast on pixel 5
    chk(frame_err, "frame_err on misplaced tLast");
    @(negedge clk); out_done = 1; @(negedge clk); out_done = 0;
    @(negedge clk);
    chk(ap_idle, "idle after the frame when ap_start low");
    chk(dones == 2, "two ap_done pulses");
    chk(passed == 2 * NP, "exactly two frames passed");
    chk(stalls > 0, "backpressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
