// tb_speckle_nn_top -- end-to-end test of the full-size inference core.
//
// Loads all 64,660 weights and biases over AXI4-Lite, streams 65 x 65 images
// in and checks the 50 embedding values of each frame against a double-
// precision model of the network (conv, ReLU, ceil-mode 2x2 max-pool, dense)
// within a tolerance for single-precision rounding. Three frames:
//   1. rx always valid, tx always ready: the latency from the first pixel
//      to the last embedding word must not exceed the 9,003 cycles measured
//      on the reference FPGA build; a weight write issued mid-frame must be
//      held until the frame is done.
//   2. back to back (ap_start held), random rx gaps and random tx ready.
//   3. after reloading the conv0 biases and all dense1 weights (run-time
//      model update) and with tLast on the wrong pixel: frame_err must rise
//      and the outputs must follow the new weights.
// Each mechanism (input backpressure, output backpressure, held parameter
// write, back-to-back start, model reload, frame error) is counted and
// must occur at least once.
module tb_speckle_nn_top;
  import tb_fp_pkg::*;
  import snl_pkg::*;
  localparam int PAPER_LATENCY = 9003;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ap_start = 0, ap_done, ap_idle, frame_err;
  logic [31:0] rx_tdata = '0;
  logic        rx_tlast = 0, rx_tvalid = 0, rx_tready;
  logic [31:0] tx_tdata;
  logic [3:0]  tx_tkeep, tx_tstrb;
  logic        tx_tlast, tx_tvalid, tx_tready = 0;
  logic [21:0] awaddr = '0;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid;
  logic [31:0] wdata = '0;
  logic [1:0]  bresp;

  speckle_nn_top dut (
    .clk, .rst_n, .ap_start, .ap_done, .ap_idle, .frame_err,
    .rx_tdata, .rx_tkeep(4'hf), .rx_tstrb(4'hf), .rx_tlast, .rx_tvalid, .rx_tready,
    .tx_tdata, .tx_tkeep, .tx_tstrb, .tx_tlast, .tx_tvalid, .tx_tready,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_rx_stall = 0, n_tx_stall = 0, n_wr_held = 0, n_b2b = 0, n_reload = 0, n_ferr = 0;

  // model
  logic [31:0] w0 [C0][KSZ][KSZ];
  logic [31:0] b0 [C0];
  logic [31:0] w1 [C1][C0][KSZ][KSZ];
  logic [31:0] b1 [C1];
  logic [31:0] w2 [D0][D0_IN];
  logic [31:0] b2 [D0];
  logic [31:0] w3 [D1][D0];
  logic [31:0] b3 [D1];
  logic [31:0] img [2][IMG][IMG];
  real ref_out [D1];
  real f0 [C0][S0][S0];
  real q0 [C0][P0][P0];
  real f1 [C1][S1][S1];
  real q1 [C1][P1][P1];
  real h0 [D0];

  task automatic model(int im);
    for (int c = 0; c < C0; c++)
      for (int y = 0; y < S0; y++)
        for (int x = 0; x < S0; x++) begin
          real v = 0.0;
          v = from_f32(b0[c]);
          for (int kh = 0; kh < KSZ; kh++)
            for (int kw = 0; kw < KSZ; kw++)
              v += from_f32(img[im][y+kh][x+kw]) * from_f32(w0[c][kh][kw]);
          f0[c][y][x] = (v > 0.0) ? v : 0.0;
        end
    for (int c = 0; c < C0; c++)
      for (int y = 0; y < P0; y++)
        for (int x = 0; x < P0; x++) begin
          real v = 0.0;
          v = f0[c][2*y][2*x];
          if (2*x+1 < S0 && f0[c][2*y][2*x+1] > v) v = f0[c][2*y][2*x+1];
          if (2*y+1 < S0 && f0[c][2*y+1][2*x] > v) v = f0[c][2*y+1][2*x];
          if (2*y+1 < S0 && 2*x+1 < S0 && f0[c][2*y+1][2*x+1] > v) v = f0[c][2*y+1][2*x+1];
          q0[c][y][x] = v;
        end
    for (int c = 0; c < C1; c++)
      for (int y = 0; y < S1; y++)
        for (int x = 0; x < S1; x++) begin
          real v = 0.0;
          v = from_f32(b1[c]);
          for (int ic = 0; ic < C0; ic++)
            for (int kh = 0; kh < KSZ; kh++)
              for (int kw = 0; kw < KSZ; kw++)
                v += q0[ic][y+kh][x+kw] * from_f32(w1[c][ic][kh][kw]);
          f1[c][y][x] = (v > 0.0) ? v : 0.0;
        end
    for (int c = 0; c < C1; c++)
      for (int y = 0; y < P1; y++)
        for (int x = 0; x < P1; x++) begin
          real v = 0.0;
          v = f1[c][2*y][2*x];
          if (2*x+1 < S1 && f1[c][2*y][2*x+1] > v) v = f1[c][2*y][2*x+1];
          if (2*y+1 < S1 && f1[c][2*y+1][2*x] > v) v = f1[c][2*y+1][2*x];
          if (2*y+1 < S1 && 2*x+1 < S1 && f1[c][2*y+1][2*x+1] > v) v = f1[c][2*y+1][2*x+1];
          q1[c][y][x] = v;
        end
    for (int o = 0; o < D0; o++) begin
      real v = 0.0;
      v = from_f32(b2[o]);
      for (int c = 0; c < C1; c++)
        for (int y = 0; y < P1; y++)
          for (int x = 0; x < P1; x++)
            v += q1[c][y][x] * from_f32(w2[o][c*P1*P1 + y*P1 + x]);
      h0[o] = (v > 0.0) ? v : 0.0;
    end
    for (int o = 0; o < D1; o++) begin
      real v = 0.0;
      v = from_f32(b3[o]);
      for (int i = 0; i < D0; i++) v += h0[i] * from_f32(w3[o][i]);
      ref_out[o] = v;
    end
  endtask

  // ---------------- AXI4-Lite writes ----------------
  task automatic axil_write(pregion_e reg_id, int off, logic [31:0] d, output int waited);
    waited = 0;
    @(negedge clk);
    awaddr = {reg_id, POFF_W'(off), 2'b00}; awvalid = 1; wdata = d; wvalid = 1;
    #1;
    while (!(awready && wready)) begin waited++; @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
  endtask

  task automatic load_all();
    int wt;
    for (int c = 0; c < C0; c++) for (int kh = 0; kh < KSZ; kh++) for (int kw = 0; kw < KSZ; kw++)
      axil_write(R_CONV0_W, (c*KSZ + kh)*KSZ + kw, w0[c][kh][kw], wt);
    for (int c = 0; c < C0; c++) axil_write(R_CONV0_B, c, b0[c], wt);
    for (int c = 0; c < C1; c++) for (int ic = 0; ic < C0; ic++)
      for (int kh = 0; kh < KSZ; kh++) for (int kw = 0; kw < KSZ; kw++)
        axil_write(R_CONV1_W, ((c*C0 + ic)*KSZ + kh)*KSZ + kw, w1[c][ic][kh][kw], wt);
    for (int c = 0; c < C1; c++) axil_write(R_CONV1_B, c, b1[c], wt);
    for (int o = 0; o < D0; o++) for (int i = 0; i < D0_IN; i++)
      axil_write(R_DENSE0_W, (o << 10) | i, w2[o][i], wt);
    for (int o = 0; o < D0; o++) axil_write(R_DENSE0_B, o, b2[o], wt);
    for (int o = 0; o < D1; o++) for (int i = 0; i < D0; i++)
      axil_write(R_DENSE1_W, (o << 10) | i, w3[o][i], wt);
    for (int o = 0; o < D1; o++) axil_write(R_DENSE1_B, o, b3[o], wt);
  endtask

  // ---------------- streams ----------------
  bit  rand_rx = 0, rand_tx = 0;
  int  bad_last_at = -1;
  int  nout = 0, frames_out = 0;
  logic [31:0] got [D1];
  longint cyc = 0, t_first = -1, t_last = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (rst_n && rx_tvalid && !rx_tready && !ap_idle) n_rx_stall++;
    if (rst_n && tx_tvalid && !tx_tready) n_tx_stall++;
    if (rst_n && rx_tvalid && rx_tready && t_first < 0) t_first = cyc;
  end

  initial begin
    tx_tready = 0;
    forever begin
      @(negedge clk);
      tx_tready = rand_tx ? 1'($urandom_range(1)) : 1'b1;
      #1;
      if (rst_n && tx_tvalid && tx_tready) begin
        got[nout] = tx_tdata;
        checks++;
        if (tx_tlast !== (nout == D1 - 1) || tx_tkeep !== 4'hf) begin
          failures++; $display("FAIL tlast/tkeep at output %0d", nout);
        end
        nout++;
        if (nout == D1) begin nout = 0; frames_out++; t_last = cyc + 1; end
      end
    end
  end

  task automatic send_image(int im);
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        @(negedge clk);
        while (rand_rx && $urandom_range(7) == 0) begin rx_tvalid = 0; @(negedge clk); end
        rx_tvalid = 1; rx_tdata = img[im][y][x];
        rx_tlast  = (y*IMG + x == PIXELS - 1) || (y*IMG + x == bad_last_at);
        #1;
        while (!rx_tready) begin @(negedge clk); #1; end
      end
    @(negedge clk);
    rx_tvalid = 0; rx_tlast = 0;
  endtask

  task automatic wait_frames(int n);
    while (frames_out < n) @(negedge clk);
  endtask

  task automatic compare(string tag);
    real maxref = 0.0;
    int bad = 0;
    foreach (ref_out[o]) if (absr(ref_out[o]) > maxref) maxref = absr(ref_out[o]);
    for (int o = 0; o < D1; o++) begin
      checks++;
      if (absr(from_f32(got[o]) - ref_out[o]) > 1e-4 * (1.0 + maxref)) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s out[%0d] = %f expected %f", tag, o, from_f32(got[o]), ref_out[o]);
      end
    end
    $display("%s: 50 outputs compared, max |ref| %f, out[0] = %h", tag, maxref, got[0]);
  endtask

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wt;
    longint lat;
    foreach (w0[c, kh, kw]) w0[c][kh][kw] = rand_uniform(-0.3, 0.3);
    foreach (b0[c]) b0[c] = rand_uniform(-0.2, 0.1);
    foreach (w1[c, ic, kh, kw]) w1[c][ic][kh][kw] = rand_uniform(-0.12, 0.12);
    foreach (b1[c]) b1[c] = rand_uniform(-0.1, 0.1);
    foreach (w2[o, i]) w2[o][i] = rand_uniform(-0.1, 0.1);
    foreach (b2[o]) b2[o] = rand_uniform(-0.1, 0.1);
    foreach (w3[o, i]) w3[o][i] = rand_uniform(-0.2, 0.2);
    foreach (b3[o]) b3[o] = rand_uniform(-0.1, 0.1);
    // two images: a bright ring around the centre plus noise, and plain noise
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        real r2;
        r2 = real'((y - 32) * (y - 32) + (x - 32) * (x - 32));
        img[0][y][x] = to_f32(((r2 > 36.0 && r2 < 200.0) ? 2.0 : 0.1) * from_f32(rand_uniform(0.5, 1.0)));
        img[1][y][x] = rand_uniform(0.0, 1.0);
      end

    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    chk(ap_idle, "idle after loading");

    // ---- frame 1: full rate, latency ----
    model(0);
    ap_start = 1;
    fork
      send_image(0);
      begin
        // a write during the frame (rewrites dense1 bias 0 with its own
        // value): it must wait until frame 1 has left the core
        repeat (500) @(negedge clk);
        axil_write(R_DENSE1_B, 0, b3[0], wt);
        if (wt > 0) n_wr_held++;
        chk(frames_out == 1, "parameter write accepted only after the frame");
      end
    join
    // ap_start stays high: frame 2 follows frame 1 without a new start
    wait_frames(1);
    lat = t_last - t_first;
    $display("frame 1 latency: %0d cycles (first pixel to last embedding word), %0d input stall cycles",
             lat, n_rx_stall);
    chk(lat <= PAPER_LATENCY, "latency within the 9003 cycles of the reference build");
    compare("frame 1");
    chk(!ap_idle, "frame 2 started back to back");
    if (!ap_idle) n_b2b++;

    // ---- frame 2: random gaps and backpressure ----
    model(1);
    rand_rx = 1; rand_tx = 1;
    ap_start = 0;
    send_image(1);
    wait_frames(2);
    compare("frame 2");
    rand_rx = 0; rand_tx = 0;
    repeat (5) @(negedge clk);
    chk(ap_idle, "idle after frame 2");
    chk(!frame_err, "no frame error so far");

    // ---- reload part of the model, frame 3 with a bad tLast ----
    foreach (b0[c]) b0[c] = rand_uniform(-0.1, 0.2);
    foreach (w3[o, i]) w3[o][i] = rand_uniform(-0.3, 0.3);
    foreach (b0[c]) axil_write(R_CONV0_B, c, b0[c], wt);
    foreach (w3[o, i]) axil_write(R_DENSE1_W, (o << 10) | i, w3[o][i], wt);
    n_reload++;
    model(0);
    bad_last_at = 100;
    ap_start = 1;
    @(negedge clk); ap_start = 0;
    send_image(0);
    wait_frames(3);
    compare("frame 3 (reloaded model)");
    if (frame_err) n_ferr++;

    $display("mechanisms: rx stall %0d, tx stall %0d, held write %0d, back-to-back %0d, reload %0d, frame error %0d",
             n_rx_stall, n_tx_stall, n_wr_held, n_b2b, n_reload, n_ferr);
    chk(n_rx_stall > 0, "input backpressure occurred");
    chk(n_tx_stall > 0, "output backpressure occurred");
    chk(n_wr_held > 0,  "parameter write held during a frame");
    chk(n_b2b > 0,      "back-to-back frame");
    chk(n_reload > 0,   "model reload");
    chk(n_ferr > 0,     "frame error flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
