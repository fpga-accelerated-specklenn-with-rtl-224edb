// conv2d -- streaming 2-D convolution layer (valid padding, stride 1) with
//           bias and optional ReLU.
//
// Input: one beat per pixel in raster order (row by row, left to right),
// each beat an IN_CH-lane vector of fp32 values. Output: one beat per output
// position, (IN_W-K+1) x (IN_H-K+1) of them in raster order, each an
// OUT_CH-lane vector; `last` is set on the final position of the frame.
//
// K-1 line buffers hold the previous rows and a KxK window register shifts
// in one column per accepted pixel, so each pixel is read once, as it
// streams in. When a pixel completes a window, the window is held and
// PAR fp32_dot units compute PAR output channels per cycle: OUT_CH/PAR
// cycles per output position. While they work the input is stalled
// (s.ready low), and the output register stalls the layer when the next
// layer is not ready. With PAR = OUT_CH a new pixel is taken every cycle.
//
// The network (kernel size, channel counts, image sizes, ReLU after the
// convolution) follows the SpeckleNN model; the line-buffer structure, the
// PAR folding and the stall rules are this design's choice. Weights and
// biases sit in registers, written through `pw` at any time between frames:
// weight offset ((oc*IN_CH + ic)*K + kh)*K + kw, bias offset oc.
module conv2d
  import snl_pkg::*;
#(
  parameter int IN_CH  = 1,
  parameter int OUT_CH = 7,
  parameter int IN_W   = 65,
  parameter int IN_H   = 65,
  parameter int K      = 5,
  parameter int PAR    = 7,     // output channels computed per cycle
  parameter bit RELU   = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t pw,
  vec_stream_if.dst s,          // IN_CH lanes
  vec_stream_if.src m           // OUT_CH lanes
);
  localparam int NG   = OUT_CH / PAR;    // cycles per output position
  localparam int TAPS = K * K * IN_CH;   // products per output value
  localparam int NW   = OUT_CH * TAPS;
  localparam int GW   = (NG > 1) ? $clog2(NG) : 1;

  typedef logic [IN_CH-1:0][31:0] pix_t;

  // ---------------- parameters (weights and biases) ----------------
  fp32_t wts  [NW];
  fp32_t bias [OUT_CH];

  always_ff @(posedge clk) begin
    if (pw.we) begin
      if (pw.bias) begin
        if (int'(pw.addr) < OUT_CH) bias[int'(pw.addr)] <= pw.data;
      end else begin
        if (int'(pw.addr) < NW) wts[int'(pw.addr)] <= pw.data;
      end
    end
  end

  // ---------------- window formation ----------------
  pix_t lb  [K-1][IN_W];       // lb[K-2] is the row just above the current one
  pix_t win [K][K];            // win[kh][kw], kh = 0 oldest row
  pix_t newcol [K];
  int unsigned r, c;           // position of the next input pixel
  logic job_valid, job_last;
  logic [GW-1:0] grp;
  logic out_free, finish, accept;

  assign out_free = !m.valid || m.ready;
  assign finish   = job_valid && (int'(grp) == NG - 1) && out_free;
  assign s.ready  = !job_valid || finish;
  assign accept   = s.valid && s.ready;

  always_comb begin
    for (int k = 0; k < K - 1; k++) newcol[k] = lb[k][c];
    newcol[K-1] = s.data;
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      for (int k = 0; k < K - 2; k++) lb[k][c] <= lb[k+1][c];
      lb[K-2][c] <= s.data;
      for (int i = 0; i < K; i++) begin
        for (int j = 0; j < K - 1; j++) win[i][j] <= win[i][j+1];
        win[i][K-1] <= newcol[i];
      end
    end
  end

  // ---------------- compute: PAR dot products per cycle ----------------
  logic [PAR-1:0][TAPS-1:0][31:0] wsel;
  logic [TAPS-1:0][31:0]          wflat;
  fp32_t                          bsel [PAR];
  logic [PAR-1:0][31:0]           y;
  logic [OUT_CH-1:0][31:0]        res, full, act;

  always_comb begin
    for (int kh = 0; kh < K; kh++)
      for (int kw = 0; kw < K; kw++)
        for (int ic = 0; ic < IN_CH; ic++)
          wflat[(ic*K + kh)*K + kw] = win[kh][kw][ic];
    for (int p = 0; p < PAR; p++) begin
      for (int t = 0; t < TAPS; t++) wsel[p][t] = wts[(int'(grp)*PAR + p)*TAPS + t];
      bsel[p] = bias[int'(grp)*PAR + p];
    end
  end

  for (genvar p = 0; p < PAR; p++) begin : g_dot
    fp32_dot #(.N(TAPS)) u_dot (.a(wflat), .b(wsel[p]), .bias(bsel[p]), .y(y[p]));
  end

  always_comb begin
    full = res;
    for (int p = 0; p < PAR; p++) full[(NG-1)*PAR + p] = y[p];
  end

  if (RELU) begin : g_relu
    relu #(.N(OUT_CH)) u_relu (.x(full), .y(act));
  end else begin : g_norelu
    assign act = full;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= 0; c <= 0;
      job_valid <= 1'b0; job_last <= 1'b0; grp <= '0;
      m.valid <= 1'b0; m.last <= 1'b0; m.data <= '0;
      res <= '0;
    end else begin
      if (m.valid && m.ready) m.valid <= 1'b0;
      if (job_valid && !finish && int'(grp) != NG - 1) begin
        for (int p = 0; p < PAR; p++) res[int'(grp)*PAR + p] <= y[p];
        grp <= grp + 1'b1;
      end
      if (finish) begin
        m.data    <= act;
        m.last    <= job_last;
        m.valid   <= 1'b1;
        grp       <= '0;
        job_valid <= 1'b0;
      end
      if (accept) begin
        if (r >= K - 1 && c >= K - 1) begin
          job_valid <= 1'b1;
          job_last  <= (r == IN_H - 1) && (c == IN_W - 1);
        end
        if (c == IN_W - 1) begin
          c <= 0;
          r <= (r == IN_H - 1) ? 0 : r + 1;
        end else begin
          c <= c + 1;
        end
      end
    end
  end

  initial begin
    assert (OUT_CH % PAR == 0) else $fatal(1, "conv2d: PAR must divide OUT_CH");
  end
endmodule
