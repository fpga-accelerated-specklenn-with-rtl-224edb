// speckle_nn_top -- SpeckleNN embedding inference core.
//
// A 65 x 65 single-precision image enters on the receive AXI-Stream, one
// pixel per beat in raster order, and the 50 fp32 values of its embedding
// leave on the transmit AXI-Stream, tLast on the 50th. The layers are
// chained by valid/ready streams and work on the data as it flows:
//
//   rx -> frame_ctrl -> conv0 (5x5, 1->7, ReLU)  65x65 -> 7@61x61
//      -> pool0 (2x2)                            -> 7@31x31
//      -> conv1 (5x5, 7->3, ReLU)                -> 3@27x27
//      -> pool1 (2x2)                            -> 3@14x14 = 588 values
//      -> dense0 (588 -> 100, ReLU) -> dense1 (100 -> 50) -> tx
//
// Backpressure runs from the transmit port back to rx_tready. Weights and
// biases (64,660 words) are written over the AXI4-Lite write channels at
// run time (param_loader); writes wait while a frame is in flight.
// ap_start / ap_done / ap_idle give HLS-style block control. One frame is
// processed at a time; with the receive side always valid and the transmit
// side always ready a frame takes 5,039 cycles from its first pixel to the
// last embedding word (the published FPGA build: 9,003 cycles).
// Network shapes follow the SpeckleNN model; the parallelism of each layer
// (CONV0_PAR, CONV1_PAR) and the interfaces' details are this design's.
module speckle_nn_top
  import snl_pkg::*;
#(
  parameter int CONV0_PAR = C0,     // conv0 output channels per cycle
  parameter int CONV1_PAR = 1       // conv1 output channels per cycle
) (
  input  logic        clk,
  input  logic        rst_n,
  // block control
  input  logic        ap_start,
  output logic        ap_done,
  output logic        ap_idle,
  output logic        frame_err,
  // image in (AXI-Stream)
  input  logic [31:0] rx_tdata,
  input  logic [3:0]  rx_tkeep,
  input  logic [3:0]  rx_tstrb,
  input  logic        rx_tlast,
  input  logic        rx_tvalid,
  output logic        rx_tready,
  // embedding out (AXI-Stream)
  output logic [31:0] tx_tdata,
  output logic [3:0]  tx_tkeep,
  output logic [3:0]  tx_tstrb,
  output logic        tx_tlast,
  output logic        tx_tvalid,
  input  logic        tx_tready,
  // weight and bias loading (AXI4-Lite, write channels)
  input  logic [PADDR_W+1:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready
);
  logic      busy, out_done;
  param_wr_t pw [4];

  vec_stream_if #(.N(1))      st_in (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(C0))     st_c0 (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(C0))     st_p0 (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(C1))     st_c1 (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(C1))     st_p1 (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(1))      st_d0 (.clk(clk), .rst_n(rst_n));
  vec_stream_if #(.N(1))      st_d1 (.clk(clk), .rst_n(rst_n));

  param_loader u_loader (
    .clk, .rst_n, .hold(busy),
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .pw
  );

  frame_ctrl u_ctrl (
    .clk, .rst_n, .ap_start, .ap_done, .ap_idle, .busy,
    .rx_tdata, .rx_tkeep, .rx_tstrb, .rx_tlast, .rx_tvalid, .rx_tready,
    .m(st_in), .out_done, .frame_err
  );

  conv2d #(.IN_CH(1), .OUT_CH(C0), .IN_W(IMG), .IN_H(IMG), .K(KSZ),
           .PAR(CONV0_PAR), .RELU(1'b1))
    u_conv0 (.clk, .rst_n, .pw(pw[0]), .s(st_in), .m(st_c0));

  maxpool2d #(.CH(C0), .IN_W(S0), .IN_H(S0))
    u_pool0 (.clk, .rst_n, .s(st_c0), .m(st_p0));

  conv2d #(.IN_CH(C0), .OUT_CH(C1), .IN_W(P0), .IN_H(P0), .K(KSZ),
           .PAR(CONV1_PAR), .RELU(1'b1))
    u_conv1 (.clk, .rst_n, .pw(pw[1]), .s(st_p0), .m(st_c1));

  maxpool2d #(.CH(C1), .IN_W(S1), .IN_H(S1))
    u_pool1 (.clk, .rst_n, .s(st_c1), .m(st_p1));

  dense #(.IN_N(D0_IN), .OUT_N(D0), .IN_LANES(C1), .RELU(1'b1))
    u_dense0 (.clk, .rst_n, .pw(pw[2]), .s(st_p1), .m(st_d0));

  dense #(.IN_N(D0), .OUT_N(D1), .IN_LANES(1), .RELU(1'b0))
    u_dense1 (.clk, .rst_n, .pw(pw[3]), .s(st_d0), .m(st_d1));

  assign tx_tdata    = st_d1.data[0];
  assign tx_tvalid   = st_d1.valid;
  assign tx_tlast    = st_d1.last;
  assign tx_tkeep    = 4'hf;
  assign tx_tstrb    = 4'hf;
  assign st_d1.ready = tx_tready;
  assign out_done    = tx_tvalid && tx_tready && tx_tlast;
endmodule
