// snl_pkg -- types and constants shared by the SpeckleNN inference core.
//
// The network is the reduced SpeckleNN embedding model: a 65x65 single-channel
// image goes through conv 5x5 (7 filters) + ReLU, 2x2 max-pool, conv 5x5
// (3 filters) + ReLU, 2x2 max-pool, a 100-unit dense layer with ReLU and a
// 50-unit dense layer whose outputs are the embedding. All sizes below are
// the network's own; every value is an IEEE-754 single-precision float.
//
// The parameter address map (word addresses) is this design's choice:
//   addr[19:17] region  : 0 conv0 W, 1 conv0 b, 2 conv1 W, 3 conv1 b,
//                         4 dense0 W, 5 dense0 b, 6 dense1 W, 7 dense1 b
//   addr[16:0]  offset  : conv W  = ((oc*IN_CH + ic)*5 + kh)*5 + kw
//                         dense W = {out_index, in_index[9:0]}
//                         bias    = output channel / neuron index
// Conv and dense weights keep the usual (out, in, kh, kw) / (out, in) order.
package snl_pkg;

  typedef logic [31:0] fp32_t;

  // Network geometry
  localparam int IMG      = 65;            // input image side
  localparam int KSZ      = 5;             // convolution kernel side
  localparam int C0       = 7;             // conv0 filters
  localparam int C1       = 3;             // conv1 filters
  localparam int S0       = IMG - KSZ + 1; // 61 : conv0 output side
  localparam int P0       = (S0 + 1) / 2;  // 31 : pool0 output side
  localparam int S1       = P0 - KSZ + 1;  // 27 : conv1 output side
  localparam int P1       = (S1 + 1) / 2;  // 14 : pool1 output side
  localparam int D0_IN    = C1 * P1 * P1;  // 588
  localparam int D0       = 100;           // dense0 units
  localparam int D1       = 50;            // dense1 units (embedding size)
  localparam int PIXELS   = IMG * IMG;     // 4225 pixels per frame

  // Parameter write bus
  localparam int PADDR_W  = 20;            // word address width
  localparam int POFF_W   = 17;            // offset width inside a region

  typedef enum logic [2:0] {
    R_CONV0_W = 3'd0, R_CONV0_B = 3'd1, R_CONV1_W = 3'd2, R_CONV1_B = 3'd3,
    R_DENSE0_W = 3'd4, R_DENSE0_B = 3'd5, R_DENSE1_W = 3'd6, R_DENSE1_B = 3'd7
  } pregion_e;

  // One parameter write, already steered to a layer.
  typedef struct packed {
    logic              we;     // write strobe
    logic              bias;   // 1: bias region, 0: weight region
    logic [POFF_W-1:0] addr;   // offset inside the region
    fp32_t             data;
  } param_wr_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_QNAN = 32'h7fc0_0000;
  localparam fp32_t FP_INF  = 32'h7f80_0000;

  // a > b for finite fp32 values (+0 and -0 compare equal).
  function automatic logic fp32_gt(fp32_t a, fp32_t b);
    logic az, bz;
    az = (a[30:0] == '0);
    bz = (b[30:0] == '0);
    if (az && bz)              return 1'b0;
    if (a[31] != b[31])        return b[31];          // positive > negative
    if (!a[31])                return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];                         // both negative
  endfunction

endpackage
