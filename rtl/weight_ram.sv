// weight_ram -- weight memory of a dense layer.
//
// DEPTH rows of LANES fp32 words: row i holds the weights that input element
// i contributes to each of the LANES outputs, so one synchronous read (re,
// rrow; data in rdata on the next cycle) feeds every output accumulator at
// once. Writes come from the parameter loader one word at a time (row, lane).
// Each lane is a separate DEPTH-word memory with one write and one read port
// (one block RAM per lane on an FPGA). Contents are not reset: the weights
// are loaded before inference. Layout and ports are this design's choice.
module weight_ram #(
  parameter int DEPTH = 588,
  parameter int LANES = 100,
  localparam int RW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [RW-1:0]          wrow,
  input  logic [LW-1:0]          wlane,
  input  logic [31:0]            wdata,
  input  logic                   re,
  input  logic [RW-1:0]          rrow,
  output logic [LANES-1:0][31:0] rdata
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [31:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && int'(wlane) == l) mem[wrow] <= wdata;
      if (re) rdata[l] <= mem[rrow];
    end
  end
endmodule
