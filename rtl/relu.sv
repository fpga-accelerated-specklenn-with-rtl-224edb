// relu -- rectified linear unit on N fp32 lanes.
//
// y[i] = x[i] when x[i] is positive, else +0 (negative numbers and -0 both
// become +0). Follows the ReLU the network applies after each convolution and
// after the first dense layer. Combinational; it only inspects the sign bit.
module relu
  import snl_pkg::*;
#(
  parameter int N = 1
) (
  input  logic [N-1:0][31:0] x,
  output logic [N-1:0][31:0] y
);
  always_comb begin
    for (int i = 0; i < N; i++)
      y[i] = x[i][31] ? FP_ZERO : x[i];
  end
endmodule
