// vec_stream_if -- valid/ready stream carrying N fp32 lanes per beat.
//
// Used between the layers of the inference pipeline. A beat moves when valid
// and ready are both high on a rising clock edge; `last` marks the final beat
// of a frame (the last pixel, feature vector or neuron). The source must hold
// data, last and valid steady until the beat is taken (checked below).
interface vec_stream_if #(parameter int N = 1) (input logic clk, input logic rst_n);
  logic [N-1:0][31:0] data;
  logic               valid;
  logic               ready;
  logic               last;

  modport src (output data, valid, last, input ready);
  modport dst (input data, valid, last, output ready);

  // A source may not withdraw or change a beat that is waiting.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (valid && !ready) |=> (valid && $stable(data) && $stable(last));
  endproperty
  a_hold: assert property (p_hold) else $error("vec_stream_if: beat changed while stalled");
endinterface
