// frame_ctrl -- block-level control and AXI-Stream receive side.
//
// Handshake of the kind HLS kernels use: the core is idle (ap_idle high)
// until ap_start is seen; it then admits exactly N_PIXELS 32-bit pixels from
// the receive stream into the first layer (rx_tready follows that layer's
// ready), marks the last one, and refuses further data. When the final
// embedding word has left the core (out_done) ap_done is high for one cycle
// and the core returns to idle, or starts the next frame at once if
// ap_start is still high. `busy` holds the parameter loader off while any
// pixel of a frame is inside the core: from the first accepted pixel until
// the last embedding word has left (not while the core merely waits for
// the first pixel, so weights can be changed between back-to-back frames). The frame size (65 x 65) is the network's; tLast must
// come with pixel 4225 and tKeep/tStrb must be all ones: any other case sets
// the sticky frame_err flag (cleared by reset) but the frame still runs by
// count. The state machine and the error rule are this design's choices.
module frame_ctrl
  import snl_pkg::*;
#(
  parameter int N_PIXELS = PIXELS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ap_start,
  output logic        ap_done,
  output logic        ap_idle,
  output logic        busy,
  input  logic [31:0] rx_tdata,
  input  logic [3:0]  rx_tkeep,
  input  logic [3:0]  rx_tstrb,
  input  logic        rx_tlast,
  input  logic        rx_tvalid,
  output logic        rx_tready,
  vec_stream_if.src   m,            // 1 lane, to the first layer
  input  logic        out_done,
  output logic        frame_err
);
  typedef enum logic [1:0] {S_IDLE, S_RECV, S_WAIT} state_e;
  state_e      state;
  int unsigned cnt;
  logic        last_px, beat;

  assign last_px   = (cnt == N_PIXELS - 1);
  assign m.valid   = (state == S_RECV) && rx_tvalid;
  assign m.data    = rx_tdata;
  assign m.last    = last_px;
  assign rx_tready = (state == S_RECV) && m.ready;
  assign beat      = rx_tvalid && rx_tready;
  assign ap_idle   = (state == S_IDLE);
  assign busy      = (state == S_WAIT) || (state == S_RECV && cnt != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= 0;
      ap_done   <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      ap_done <= 1'b0;
      unique case (state)
        S_IDLE: if (ap_start) begin
          state <= S_RECV;
          cnt   <= 0;
        end
        S_RECV: if (beat) begin
          if ((rx_tlast != last_px) || (rx_tkeep != 4'hf) || (rx_tstrb != 4'hf))
            frame_err <= 1'b1;
          if (last_px) state <= S_WAIT;
          else         cnt   <= cnt + 1;
        end
        S_WAIT: if (out_done) begin
          ap_done <= 1'b1;
          if (ap_start) begin
            state <= S_RECV;
            cnt   <= 0;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
