// dense -- fully connected layer with bias and optional ReLU.
//
// Input: IN_N values arriving as IN_N/IN_LANES beats of IN_LANES lanes. The
// lanes of beat p are the channels of one spatial position, so element
// (lane ch, beat p) is flattened input index ch*(IN_N/IN_LANES) + p, the
// channel-major order of a (C, H, W) tensor flattened in the usual way.
// Output: OUT_N beats of one fp32 value each, neuron 0 first, `last` on the
// final neuron.
//
// One input element is consumed per cycle: its weight row (OUT_N words) is
// read from weight_ram and OUT_N multiply-add units update OUT_N
// accumulators in parallel (the first element adds to the bias). After the
// last element the accumulators are sent out one per cycle; the input is
// stalled until the last neuron has been taken. The sizes (588 -> 100 with
// ReLU, 100 -> 50 without) follow the SpeckleNN model; the one-element-per-
// cycle schedule and the serial output are this design's choice.
// Weight offset {out_index, in_index[9:0]}, bias offset = out_index.
module dense
  import snl_pkg::*;
#(
  parameter int IN_N     = 588,
  parameter int OUT_N    = 100,
  parameter int IN_LANES = 3,
  parameter bit RELU     = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t pw,
  vec_stream_if.dst s,          // IN_LANES lanes
  vec_stream_if.src m           // 1 lane
);
  localparam int STRIDE = IN_N / IN_LANES;
  localparam int RW     = (IN_N > 1) ? $clog2(IN_N) : 1;
  localparam int LW     = (OUT_N > 1) ? $clog2(OUT_N) : 1;
  localparam int OW     = (OUT_N > 1) ? $clog2(OUT_N) : 1;

  // ---------------- parameters ----------------
  fp32_t bias [OUT_N];
  logic  w_we;
  always_comb w_we = pw.we && !pw.bias && (int'(pw.addr[9:0]) < IN_N)
                     && (int'(pw.addr[16:10]) < OUT_N);

  always_ff @(posedge clk) begin
    if (pw.we && pw.bias && int'(pw.addr) < OUT_N) bias[int'(pw.addr)] <= pw.data;
  end

  // ---------------- stage A: issue one element per cycle ----------------
  logic [IN_LANES-1:0][31:0] hv;
  logic        hv_valid;
  int unsigned lane, pos;
  logic        issue, is_last_elem, accept, draining, out_phase;
  logic [RW-1:0] rd_row;
  logic [OUT_N-1:0][31:0] wrow;

  assign issue        = hv_valid;
  assign is_last_elem = (pos == STRIDE - 1) && (lane == IN_LANES - 1);
  assign rd_row       = RW'(lane * STRIDE + pos);
  assign s.ready      = !draining && !out_phase &&
                        (!hv_valid || (lane == IN_LANES - 1 && !is_last_elem));
  assign accept       = s.valid && s.ready;

  weight_ram #(.DEPTH(IN_N), .LANES(OUT_N)) u_wram (
    .clk   (clk),
    .we    (w_we),
    .wrow  (RW'(pw.addr[9:0])),
    .wlane (LW'(pw.addr[16:10])),
    .wdata (pw.data),
    .re    (issue),
    .rrow  (rd_row),
    .rdata (wrow)
  );

  // ---------------- stage B: OUT_N multiply-accumulates ----------------
  logic        mac_v, mac_first, mac_last;
  fp32_t       mac_x;
  logic [OUT_N-1:0][31:0] acc, addend, nxt;

  always_comb begin
    for (int j = 0; j < OUT_N; j++) addend[j] = mac_first ? bias[j] : acc[j];
  end

  for (genvar j = 0; j < OUT_N; j++) begin : g_mac
    fp32_dot #(.N(1)) u_mac (.a(mac_x), .b(wrow[j]), .bias(addend[j]), .y(nxt[j]));
  end

  // ---------------- output ----------------
  logic [OW-1:0] oidx;
  logic [0:0][31:0] cur, cur_act;
  assign cur[0] = acc[oidx];
  if (RELU) begin : g_relu
    relu #(.N(1)) u_relu (.x(cur), .y(cur_act));
  end else begin : g_norelu
    assign cur_act = cur;
  end
  assign m.valid = out_phase;
  assign m.data  = cur_act;
  assign m.last  = (int'(oidx) == OUT_N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hv <= '0; hv_valid <= 1'b0; lane <= 0; pos <= 0;
      mac_v <= 1'b0; mac_first <= 1'b0; mac_last <= 1'b0; mac_x <= '0;
      acc <= '0; draining <= 1'b0; out_phase <= 1'b0; oidx <= '0;
    end else begin
      // stage A
      mac_v <= issue;
      if (issue) begin
        mac_x     <= hv[lane];
        mac_first <= (pos == 0) && (lane == 0);
        mac_last  <= is_last_elem;
        if (is_last_elem) draining <= 1'b1;
        if (lane == IN_LANES - 1) begin
          lane     <= 0;
          pos      <= is_last_elem ? 0 : pos + 1;
          hv_valid <= 1'b0;
        end else begin
          lane <= lane + 1;
        end
      end
      if (accept) begin
        hv       <= s.data;
        hv_valid <= 1'b1;
      end
      // stage B
      if (mac_v) begin
        acc <= nxt;
        if (mac_last) begin
          out_phase <= 1'b1;
          oidx      <= '0;
        end
      end
      // output
      if (out_phase && m.ready) begin
        if (int'(oidx) == OUT_N - 1) begin
          out_phase <= 1'b0;
          draining  <= 1'b0;
        end else begin
          oidx <= oidx + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (IN_N % IN_LANES == 0) else $fatal(1, "dense: IN_LANES must divide IN_N");
    assert (IN_N <= 1024 && OUT_N <= 128) else $fatal(1, "dense: exceeds the address map");
  end
endmodule
