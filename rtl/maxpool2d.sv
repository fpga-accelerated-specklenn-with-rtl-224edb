// maxpool2d -- streaming 2x2, stride-2 max pooling over CH channels.
//
// Input: IN_W x IN_H positions in raster order, one CH-lane vector per beat.
// Output: ceil(IN_W/2) x ceil(IN_H/2) vectors in raster order, `last` on the
// final one. When a side is odd the last window on that side covers a single
// row or column (61 -> 31 and 27 -> 14 in this network); this matches
// ceil-mode / "same" pooling and is the choice that reproduces the layer
// sizes of the SpeckleNN model.
//
// Even columns are held in a register; the maximum of each horizontal pair
// of an even row goes into a one-row buffer, and on the odd row the pair
// maximum is compared with it and the result sent out. Output is one
// register stage; the layer takes a new input whenever that register is
// free or being read (one beat per cycle).
module maxpool2d
  import snl_pkg::*;
#(
  parameter int CH   = 7,
  parameter int IN_W = 61,
  parameter int IN_H = 61
) (
  input  logic      clk,
  input  logic      rst_n,
  vec_stream_if.dst s,          // CH lanes
  vec_stream_if.src m           // CH lanes
);
  localparam int OUT_W = (IN_W + 1) / 2;
  typedef logic [CH-1:0][31:0] vec_t;

  function automatic vec_t vmax(vec_t a, vec_t b);
    vec_t v;
    for (int i = 0; i < CH; i++) v[i] = fp32_gt(b[i], a[i]) ? b[i] : a[i];
    return v;
  endfunction

  vec_t hold;
  vec_t rowbuf [OUT_W];
  vec_t pairv, vout;
  int unsigned r, c;
  logic pair_done, emit, accept;

  assign s.ready = !m.valid || m.ready;
  assign accept  = s.valid && s.ready;

  always_comb begin
    pairv     = c[0] ? vmax(hold, s.data) : s.data;
    pair_done = c[0] || (c == IN_W - 1);
    vout      = r[0] ? vmax(rowbuf[c >> 1], pairv) : pairv;
    emit      = pair_done && (r[0] || (r == IN_H - 1));
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      if (!c[0]) hold <= s.data;
      if (pair_done && !r[0]) rowbuf[c >> 1] <= pairv;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= 0; c <= 0;
      m.valid <= 1'b0; m.last <= 1'b0; m.data <= '0;
    end else begin
      if (m.valid && m.ready) m.valid <= 1'b0;
      if (accept) begin
        if (emit) begin
          m.data  <= vout;
          m.last  <= (r == IN_H - 1) && (c == IN_W - 1);
          m.valid <= 1'b1;
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
endmodule
