// param_loader -- run-time loading of weights and biases over AXI4-Lite.
//
// Retrained weights are written into the running core without rebuilding
// the FPGA image. A host writes one 32-bit float per AXI4-Lite write; the
// byte address is 4 x the word address of the map in snl_pkg (region in
// word-address bits 19:17, offset in bits 16:0). The loader takes an AW and
// a W beat together, in the same cycle, registers the write one cycle later
// on the addressed layer's port (pw[0] conv0, pw[1] conv1, pw[2] dense0,
// pw[3] dense1; `bias` set for the odd regions) and answers OKAY on B.
// A write with a partial strobe is refused (SLVERR) and changes nothing.
// While `hold` is high (a frame is being processed) no write is accepted,
// so a frame is never computed with a half-updated model. Only the write
// channels exist; there is no read-back. The AXI4-Lite subset, the address
// map and the hold rule are this design's choices.
module param_loader
  import snl_pkg::*;
#(
  parameter int AXI_AW = PADDR_W + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hold,
  input  logic [AXI_AW-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output param_wr_t         pw [4]
);
  logic             take;
  logic [PADDR_W-1:0] waddr;
  pregion_e         region;

  assign take           = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid && !hold;
  assign s_axil_awready = take;
  assign s_axil_wready  = take;
  assign waddr          = s_axil_awaddr[PADDR_W+1:2];
  assign region         = pregion_e'(waddr[PADDR_W-1:POFF_W]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= 2'b00;
      for (int i = 0; i < 4; i++) pw[i] <= '0;
    end else begin
      for (int i = 0; i < 4; i++) pw[i].we <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (take) begin
        s_axil_bvalid <= 1'b1;
        if (s_axil_wstrb == 4'hf) begin
          s_axil_bresp <= 2'b00;                      // OKAY
          pw[region[2:1]].we   <= 1'b1;
          pw[region[2:1]].bias <= region[0];
          pw[region[2:1]].addr <= waddr[POFF_W-1:0];
          pw[region[2:1]].data <= s_axil_wdata;
        end else begin
          s_axil_bresp <= 2'b10;                      // SLVERR
        end
      end
    end
  end

  // AXI4-Lite: a response is held until it is taken.
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid)
    else $error("param_loader: B response dropped");
endmodule
