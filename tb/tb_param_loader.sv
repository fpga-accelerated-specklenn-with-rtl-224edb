// tb_param_loader -- AXI4-Lite writes to all eight regions of the address
// map must appear, one cycle after the handshake, on the right layer port
// with the right bias flag, offset and data, and nowhere else. Also: a
// partial-strobe write gets SLVERR and writes nothing; no write is taken
// while `hold` is high; a B response waits for bready.
module tb_param_loader;
  import snl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        hold = 0;
  logic [21:0] awaddr = '0;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [31:0] wdata = '0;
  logic [3:0]  wstrb = '0;
  logic [1:0]  bresp;
  param_wr_t   pw [4];
  int checks = 0, failures = 0;
  int seen_we [4] = '{0, 0, 0, 0};

  param_loader dut (.clk, .rst_n, .hold,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready), .pw);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) for (int i = 0; i < 4; i++) if (pw[i].we) seen_we[i]++;

  // one write; returns bresp. Checks the port one cycle after the handshake.
  task automatic axil_write(logic [19:0] word, logic [31:0] d, logic [3:0] strb, int hold_cycles,
                            output logic [1:0] resp);
    int waited = 0;
    @(negedge clk);
    awaddr = {word, 2'b00}; awvalid = 1; wdata = d; wvalid = 1; wstrb = strb;
    #1;
    while (!(awready && wready)) begin
      waited++;
      @(negedge clk);
      if (waited == hold_cycles) hold = 0;
      #1;
    end
    @(posedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    checks++;
    if (waited != hold_cycles) begin failures++; $display("FAIL waited %0d", waited); end
    // the write appears on the port now
    begin
      int layer; logic isb;
      layer = int'(word[19:18]); isb = word[17];
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (strb == 4'hf && i == layer) begin
          if (!(pw[i].we && pw[i].bias == isb && pw[i].addr == word[16:0] && pw[i].data == d)) begin
            failures++; $display("FAIL port %0d: we=%b bias=%b addr=%h data=%h", i, pw[i].we,
                                 pw[i].bias, pw[i].addr, pw[i].data);
          end
        end else if (pw[i].we) begin
          failures++; $display("FAIL port %0d written", i);
        end
      end
    end
    // B is held until bready
    repeat ($urandom_range(3)) begin
      checks++;
      if (!bvalid) begin failures++; $display("FAIL bvalid dropped"); end
      @(negedge clk);
    end
    bready = 1; resp = bresp;
    @(negedge clk); bready = 0;
    checks++;
    if (bvalid) begin failures++; $display("FAIL bvalid stuck"); end
  endtask

  initial begin
    logic [1:0] resp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      logic [19:0] word;
      word = {3'(k % 8), 17'($urandom)};
      axil_write(word, $urandom, 4'hf, 0, resp);
      checks++;
      if (resp != 2'b00) begin failures++; $display("FAIL resp %b", resp); end
    end
    // held while busy
    hold = 1;
    axil_write({3'd4, 17'h155}, 32'h3f800000, 4'hf, 5, resp);
    // partial strobe refused
    axil_write({3'd2, 17'h3}, 32'h12345678, 4'h3, 0, resp);
    checks++;
    if (resp != 2'b10) begin failures++; $display("FAIL partial strobe resp %b", resp); end
    checks++;
    if (seen_we[0] + seen_we[1] + seen_we[2] + seen_we[3] != 65) begin
      failures++; $display("FAIL %0d port writes", seen_we[0] + seen_we[1] + seen_we[2] + seen_we[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
