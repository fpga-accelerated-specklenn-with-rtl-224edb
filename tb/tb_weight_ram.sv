// tb_weight_ram -- writes every word of a 20 x 6 weight memory in random
// order, then reads every row and checks all lanes; also checks that a
// read without `re` leaves the output register unchanged.
module tb_weight_ram;
  localparam int DEPTH = 20, LANES = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] wrow = '0, rrow = '0;
  logic [$clog2(LANES)-1:0] wlane = '0;
  logic [31:0] wdata = '0;
  logic [LANES-1:0][31:0] rdata, held;
  logic [31:0] model [DEPTH][LANES];
  int checks = 0, failures = 0;

  weight_ram #(.DEPTH(DEPTH), .LANES(LANES)) dut (.clk, .we, .wrow, .wlane, .wdata, .re, .rrow, .rdata);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 2; pass++)
      for (int k = 0; k < DEPTH * LANES; k++) begin
        int r, l;
        r = (pass == 0) ? k / LANES : $urandom_range(DEPTH - 1);
        l = (pass == 0) ? k % LANES : $urandom_range(LANES - 1);
        @(negedge clk);
        we = 1; wrow = r[$clog2(DEPTH)-1:0]; wlane = l[$clog2(LANES)-1:0]; wdata = $urandom;
        model[r][l] = wdata;
      end
    @(negedge clk); we = 0;
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); re = 1; rrow = r[$clog2(DEPTH)-1:0];
      @(negedge clk); re = 0; rrow = '0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rdata[l] !== model[r][l]) begin
          failures++; $display("FAIL row %0d lane %0d: %h expected %h", r, l, rdata[l], model[r][l]);
        end
      end
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL output changed without re"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
