// tb_sigma_lut: checks every entry of the response lookup table.
//
// For each address a the expected weight is round(255 * exp(-a / (2 sigma^2))) with
// sigma^2 = 16 table units, worked out here in real arithmetic. The read is
// registered, so the weight is checked one clock after the address is applied. The
// table must also be non-increasing and start at full scale.
module tb_sigma_lut;
  import retina_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [LUT_AW-1:0] addr;
  logic [WGT_W-1:0]  weight;
  logic              en;

  sigma_lut #(.SIGMA2(16)) dut (.clk, .en, .addr, .weight);

  int checks = 0, failures = 0;

  initial begin
    int prev = 256;
    en = 1'b1;
    addr = '0;
    for (int a = 0; a < 256; a++) begin
      real x;
      int  expv;
      addr = 8'(a);
      @(posedge clk);
      #1;
      x    = 255.0 * $exp(-a / 32.0);
      expv = $rtoi(x + 0.5);
      checks++;
      if (int'(weight) != expv) begin
        failures++;
        $display("FAIL addr %0d weight %0d expected %0d", a, weight, expv);
      end
      checks++;
      if (int'(weight) > prev) begin
        failures++;
        $display("FAIL table increases at %0d", a);
      end
      prev = int'(weight);
      if (a == 0) begin
        checks++;
        if (weight != 8'd255) failures++;
      end
    end
    // hold: with en low the output keeps its value
    en = 1'b0;
    addr = 8'd0;
    @(posedge clk);
    #1;
    checks++;
    if (weight != 8'd0) begin
      failures++;
      $display("FAIL output changed while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
