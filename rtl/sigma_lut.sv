// sigma_lut: the (8 x 256)-bit lookup table of the retina response function.
//
// Entry a holds round(255 * exp(-a / (2 * SIGMA2))), the Gaussian weight of a hit
// whose rounded squared distance from the receptor is a, with SIGMA2 the squared
// width sigma^2 expressed in table-address units. The table is computed at
// elaboration, so every engine carries an identical read-only copy. The read is
// registered: the address presented in cycle t gives the weight in cycle t+1 (pipeline
// stage 5 of the engine). The table size and its use as a Gaussian follow the paper;
// the value of sigma and the 255 full scale are this design's.
module sigma_lut
  import retina_pkg::*;
#(
  parameter int SIGMA2 = 16
) (
  input  logic              clk,
  input  logic              en,
  input  logic [LUT_AW-1:0] addr,
  output logic [WGT_W-1:0]  weight
);
  typedef logic [WGT_W-1:0] table_t [2**LUT_AW];

  function automatic table_t make_table();
    table_t t;
    for (int a = 0; a < 2**LUT_AW; a++)
      t[a] = WGT_W'(int'($floor(255.0 * $exp(-real'(a) / (2.0 * real'(SIGMA2))) + 0.5)));
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  always_ff @(posedge clk) begin
    if (en) weight <= TABLE[addr];
  end
endmodule
