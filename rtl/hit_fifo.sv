// hit_fifo: small synchronous FIFO of hit words, the buffer at each output of a
// switch node.
//
// Circular buffer of DEPTH entries with registered head; push and pop may happen in
// the same cycle. A word pushed in cycle t is at the head in cycle t+1. `count`
// reports the occupancy so that a writer can check room before committing a hit
// that must go to several FIFOs at once. Buffering inside the switch nodes follows
// the paper (held hits are "stored in the switch trees"); the depth is this design's.
module hit_fifo
  import retina_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  hit_t        din,
  input  logic        pop,
  output hit_t        dout,
  output logic        empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  hit_t           mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;

  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) push |-> (int'(count) < DEPTH || pop);
  endproperty
  property p_no_underflow;
    @(posedge clk) disable iff (!rst_n) pop |-> !empty;
  endproperty
  a_no_overflow:  assert property (p_no_overflow);
  a_no_underflow: assert property (p_no_underflow);
endmodule
