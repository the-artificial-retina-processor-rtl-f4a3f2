// two_way_sorter: the elementary node of the switching network (two inputs, two
// outputs).
//
// The two input streams are merged and every hit is sent to output 0, output 1 or
// both, as the node's zip-code map prescribes: map[zip] is a 2-bit mask (bit o set =
// send to output o; a zero mask drops the hit). Each output has a small FIFO. A hit is
// accepted only when every FIFO its mask names has room, so a duplicated hit is
// written to both outputs in the same cycle. When both inputs want the same output in
// one cycle only one is taken and the other input is held (in_ready low); the
// priority between the two inputs alternates after each such conflict. An input is
// also held when the FIFOs it needs are full, which is how a stall from downstream
// propagates upward.
//
// End-of-event words are merged rather than routed: an input that presents one is
// held until the other input presents one too, then a single end-of-event word is
// written to both outputs and both inputs are consumed. Every output therefore sees
// exactly one end-of-event word per event, after all hits of that event that passed
// through this node.
//
// The merge / dispatch / duplicate / hold behaviour and the locally loaded map follow
// the paper. The per-output FIFOs, the alternating priority, the end-of-event merge
// and the reset content of the map (route by bit ROUTE_BIT of the zip-code, as in the
// paper's 16x16 example) are this design's choices.
//
// Timing: a hit accepted in cycle t is at the output FIFO head in cycle t+1.
module two_way_sorter
  import retina_pkg::*;
#(
  parameter int DEPTH     = 4,
  parameter int ROUTE_BIT = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       in_valid,
  input  hit_t             in_hit   [2],
  output logic [1:0]       in_ready,
  output logic [1:0]       out_valid,
  output hit_t             out_hit  [2],
  input  logic [1:0]       out_ready,
  // zip-code map write port
  input  logic             map_we,
  input  logic [ZIP_W-1:0] map_zip,
  input  logic [1:0]       map_mask,
  // event counters for monitoring
  output logic             conflict,   // an input was held because of the other one
  output logic             dup         // a hit was written to both outputs
);
  localparam int CW = $clog2(DEPTH + 1);

  logic [1:0] map [2**ZIP_W];
  logic       prio;                  // input that wins the next conflict
  logic [1:0] push, pop, room, empty;
  hit_t       push_hit [2];
  logic [CW-1:0] count [2];

  // ---------------- output FIFOs
  for (genvar o = 0; o < 2; o++) begin : g_out
    hit_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(push[o]), .din(push_hit[o]),
      .pop(pop[o]), .dout(out_hit[o]),
      .empty(empty[o]), .count(count[o])
    );
    assign out_valid[o] = !empty[o];
    assign pop[o]       = out_valid[o] && out_ready[o];
    assign room[o]      = (count[o] < CW'(DEPTH));
  end

  // ---------------- zip-code map
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int z = 0; z < 2**ZIP_W; z++)
        map[z] <= (z[ROUTE_BIT]) ? 2'b10 : 2'b01;
    end else if (map_we) begin
      map[map_zip] <= map_mask;
    end
  end

  // ---------------- merge and dispatch
  logic [1:0] mask [2];
  logic [1:0] want;      // input holds a hit (not an end-of-event word)
  logic [1:0] fits;      // every FIFO the hit needs has room
  logic       both_eoe;
  logic [1:0] go;        // inputs taken this cycle

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      mask[i] = map[in_hit[i].zip];
      want[i] = in_valid[i] && !in_hit[i].eoe;
      fits[i] = ((mask[i] & ~room) == 2'b00);
    end
    both_eoe = in_valid[0] && in_valid[1] && in_hit[0].eoe && in_hit[1].eoe;

    in_ready    = 2'b00;
    push        = 2'b00;
    push_hit[0] = in_hit[0];
    push_hit[1] = in_hit[1];
    conflict    = 1'b0;
    dup         = 1'b0;
    go          = 2'b00;

    if (both_eoe) begin
      // one merged end-of-event word to each output
      if (room == 2'b11) begin
        in_ready    = 2'b11;
        push        = 2'b11;
        push_hit[0] = in_hit[0];
        push_hit[1] = in_hit[0];
      end
    end else begin
      go = want & fits;
      if (go == 2'b11 && (mask[0] & mask[1]) != 2'b00) begin
        go       = prio ? 2'b10 : 2'b01;
        conflict = 1'b1;
      end
      for (int i = 0; i < 2; i++) begin
        if (go[i]) begin
          in_ready[i] = 1'b1;
          for (int o = 0; o < 2; o++) begin
            if (mask[i][o]) begin
              push[o]     = 1'b1;
              push_hit[o] = in_hit[i];
            end
          end
          if (mask[i] == 2'b11) dup = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        prio <= 1'b0;
    else if (conflict) prio <= ~prio;
  end

  // Both end-of-event words being merged must belong to the same event.
  a_eoe_same_event: assert property (@(posedge clk) disable iff (!rst_n)
    both_eoe |-> in_hit[0].ts == in_hit[1].ts);
endmodule
