// switch_network: N x N multistage network of two-way sorters that delivers every
// hit to all and only the engine groups its zip-code map names.
//
// log2(N) stages of N/2 nodes (N log2(N)/2 nodes in all). Input stream 2i+k enters
// node i of the first stage on its input k. Between stages the network is a
// recursive butterfly: at stage s the nodes form groups of G = N/2^(s+1); node l of a
// group sends its output 0 to node l/2 of the group's first half and its output 1 to
// node l/2 of the second half, on input l%2. The last stage's node i drives output
// streams 2i and 2i+1. With every node's map at its reset content (stage s routes on
// zip-code bit log2(N)-1-s, as in the paper's 16x16 figure: bit 3 first, bit 0 last) a
// hit leaves on the output whose index equals its zip-code; rewriting the maps makes
// nodes duplicate hits towards several outputs. End-of-event words are merged at
// every node, so each output gets one per event after that event's hits.
//
// Topology and per-stage address bits follow the paper's figure; node buffering and
// the map write port are this design's. Latency without contention: one cycle per
// stage (log2(N) cycles). Stalls from the outputs back up through the node FIFOs.
module switch_network
  import retina_pkg::*;
#(
  parameter int N     = 16,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     in_valid,
  input  hit_t             in_hit    [N],
  output logic [N-1:0]     in_ready,
  output logic [N-1:0]     out_valid,
  output hit_t             out_hit   [N],
  input  logic [N-1:0]     out_ready,
  // map write: node (stage, index), zip-code, 2-bit output mask
  input  logic             map_we,
  input  logic [7:0]       map_stage,
  input  logic [15:0]      map_node,
  input  logic [ZIP_W-1:0] map_zip,
  input  logic [1:0]       map_mask,
  // monitoring: nodes holding an input for a conflict / duplicating a hit this cycle
  output logic [N/2*$clog2(N)-1:0] conflict,
  output logic [N/2*$clog2(N)-1:0] dup
);
  localparam int STAGES = $clog2(N);

  // link[s] are the N streams entering stage s; link[STAGES] are the outputs
  logic [N-1:0] lv [STAGES+1];
  hit_t         lh [STAGES+1][N];
  logic [N-1:0] lr [STAGES+1];

  assign lv[0] = in_valid;
  assign lh[0] = in_hit;
  assign in_ready = lr[0];
  assign out_valid = lv[STAGES];
  assign out_hit   = lh[STAGES];
  assign lr[STAGES] = out_ready;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam int G = (N / 2) >> s;
    for (genvar i = 0; i < N / 2; i++) begin : g_node
      logic [1:0] ov, orr;
      hit_t       oh [2];
      hit_t       ih [2];
      logic [1:0] ir;
      assign ih[0] = lh[s][2*i];
      assign ih[1] = lh[s][2*i+1];
      assign lr[s][2*i]   = ir[0];
      assign lr[s][2*i+1] = ir[1];

      two_way_sorter #(.DEPTH(DEPTH), .ROUTE_BIT(STAGES - 1 - s)) u_node (
        .clk, .rst_n,
        .in_valid(lv[s][2*i+1 -: 2]), .in_hit(ih), .in_ready(ir),
        .out_valid(ov), .out_hit(oh), .out_ready(orr),
        .map_we(map_we && map_stage == 8'(s) && map_node == 16'(i)),
        .map_zip, .map_mask,
        .conflict(conflict[s*(N/2) + i]), .dup(dup[s*(N/2) + i])
      );

      for (genvar o = 0; o < 2; o++) begin : g_link
        // destination stream index in link[s+1]
        localparam int DST = (G == 1) ? (2 * i + o)
                           : 2 * ((i - i % G) + o * (G / 2) + (i % G) / 2) + (i % G) % 2;
        assign lv[s+1][DST] = ov[o];
        assign lh[s+1][DST] = oh[o];
        assign orr[o]       = lr[s+1][DST];
      end
    end
  end
endmodule
