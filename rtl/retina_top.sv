// retina_top: one artificial-retina track processor.
//
// Hits from the tracking layers enter on N_PORTS input streams, each a 41-bit hit
// word with valid/ready. The switching network (N_PORTS x N_PORTS two-way sorters)
// routes every hit by its zip-code to one or more output streams; output stream r
// feeds row r of the engine grid, a group of GROUP engines that all receive the
// same hits. The grid has N_PORTS rows and GROUP columns, one engine per cell of the
// primary track-parameter plane (columns along u, rows along v); each engine holds
// its own receptor coordinates, loaded through rec_*.
//
// When an event's end-of-event word has reached every engine, each engine holds a
// local copy of its seven accumulators for that event. The maximum finder then flags
// the cells whose central excitation is above `threshold` and not smaller than any of
// the eight neighbours, the clustering unit of each row computes the centre of
// excitation of its flagged cells, and the tracks of all rows are merged into the
// single output stream out_*. The controller then frees the local copies. Hits of
// later events keep flowing meanwhile; only a second end-of-event word arriving
// before the copies are freed is held, and the hits queued behind it wait in the
// switch node buffers.
//
// Configuration ports: map_* writes a node's zip-code map, rec_* an engine's receptor
// memory, base_* a clustering unit's base-coordinate table. Monitoring outputs count
// nothing themselves; they expose per-cycle events (switch conflicts, duplications,
// rows stalled) and the number of events completed.
//
// The chain switch -> engines -> maximum search -> centre of excitation -> output
// follows the paper. The default size is the paper's 16 x 16 network example with the
// paper's 12 engines per clustering unit (192 engines); the paper places up to 900
// engines on one FPGA. Feeding one row of 12 engines from each network output is this
// design's choice.
module retina_top
  import retina_pkg::*;
#(
  parameter int N_PORTS  = 16,
  parameter int GROUP    = 12,
  parameter int N_LAYERS = 10,
  parameter int DEPTH    = 4,
  parameter int R_SHIFT  = 4,
  parameter int SIGMA2   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // hits
  input  logic [N_PORTS-1:0]        in_valid,
  input  hit_t                      in_hit [N_PORTS],
  output logic [N_PORTS-1:0]        in_ready,
  // switch map write
  input  logic                      map_we,
  input  logic [7:0]                map_stage,
  input  logic [15:0]               map_node,
  input  logic [ZIP_W-1:0]          map_zip,
  input  logic [1:0]                map_mask,
  // receptor memory write
  input  logic                      rec_we,
  input  logic [ROW_W-1:0]          rec_row,
  input  logic [COL_W-1:0]          rec_col,
  input  logic [2:0]                rec_pass,
  input  logic [LAYER_W-1:0]        rec_layer,
  input  logic signed [COORD_W-1:0] rec_u0,
  input  logic signed [COORD_W-1:0] rec_v0,
  // base-coordinate table write
  input  logic                      base_we,
  input  logic [ROW_W-1:0]          base_row,
  input  logic [7:0]                base_idx,
  input  logic [2:0]                base_sel,
  input  logic signed [POS_W-1:0]   base_data,
  input  logic [ACC_W-1:0]          threshold,
  // tracks
  output logic                      out_valid,
  output track_t                    out_track,
  input  logic                      out_ready,
  // monitoring
  output logic [N_PORTS/2*$clog2(N_PORTS)-1:0] mon_conflict,
  output logic [N_PORTS/2*$clog2(N_PORTS)-1:0] mon_dup,
  output logic [N_PORTS-1:0]        mon_row_stall,
  output logic                      mon_cluster_start,
  output logic [31:0]               events_done
);
  localparam int ROWS = N_PORTS;
  localparam int COLS = GROUP;

  // ---------------- switching network
  logic [N_PORTS-1:0] sw_valid, sw_ready;
  hit_t               sw_hit [N_PORTS];

  switch_network #(.N(N_PORTS), .DEPTH(DEPTH)) u_switch (
    .clk, .rst_n,
    .in_valid, .in_hit, .in_ready,
    .out_valid(sw_valid), .out_hit(sw_hit), .out_ready(sw_ready),
    .map_we, .map_stage, .map_node, .map_zip, .map_mask,
    .conflict(mon_conflict), .dup(mon_dup)
  );

  // ---------------- engine grid
  logic [COLS-1:0]  eng_ready  [ROWS];
  logic [COLS-1:0]  snap_valid [ROWS];
  logic [TS_W-1:0]  snap_ts    [ROWS][COLS];
  logic [ACC_W-1:0] snap_acc   [ROWS][COLS][N_PASS];
  logic [ACC_W-1:0] centre     [ROWS][COLS];
  logic             release_copy;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign sw_ready[r]      = &eng_ready[r];
    assign mon_row_stall[r] = sw_valid[r] && !sw_ready[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      retina_engine #(
        .N_LAYERS(N_LAYERS), .R_SHIFT(R_SHIFT), .SIGMA2(SIGMA2)
      ) u_engine (
        .clk, .rst_n,
        .in_valid(sw_valid[r] && sw_ready[r]), .in_hit(sw_hit[r]), .in_ready(eng_ready[r][c]),
        .rec_we(rec_we && rec_row == ROW_W'(r) && rec_col == COL_W'(c)),
        .rec_pass, .rec_layer, .rec_u0, .rec_v0,
        .snap_valid(snap_valid[r][c]), .snap_ts(snap_ts[r][c]), .snap_acc(snap_acc[r][c]),
        .snap_release(release_copy)
      );
      assign centre[r][c] = snap_acc[r][c][P_CENTRE];
    end
  end

  // ---------------- local maxima
  logic [COLS-1:0] is_max [ROWS];
  max_finder #(.ROWS(ROWS), .COLS(COLS)) u_max (
    .centre, .threshold, .is_max
  );

  // ---------------- end-of-event control
  logic [ROWS*COLS-1:0] all_snap;
  logic [ROWS-1:0]      unit_done;
  logic                 start;

  for (genvar r = 0; r < ROWS; r++) begin : g_flat
    assign all_snap[r*COLS +: COLS] = snap_valid[r];
  end

  event_ctrl #(.NE(ROWS * COLS), .NU(ROWS)) u_ctrl (
    .clk, .rst_n,
    .snap_valid(all_snap), .unit_done,
    .start, .release_copy, .busy(), .events_done
  );
  assign mon_cluster_start = start;

  // ---------------- clustering, one unit per row
  logic [ROWS-1:0] cl_valid, cl_ready;
  track_t          cl_track [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_cluster
    logic [ACC_W-1:0] nb [COLS][3][3];
    for (genvar c = 0; c < COLS; c++) begin : g_nb
      for (genvar dr = 0; dr < 3; dr++) begin : g_dr
        for (genvar dc = 0; dc < 3; dc++) begin : g_dc
          if (r + dr - 1 >= 0 && r + dr - 1 < ROWS && c + dc - 1 >= 0 && c + dc - 1 < COLS)
            begin : g_in
              assign nb[c][dr][dc] = centre[r+dr-1][c+dc-1];
            end
          else begin : g_edge
            assign nb[c][dr][dc] = '0;
          end
        end
      end
    end

    cluster_unit #(.GROUP(GROUP)) u_cluster (
      .clk, .rst_n,
      .start, .flags(is_max[r]), .row(ROW_W'(r)), .ts(snap_ts[r][0]),
      .acc(snap_acc[r]), .nb,
      .base_we(base_we && base_row == ROW_W'(r)), .base_idx, .base_sel, .base_data,
      .out_valid(cl_valid[r]), .out_track(cl_track[r]), .out_ready(cl_ready[r]),
      .busy(), .done(unit_done[r])
    );
  end

  // ---------------- output to DAQ
  track_merger #(.NU(ROWS)) u_merge (
    .clk, .rst_n,
    .in_valid(cl_valid), .in_track(cl_track), .in_ready(cl_ready),
    .out_valid, .out_track, .out_ready
  );
endmodule
