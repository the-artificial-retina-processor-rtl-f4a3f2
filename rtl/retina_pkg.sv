// retina_pkg: types and constants shared by the artificial-retina track processor.
//
// A detector hit travels through the whole device as one 41-bit word (hit_t). The
// word carries the zip-code read by the switching network, a time stamp that names
// the event the hit belongs to, the detector layer and the two hit coordinates
// (u, v) in the primary plane. An end-of-event word uses the same format with the
// eoe bit set; only its time stamp is meaningful. The 41-bit total and the list of
// fields (coordinates, zip-code, time stamp) follow the paper; the order time stamp /
// layer / u / v follows the engine diagram; the split of the 41 bits into field
// widths is this design's choice (4-bit zip-code as in the 16x16 network example,
// 4-bit time stamp for up to 16 events in flight, 4-bit layer for ten layers,
// 14-bit coordinates and one end-of-event flag).
package retina_pkg;

  localparam int ZIP_W   = 4;   // zip-code (switch address) width
  localparam int TS_W    = 4;   // time stamp: event slot, up to 16 events in flight
  localparam int LAYER_W = 4;   // detector layer identifier
  localparam int COORD_W = 14;  // signed hit / receptor coordinate
  localparam int HIT_W   = 1 + ZIP_W + TS_W + LAYER_W + 2 * COORD_W;  // = 41

  localparam int N_PASS  = 7;   // accumulators per cell: centre + 2 x (d, p, z)
  localparam int WGT_W   = 8;   // lookup-table weight width
  localparam int LUT_AW  = 8;   // lookup-table address width (256 entries)
  localparam int ACC_W   = 12;  // accumulator width

  typedef struct packed {
    logic                      eoe;    // 1: end-of-event word
    logic [ZIP_W-1:0]          zip;    // switch routing key
    logic [TS_W-1:0]           ts;     // event slot
    logic [LAYER_W-1:0]        layer;  // detector layer
    logic signed [COORD_W-1:0] u;
    logic signed [COORD_W-1:0] v;
  } hit_t;

  // Accumulator index of each pass through the engine (centre cell, then the
  // lower and upper lateral cell of each secondary track parameter).
  typedef enum logic [2:0] {
    P_CENTRE = 3'd0,
    P_D_LO   = 3'd1, P_D_HI = 3'd2,
    P_P_LO   = 3'd3, P_P_HI = 3'd4,
    P_Z_LO   = 3'd5, P_Z_HI = 3'd6
  } pass_e;

  localparam int FRAC   = 9;            // fraction bits of the centroid offsets
  localparam int POS_W  = 16;           // signed fixed-point track parameter width
  localparam int ROW_W  = 8;
  localparam int COL_W  = 8;

  // Reconstructed track: the cell of the local maximum, its excitation and the five
  // track parameters in fixed point (cell units, FRAC fraction bits).
  typedef struct packed {
    logic [TS_W-1:0]         ts;
    logic [ROW_W-1:0]        row;
    logic [COL_W-1:0]        col;
    logic [ACC_W-1:0]        peak;
    logic signed [POS_W-1:0] u;
    logic signed [POS_W-1:0] v;
    logic signed [POS_W-1:0] d;
    logic signed [POS_W-1:0] p;
    logic signed [POS_W-1:0] z;
  } track_t;

endpackage
