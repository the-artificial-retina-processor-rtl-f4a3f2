// track_merger: merges the track streams of the clustering units into the single
// output stream towards the data acquisition.
//
// Round-robin arbiter with one output register: whenever the register is empty or
// being read, the next requesting input after the last one served is copied into it
// and acknowledged (in_ready high for that input in that cycle). Valid/ready on all
// streams; a track is held until accepted. One cycle from input to output. The paper
// shows only that all tracks leave the device on one path; the arbitration is this
// design's.
module track_merger
  import retina_pkg::*;
#(
  parameter int NU = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NU-1:0] in_valid,
  input  track_t        in_track [NU],
  output logic [NU-1:0] in_ready,
  output logic          out_valid,
  output track_t        out_track,
  input  logic          out_ready
);
  localparam int IW = (NU > 1) ? $clog2(NU) : 1;

  logic [IW-1:0] last;     // last input served
  logic          load, found;
  logic [IW-1:0] pick;

  assign load = !out_valid || out_ready;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= NU; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last) + k) % NU);
      if (!found && in_valid[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
    in_ready = '0;
    if (load && found) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_track <= '0;
      last      <= IW'(NU - 1);
    end else if (load) begin
      out_valid <= found;
      if (found) begin
        out_track <= in_track[pick];
        last      <= pick;
      end
    end
  end
endmodule
