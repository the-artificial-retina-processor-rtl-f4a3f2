// retina_engine: the receptive-field engine of one cell of the track-parameter grid.
//
// For every hit it computes the Gaussian weight exp(-s^2/2sigma^2) of the hit's
// distance s from the cell's receptor on the hit's layer and adds it to the cell's
// excitation for the hit's event. The same hit is passed seven times through the
// pipeline (passes 0..6), each time against a different receptor set: pass 0 is the
// cell itself in the primary (u, v) plane, passes 1..6 are the lower and upper lateral
// cells of the three secondary parameters d, p, z (order given by pass_e). Each pass
// has its own accumulator, so the engine keeps 7 accumulators per event slot and one
// slot per time-stamp value (up to 16 events in flight).
//
// Pipeline (one register stage per line, as in the engine diagram):
//   stage 0  hit register; the pass counter steps 0..6 while the hit is held
//   stage 1  receptor read (u0, v0) addressed by {pass, layer}; u, v delayed
//   stage 2  du = u - u0, dv = v - v0
//   stage 3  du^2, dv^2
//   stage 4  ds^2 = du^2 + dv^2
//   stage 5  weight = LUT[min(255, ds^2 >> R_SHIFT)]  (rounding to the LUT address)
//   stage 6  excitation[ts][pass] += weight (saturating); time stamp reaches here
//            through five delay registers
// A hit is accepted at most every 7 cycles (20 ns at 350 MHz); the first pass's
// weight is in its accumulator 6 cycles after acceptance, the last one 12 cycles after.
// A hit whose layer is not below N_LAYERS contributes nothing.
//
// End of event: an end-of-event word takes one pipeline slot. When it reaches stage 6
// the seven accumulators of its slot are copied to the local copy (snap_*) and
// cleared, so later events keep flowing while the copy is examined. The copy is
// freed by snap_release. An end-of-event word is refused (in_ready low, upstream holds
// it) while the copy is still in use or another end-of-event word is in the pipeline:
// this is the only case in which the engine stalls the hit flow.
//
// The pipeline structure, the seven passes and accumulators, the receptor memory
// indexed by layer, the 256-entry LUT and the local copy follow the paper. Receptor
// memory loading through rec_we, the rounding by a right shift with saturation,
// accumulator width and saturation, and the stall rule are this design's choices.
module retina_engine
  import retina_pkg::*;
#(
  parameter int N_LAYERS = 10,
  parameter int N_SLOTS  = 2**TS_W,
  parameter int R_SHIFT  = 4,
  parameter int SIGMA2   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // hit input
  input  logic                      in_valid,
  input  hit_t                      in_hit,
  output logic                      in_ready,
  // receptor memory write
  input  logic                      rec_we,
  input  logic [2:0]                rec_pass,
  input  logic [LAYER_W-1:0]        rec_layer,
  input  logic signed [COORD_W-1:0] rec_u0,
  input  logic signed [COORD_W-1:0] rec_v0,
  // local copy of the accumulators of the last ended event
  output logic                      snap_valid,
  output logic [TS_W-1:0]           snap_ts,
  output logic [ACC_W-1:0]          snap_acc [N_PASS],
  input  logic                      snap_release
);
  localparam int DW  = COORD_W + 1;        // difference width
  localparam int SQW = 2 * DW;             // square / sum width

  // ---------------- receptor memory: [pass][layer] -> (u0, v0)
  logic signed [COORD_W-1:0] rec_u [N_PASS][N_LAYERS];
  logic signed [COORD_W-1:0] rec_v [N_PASS][N_LAYERS];

  always_ff @(posedge clk) begin
    if (rec_we && int'(rec_layer) < N_LAYERS && int'(rec_pass) < N_PASS) begin
      rec_u[rec_pass][rec_layer] <= rec_u0;
      rec_v[rec_pass][rec_layer] <= rec_v0;
    end
  end

  // ---------------- stage 0: hit register and pass counter
  logic        v0_q;
  hit_t        h0_q;      // zip-code bits are not used past the switch
  logic [2:0]  pass0_q;
  logic        last0;
  logic        eoe_busy;      // an end-of-event word is in stages 0..5
  logic        accept;

  assign last0    = v0_q && (h0_q.eoe || pass0_q == 3'(N_PASS - 1));
  assign in_ready = (!v0_q || last0) && !(in_hit.eoe && (snap_valid || eoe_busy));
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0_q    <= 1'b0;
      h0_q    <= '0;
      pass0_q <= '0;
    end else if (accept) begin
      v0_q    <= 1'b1;
      h0_q    <= in_hit;
      pass0_q <= '0;
    end else if (last0) begin
      v0_q    <= 1'b0;
    end else if (v0_q) begin
      pass0_q <= pass0_q + 1'b1;
    end
  end

  // ---------------- stage 1: receptor lookup, coordinates delayed
  logic                      v1_q, eoe1_q, ok1_q;
  logic [2:0]                pass1_q;
  logic [TS_W-1:0]           ts1_q;
  logic signed [COORD_W-1:0] u1_q, v1c_q, u01_q, v01_q;
  logic                      layer_ok0;
  logic [LAYER_W-1:0]        layer_idx0;

  assign layer_ok0  = int'(h0_q.layer) < N_LAYERS;
  assign layer_idx0 = layer_ok0 ? h0_q.layer : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0; eoe1_q <= 1'b0; ok1_q <= 1'b0;
      pass1_q <= '0; ts1_q <= '0;
      u1_q <= '0; v1c_q <= '0; u01_q <= '0; v01_q <= '0;
    end else begin
      v1_q    <= v0_q;
      eoe1_q  <= v0_q && h0_q.eoe;
      ok1_q   <= layer_ok0;
      pass1_q <= pass0_q;
      ts1_q   <= h0_q.ts;
      u1_q    <= h0_q.u;
      v1c_q   <= h0_q.v;
      u01_q   <= rec_u[pass0_q][layer_idx0];
      v01_q   <= rec_v[pass0_q][layer_idx0];
    end
  end

  // ---------------- stages 2..5
  logic                  v2_q, v3_q, v4_q, v5_q;
  logic                  eoe2_q, eoe3_q, eoe4_q, eoe5_q;
  logic                  ok2_q, ok3_q, ok4_q, ok5_q;
  logic [2:0]            pass2_q, pass3_q, pass4_q, pass5_q;
  logic [TS_W-1:0]       ts2_q, ts3_q, ts4_q, ts5_q;
  logic signed [DW-1:0]  du2_q, dv2_q;
  logic [SQW-1:0]        du3_q, dv3_q;
  logic [SQW:0]          ds4_q;
  logic [LUT_AW-1:0]     lut_addr;
  logic [WGT_W-1:0]      wgt5;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v2_q, v3_q, v4_q, v5_q}         <= '0;
      {eoe2_q, eoe3_q, eoe4_q, eoe5_q} <= '0;
      {ok2_q, ok3_q, ok4_q, ok5_q}     <= '0;
      {pass2_q, pass3_q, pass4_q, pass5_q} <= '0;
      {ts2_q, ts3_q, ts4_q, ts5_q}     <= '0;
      du2_q <= '0; dv2_q <= '0; du3_q <= '0; dv3_q <= '0; ds4_q <= '0;
    end else begin
      // stage 2: subtract
      v2_q <= v1_q; eoe2_q <= eoe1_q; ok2_q <= ok1_q; pass2_q <= pass1_q; ts2_q <= ts1_q;
      du2_q <= DW'(u1_q) - DW'(u01_q);
      dv2_q <= DW'(v1c_q) - DW'(v01_q);
      // stage 3: square
      v3_q <= v2_q; eoe3_q <= eoe2_q; ok3_q <= ok2_q; pass3_q <= pass2_q; ts3_q <= ts2_q;
      du3_q <= SQW'(du2_q * du2_q);
      dv3_q <= SQW'(dv2_q * dv2_q);
      // stage 4: sum
      v4_q <= v3_q; eoe4_q <= eoe3_q; ok4_q <= ok3_q; pass4_q <= pass3_q; ts4_q <= ts3_q;
      ds4_q <= {1'b0, du3_q} + {1'b0, dv3_q};
      // stage 5: lookup (registered inside sigma_lut)
      v5_q <= v4_q; eoe5_q <= eoe4_q; ok5_q <= ok4_q; pass5_q <= pass4_q; ts5_q <= ts4_q;
    end
  end

  // rounding of ds^2 to the table address, saturating at the last entry
  always_comb begin
    logic [SQW:0] r;
    r = ds4_q >> R_SHIFT;
    lut_addr = (r > (SQW+1)'(2**LUT_AW - 1)) ? '1 : r[LUT_AW-1:0];
  end

  sigma_lut #(.SIGMA2(SIGMA2)) u_lut (
    .clk, .en(1'b1), .addr(lut_addr), .weight(wgt5)
  );

  assign eoe_busy = (v0_q && h0_q.eoe) || eoe1_q || eoe2_q || eoe3_q || eoe4_q || eoe5_q;

  // ---------------- stage 6: excitation accumulators and local copy
  logic [ACC_W-1:0] exc [N_SLOTS][N_PASS];
  logic [ACC_W:0]   acc_sum;
  logic [ACC_W-1:0] acc_next;    // saturating sum

  assign acc_sum  = {1'b0, exc[ts5_q][pass5_q]} + (ACC_W+1)'(wgt5);
  assign acc_next = acc_sum[ACC_W] ? '1 : acc_sum[ACC_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N_SLOTS; t++)
        for (int p = 0; p < N_PASS; p++)
          exc[t][p] <= '0;
      snap_valid <= 1'b0;
      snap_ts    <= '0;
      for (int p = 0; p < N_PASS; p++) snap_acc[p] <= '0;
    end else begin
      if (v5_q && eoe5_q) begin
        snap_valid <= 1'b1;
        snap_ts    <= ts5_q;
        for (int p = 0; p < N_PASS; p++) begin
          snap_acc[p]     <= exc[ts5_q][p];
          exc[ts5_q][p]   <= '0;
        end
      end else begin
        if (snap_release) snap_valid <= 1'b0;
        if (v5_q && ok5_q) exc[ts5_q][pass5_q] <= acc_next;
      end
    end
  end

  // The local copy is never overwritten while in use (guaranteed by the stall rule).
  a_snap_free: assert property (@(posedge clk) disable iff (!rst_n)
    (v5_q && eoe5_q) |-> !snap_valid);
endmodule
