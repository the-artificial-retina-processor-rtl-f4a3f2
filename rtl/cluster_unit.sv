// cluster_unit: centre-of-excitation unit shared by one group of engines.
//
// On `start` it latches the local-maximum flags of its GROUP engines and serves the
// flagged engines one after the other, lowest index first. For each it forms
//   (u, v):     weight W1 = sum of the 3x3 central excitations around the cell,
//               u offset = (right column - left column) / W1,
//               v offset = (lower row   - upper row)    / W1;
//   (d, p, z):  weight W2 = sum of the cell's seven accumulators,
//               d offset = (acc[d+] - acc[d-]) / W2, likewise p and z,
// and adds each offset to the engine's base coordinate read from a lookup table
// (base_*, loaded through base_we). Offsets and results are fixed point in cell units
// with FRAC fraction bits; the offsets lie in [-1, 1].
//
// Timing: one cycle forms the sums, then five restoring dividers run in parallel for
// FRAC+1 = 10 cycles, so the track is presented 11 cycles after the unit starts on an
// engine, as the paper's 11-cycle clustering latency. The track is held on out_* until
// accepted; then the next flagged engine is served. `done` pulses once all flagged
// engines of the group are served (also when none is flagged).
//
// The factorisation into a 3x3 (u, v) centroid and a centroid over the seven
// accumulators in (d, p, z), the two weights, the base-coordinate lookup table, the
// group of 12 engines and the 11 cycles follow the paper. Serving order, fixed-point
// format and the divider are this design's.
module cluster_unit
  import retina_pkg::*;
#(
  parameter int GROUP = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [GROUP-1:0]        flags,
  input  logic [ROW_W-1:0]        row,
  input  logic [TS_W-1:0]         ts,
  input  logic [ACC_W-1:0]        acc [GROUP][N_PASS],   // local copies
  input  logic [ACC_W-1:0]        nb  [GROUP][3][3],     // 3x3 central values, [row][col]
  // base-coordinate lookup table write: engine, parameter (0..4 = u v d p z), value
  input  logic                    base_we,
  input  logic [7:0]              base_idx,
  input  logic [2:0]              base_sel,
  input  logic signed [POS_W-1:0] base_data,
  // track output
  output logic                    out_valid,
  output track_t                  out_track,
  input  logic                    out_ready,
  output logic                    busy,
  output logic                    done
);
  localparam int SW = ACC_W + 4;           // width of a weight sum
  localparam int QW = FRAC + 1;            // quotient width
  localparam int IW = (GROUP > 1) ? $clog2(GROUP) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_LOAD, S_DIV, S_OUT, S_DONE} state_e;
  state_e state;

  logic signed [POS_W-1:0] base [GROUP][5];
  logic [GROUP-1:0]        pending;
  logic [IW-1:0]           cur;
  logic [3:0]              step;
  logic [SW-1:0]           den [5];
  logic [SW:0]             rem [5];
  logic [QW-1:0]           quo [5];
  logic [4:0]              neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < GROUP; e++)
        for (int k = 0; k < 5; k++) base[e][k] <= '0;
    end else if (base_we && int'(base_idx) < GROUP && int'(base_sel) < 5) begin
      base[IW'(base_idx)][base_sel] <= base_data;
    end
  end

  // lowest pending engine
  logic          any;
  logic [IW-1:0] first;
  always_comb begin
    any   = 1'b0;
    first = '0;
    for (int e = GROUP - 1; e >= 0; e--) begin
      if (pending[e]) begin
        any   = 1'b1;
        first = IW'(e);
      end
    end
  end

  // sums for the current engine
  logic signed [SW:0] num [5];
  logic [SW-1:0]      w1, w2;
  always_comb begin
    logic signed [SW:0] nu, nv;
    w1 = '0;
    nu = '0;
    nv = '0;
    for (int r = 0; r < 3; r++) begin
      for (int c = 0; c < 3; c++) w1 = w1 + SW'(nb[cur][r][c]);
      nu = nu + (SW+1)'(nb[cur][r][2]) - (SW+1)'(nb[cur][r][0]);
      nv = nv + (SW+1)'(nb[cur][2][r]) - (SW+1)'(nb[cur][0][r]);
    end
    w2 = '0;
    for (int p = 0; p < N_PASS; p++) w2 = w2 + SW'(acc[cur][p]);
    num[0] = nu;
    num[1] = nv;
    num[2] = (SW+1)'(acc[cur][P_D_HI]) - (SW+1)'(acc[cur][P_D_LO]);
    num[3] = (SW+1)'(acc[cur][P_P_HI]) - (SW+1)'(acc[cur][P_P_LO]);
    num[4] = (SW+1)'(acc[cur][P_Z_HI]) - (SW+1)'(acc[cur][P_Z_LO]);
  end

  // final quotients: the last divide step's bit completed combinationally
  logic [QW-1:0] q [5];
  always_comb begin
    for (int k = 0; k < 5; k++)
      q[k] = {quo[k][QW-2:0], (rem[k] >= {1'b0, den[k]})};
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pending <= '0;
      cur     <= '0;
      step    <= '0;
      neg     <= '0;
      for (int k = 0; k < 5; k++) begin
        den[k] <= '0; rem[k] <= '0; quo[k] <= '0;
      end
      out_track <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          pending <= flags;
          state   <= S_SCAN;
        end
        S_SCAN: begin
          if (any) begin
            cur   <= first;
            state <= S_LOAD;
          end else begin
            state <= S_DONE;
          end
        end
        S_LOAD: begin
          for (int k = 0; k < 5; k++) begin
            den[k] <= (k < 2) ? w1 : w2;
            neg[k] <= num[k][SW];
            rem[k] <= num[k][SW] ? (SW+1)'(-num[k]) : (SW+1)'(num[k]);
            quo[k] <= '0;
          end
          step  <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          for (int k = 0; k < 5; k++) begin
            if (rem[k] >= {1'b0, den[k]}) begin
              quo[k] <= {quo[k][QW-2:0], 1'b1};
              rem[k] <= (rem[k] - {1'b0, den[k]}) << 1;
            end else begin
              quo[k] <= {quo[k][QW-2:0], 1'b0};
              rem[k] <= rem[k] << 1;
            end
          end
          step <= step + 1'b1;
          if (step == 4'(QW - 1)) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          pending[cur] <= 1'b0;
          state        <= S_SCAN;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase

      // assemble the track in the last divide step
      if (state == S_DIV && step == 4'(QW - 1)) begin
        out_track.ts   <= ts;
        out_track.row  <= row;
        out_track.col  <= COL_W'(cur);
        out_track.peak <= acc[cur][P_CENTRE];
        out_track.u    <= base[cur][0] + (neg[0] ? -POS_W'(q[0]) : POS_W'(q[0]));
        out_track.v    <= base[cur][1] + (neg[1] ? -POS_W'(q[1]) : POS_W'(q[1]));
        out_track.d    <= base[cur][2] + (neg[2] ? -POS_W'(q[2]) : POS_W'(q[2]));
        out_track.p    <= base[cur][3] + (neg[3] ? -POS_W'(q[3]) : POS_W'(q[3]));
        out_track.z    <= base[cur][4] + (neg[4] ? -POS_W'(q[4]) : POS_W'(q[4]));
      end
    end
  end
endmodule
