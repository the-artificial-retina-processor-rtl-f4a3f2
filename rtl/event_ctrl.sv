// event_ctrl: end-of-event sequencing of the engine grid.
//
// The end-of-event word reaches the engines through different switch paths, so the
// engines take their local copies of an event at slightly different times. This
// controller waits until every engine holds its copy (all snap_valid high), then
// pulses `start` for one cycle: the clustering units latch the local-maximum flags and
// begin. When every clustering unit has reported `done` (a one-cycle pulse each, the
// controller remembers them) it pulses `release` for one cycle, which frees the local
// copies so that the engines accept the next end-of-event word. Hits of later events
// keep flowing into the engines during the whole sequence.
//
// The paper states that the end-of-event word starts the neighbour exchange and the
// maximum search in all engines in parallel and that the clustering works on local
// copies; this handshake between engines, clustering units and copies is this
// design's.
module event_ctrl #(
  parameter int NE = 192,   // engines
  parameter int NU = 16     // clustering units
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NE-1:0] snap_valid,
  input  logic [NU-1:0] unit_done,
  output logic          start,
  output logic          release_copy,
  output logic          busy,
  output logic [31:0]   events_done
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT, S_RELEASE} state_e;
  state_e        state;
  logic [NU-1:0] done_seen;

  assign start        = (state == S_START);
  assign release_copy = (state == S_RELEASE);
  assign busy         = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done_seen   <= '0;
      events_done <= '0;
    end else begin
      case (state)
        S_IDLE:    if (&snap_valid) state <= S_START;
        S_START: begin
          done_seen <= '0;
          state     <= S_WAIT;
        end
        S_WAIT: begin
          done_seen <= done_seen | unit_done;
          if (&(done_seen | unit_done)) state <= S_RELEASE;
        end
        S_RELEASE: begin
          events_done <= events_done + 1;
          state       <= S_IDLE;
        end
        default:   state <= S_IDLE;
      endcase
    end
  end
endmodule
