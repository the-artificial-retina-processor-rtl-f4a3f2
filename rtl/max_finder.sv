// max_finder: local-maximum search over the grid of engines.
//
// Every engine's central excitation is compared, in parallel, with the central
// excitations of its eight neighbours (cells outside the grid count as zero) and
// with a threshold. A cell is flagged when its excitation is above the threshold and
// not smaller than any neighbour; on a tie the cell that comes first in row-major
// order wins (strictly greater than neighbours before it, greater or equal to those
// after it), so a plateau of equal cells yields a single flag. Purely combinational;
// the grid's end-of-event controller decides when the inputs are the local copies of
// a finished event.
//
// Comparing with the eight neighbours and with a threshold follows the paper; the
// tie rule and the strict threshold comparison are this design's choices.
module max_finder
  import retina_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int COLS = 12
) (
  input  logic [ACC_W-1:0] centre [ROWS][COLS],
  input  logic [ACC_W-1:0] threshold,
  output logic [COLS-1:0]  is_max [ROWS]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        logic ok;
        ok = centre[r][c] > threshold;
        for (int dr = -1; dr <= 1; dr++) begin
          for (int dc = -1; dc <= 1; dc++) begin
            if ((dr != 0 || dc != 0) &&
                r + dr >= 0 && r + dr < ROWS && c + dc >= 0 && c + dc < COLS) begin
              if (dr < 0 || (dr == 0 && dc < 0))
                ok = ok && (centre[r][c] >  centre[r+dr][c+dc]);
              else
                ok = ok && (centre[r][c] >= centre[r+dr][c+dc]);
            end
          end
        end
        is_max[r][c] = ok;
      end
    end
  end
endmodule
