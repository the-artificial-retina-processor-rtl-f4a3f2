// tb_max_finder: checks the local-maximum flags on random grids.
//
// A 5 x 6 grid is filled with random excitations drawn from a small range so that
// ties between neighbours are frequent; the threshold is random too. Expected flag
// of a cell: its value is above the threshold, and for every existing neighbour it
// is either larger, or equal with the neighbour placed later in row-major order.
// A flat grid above threshold must give exactly one flag (the first cell).
module tb_max_finder;
  import retina_pkg::*;

  localparam int R = 5, C = 6;
  logic [ACC_W-1:0] centre [R][C];
  logic [ACC_W-1:0] threshold;
  logic [C-1:0]     is_max [R];

  max_finder #(.ROWS(R), .COLS(C)) dut (.*);

  int checks = 0, failures = 0;

  function automatic bit ref_flag(input int r, input int c);
    if (centre[r][c] <= threshold) return 0;
    for (int rr = 0; rr < R; rr++)
      for (int cc = 0; cc < C; cc++) begin
        if ((rr != r || cc != c) && (rr - r) <= 1 && (r - rr) <= 1 && (cc - c) <= 1 && (c - cc) <= 1) begin
          if (centre[rr][cc] > centre[r][c]) return 0;
          if (centre[rr][cc] == centre[r][c] && (rr * C + cc) < (r * C + c)) return 0;
        end
      end
    return 1;
  endfunction

  initial begin
    int nflag = 0;
    for (int t = 0; t < 300; t++) begin
      threshold = ACC_W'($urandom_range(0, 5));
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          centre[r][c] = ACC_W'($urandom_range(0, 9));
      #1;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (is_max[r][c] != ref_flag(r, c)) begin
            failures++;
            $display("FAIL trial %0d cell %0d,%0d flag %0d", t, r, c, is_max[r][c]);
          end
          nflag += int'(is_max[r][c]);
        end
    end
    // plateau
    threshold = 12'd3;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) centre[r][c] = 12'd7;
    #1;
    begin
      int n = 0;
      for (int r = 0; r < R; r++) n += $countones(is_max[r]);
      checks++;
      if (n != 1 || !is_max[0][0]) begin
        failures++;
        $display("FAIL plateau gives %0d flags", n);
      end
    end
    checks++;
    if (nflag == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
