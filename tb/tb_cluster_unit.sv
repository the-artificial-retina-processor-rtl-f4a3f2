// tb_cluster_unit: checks the centre-of-excitation unit of one group of 12 engines.
//
// Random local copies (seven accumulators per engine), random 3x3 neighbourhoods,
// random base coordinates and random local-maximum flags are presented; after a
// one-cycle start the unit must emit one track per flagged engine, lowest index
// first. Expected values, computed here: u offset = (right column - left column) /
// (3x3 sum), v offset = (lower row - upper row) / (3x3 sum), d, p, z offsets =
// (upper - lower lateral accumulator) / (sum of the seven), each truncated towards
// zero to 9 fraction bits and added to the engine's base value. Random back-pressure
// is applied to the output. The first track must appear 12 cycles after start
// (one cycle to pick the engine, then the 11 cycles of the computation); `done` must
// pulse once per round, also for a round with no flag.
module tb_cluster_unit;
  import retina_pkg::*;

  localparam int G = 12;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    start;
  logic [G-1:0]            flags;
  logic [ROW_W-1:0]        row;
  logic [TS_W-1:0]         ts;
  logic [ACC_W-1:0]        acc [G][N_PASS];
  logic [ACC_W-1:0]        nb  [G][3][3];
  logic                    base_we;
  logic [7:0]              base_idx;
  logic [2:0]              base_sel;
  logic signed [POS_W-1:0] base_data;
  logic                    out_valid, out_ready, busy, done;
  track_t                  out_track;

  cluster_unit #(.GROUP(G)) dut (.*);

  int checks = 0, failures = 0;
  int base [G][5];
  int n_done = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int frac_div(input int num, input int den);
    int q;
    q = ((num < 0 ? -num : num) * 512) / den;
    return num < 0 ? -q : q;
  endfunction

  always @(posedge clk) if (done) n_done++;

  initial begin
    start = 1'b0; flags = '0; row = 8'd3; ts = 4'd9; base_we = 1'b0;
    base_idx = '0; base_sel = '0; base_data = '0; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int e = 0; e < G; e++)
      for (int k = 0; k < 5; k++) begin
        base[e][k] = int'($urandom_range(0, 20000)) - 10000;
        @(negedge clk);
        base_we = 1'b1; base_idx = 8'(e); base_sel = 3'(k); base_data = 16'(base[e][k]);
      end
    @(negedge clk);
    base_we = 1'b0;

    for (int round = 0; round < 20; round++) begin
      automatic int t = 0;
      automatic int first = 1;
      automatic int d0 = n_done;
      for (int e = 0; e < G; e++) begin
        for (int p = 0; p < N_PASS; p++) acc[e][p] = 12'($urandom_range(0, 800));
        for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) nb[e][r][c] = 12'($urandom_range(0, 800));
        nb[e][1][1] = acc[e][0];
        nb[e][1][1] = nb[e][1][1] | 12'd1;     // a flagged cell is never empty
        acc[e][0]   = nb[e][1][1];
      end
      flags = (round == 5) ? '0 : G'($urandom_range(0, 4095));
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int e = 0; e < G; e++) begin
        if (flags[e]) begin
          int w1, w2, nu, nv;
          int expv [5];
          w1 = 0; nu = 0; nv = 0; w2 = 0;
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) w1 += int'(nb[e][r][c]);
          for (int r = 0; r < 3; r++) begin
            nu += int'(nb[e][r][2]) - int'(nb[e][r][0]);
            nv += int'(nb[e][2][r]) - int'(nb[e][0][r]);
          end
          for (int p = 0; p < N_PASS; p++) w2 += int'(acc[e][p]);
          expv[0] = base[e][0] + frac_div(nu, w1);
          expv[1] = base[e][1] + frac_div(nv, w1);
          expv[2] = base[e][2] + frac_div(int'(acc[e][2]) - int'(acc[e][1]), w2);
          expv[3] = base[e][3] + frac_div(int'(acc[e][4]) - int'(acc[e][3]), w2);
          expv[4] = base[e][4] + frac_div(int'(acc[e][6]) - int'(acc[e][5]), w2);
          // wait for the track
          while (!out_valid) begin
            @(negedge clk);
            t++;
          end
          if (first) check(t == 12, $sformatf("first track %0d cycles after start", t));
          first = 0;
          // random hold before accepting
          out_ready = 1'b0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
          check(out_valid, "track held while not accepted");
          check(int'(out_track.col) == e && out_track.row == 8'd3 && out_track.ts == 4'd9,
                $sformatf("track cell %0d expected %0d", out_track.col, e));
          check(out_track.peak == acc[e][0], "peak excitation");
          check(int'(out_track.u) == expv[0], $sformatf("u %0d expected %0d", out_track.u, expv[0]));
          check(int'(out_track.v) == expv[1], $sformatf("v %0d expected %0d", out_track.v, expv[1]));
          check(int'(out_track.d) == expv[2], $sformatf("d %0d expected %0d", out_track.d, expv[2]));
          check(int'(out_track.p) == expv[3], $sformatf("p %0d expected %0d", out_track.p, expv[3]));
          check(int'(out_track.z) == expv[4], $sformatf("z %0d expected %0d", out_track.z, expv[4]));
          out_ready = 1'b1;
          @(negedge clk);
          t++;
        end
      end
      repeat (4) @(negedge clk);
      check(!out_valid && !busy, "unit idle after the round");
      check(n_done == d0 + 1, "done pulsed once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
