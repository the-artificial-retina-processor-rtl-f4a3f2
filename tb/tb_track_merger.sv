// tb_track_merger: checks the merge of the clustering units' track streams.
//
// Four sources offer numbered tracks at random times; the output is read with random
// back-pressure. Every track must come out exactly once, in order per source, and no
// source may wait while the others are served more than once each (round robin:
// between two grants to one requesting source every other source is granted at most
// once).
module tb_track_merger;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NU = 4;
  localparam int PER = 50;
  logic [NU-1:0] in_valid, in_ready;
  track_t        in_track [NU];
  logic          out_valid, out_ready;
  track_t        out_track;

  track_merger #(.NU(NU)) dut (.*);

  int checks = 0, failures = 0;
  int sent [NU], got [NU];
  int since [NU][NU];     // grants to j since i's last grant while i was requesting
  int total = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic track_t mk(input int src, input int n);
    track_t t;
    t = '0;
    t.row = 8'(src);
    t.col = 8'(n);
    t.u   = 16'(src * 1000 + n);
    return t;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NU; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          for (int j = 0; j < NU; j++) if (in_valid[j] && j != i) since[j][i]++;
          since[i] = '{default: 0};
          check(since[i][i] == 0, "bookkeeping");
        end
      end
      for (int j = 0; j < NU; j++)
        for (int i = 0; i < NU; i++)
          if (since[j][i] > 1) begin
            check(1'b0, $sformatf("source %0d waits while %0d served twice", j, i));
            since[j][i] = 0;
          end
      if (out_valid && out_ready) begin
        automatic int s = int'(out_track.row);
        check(int'(out_track.col) == got[s] && out_track.u == 16'(s * 1000 + got[s]),
              $sformatf("track %0d of source %0d out of order", out_track.col, s));
        got[s]++;
        total++;
      end
      for (int i = 0; i < NU; i++) begin
        if (in_valid[i] && in_ready[i]) sent[i]++;
        if (!(in_valid[i] && !in_ready[i])) begin
          automatic int n = sent[i] + ((in_valid[i] && in_ready[i]) ? 0 : 0);
          if (n < PER && $urandom_range(0, 2) != 0) begin
            in_valid[i] <= 1'b1;
            in_track[i] <= mk(i, n);
          end else in_valid[i] <= 1'b0;
        end
      end
      out_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    in_valid = '0; out_ready = 1'b0;
    for (int i = 0; i < NU; i++) begin
      in_track[i] = '0; sent[i] = 0; got[i] = 0;
      for (int j = 0; j < NU; j++) since[i][j] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (total == NU * PER);
    repeat (10) @(posedge clk);
    for (int i = 0; i < NU; i++) check(got[i] == PER, $sformatf("source %0d: %0d tracks", i, got[i]));
    check(!out_valid, "nothing left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
