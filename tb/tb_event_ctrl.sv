// tb_event_ctrl: checks the end-of-event sequencing.
//
// Eight engine copies become valid one by one in random order; `start` must pulse
// exactly once, only after the last one. Four clustering units then report done at
// random times; `release_copy` must pulse once, one cycle after the last done, and
// not before. The copies drop on release and the sequence repeats for several events,
// counted by events_done.
module tb_event_ctrl;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NE = 8, NU = 4;
  logic [NE-1:0] snap_valid;
  logic [NU-1:0] unit_done;
  logic          start, release_copy, busy;
  logic [31:0]   events_done;

  event_ctrl #(.NE(NE), .NU(NU)) dut (.*);

  int checks = 0, failures = 0;
  int n_start = 0, n_release = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (start) n_start++;
    if (release_copy) n_release++;
  end

  initial begin
    snap_valid = '0; unit_done = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int ev = 0; ev < 10; ev++) begin
      automatic int s0 = n_start;
      automatic int r0 = n_release;
      automatic logic [NU-1:0] pend = '1;
      while (snap_valid != '1) begin
        @(negedge clk);
        check(!start, "no start before all copies are valid");
        snap_valid[$urandom_range(0, NE - 1)] = 1'b1;
      end
      @(negedge clk);
      check(start, "start one cycle after the last copy");
      @(negedge clk);
      check(!start, "start is a single pulse");
      while (pend != '0) begin
        automatic int u = $urandom_range(0, NU - 1);
        repeat ($urandom_range(0, 5)) begin
          @(negedge clk);
          check(!release_copy, "no release while units are busy");
        end
        unit_done = '0;
        if (pend[u]) begin
          unit_done[u] = 1'b1;
          pend[u] = 1'b0;
        end
        @(negedge clk);
        unit_done = '0;
        if (pend != '0) check(!release_copy, "no release before the last done");
      end
      check(release_copy, "release one cycle after the last done");
      snap_valid = '0;
      @(negedge clk);
      check(n_start == s0 + 1 && n_release == r0 + 1, "one start and one release per event");
      check(events_done == 32'(ev + 1), "event counter");
    end
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
