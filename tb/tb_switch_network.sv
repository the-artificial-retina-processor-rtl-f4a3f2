// tb_switch_network: self-checking test of the 16 x 16 switching network.
//
// First one hit crosses the idle network alone, to check the latency of one cycle
// per stage. Then all 16 inputs carry random hits with random zip-codes, random
// valid gaps and random output back-pressure, each event closed by an end-of-event
// word on every input. Two maps are rewritten so that hits are duplicated: in the
// last stage node 2 sends zip-code 5 to outputs 4 and 5; in the first stage node 0
// sends zip-code 9 to both halves, so hits entering on inputs 0 and 1 with zip-code 9
// reach outputs 9 and 1. Otherwise a hit must leave on the output equal to its
// zip-code (the figure's bit-3-first routing). The reference is this list of
// destinations, independent of the network's wiring; per input and output the order
// is checked, and every output must get one end-of-event word per event, after all
// of that event's hits.
module tb_switch_network;
  import retina_pkg::*;

  localparam int N = 16;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  hit_t         in_hit [N];
  hit_t         out_hit [N];
  logic         map_we;
  logic [7:0]   map_stage;
  logic [15:0]  map_node;
  logic [ZIP_W-1:0] map_zip;
  logic [1:0]   map_mask;
  logic [N/2*4-1:0] conflict, dup;

  switch_network #(.N(N), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  localparam int EVENTS = 12;
  localparam int HITS = 8;
  hit_t stim [N][$];
  hit_t expq [N][N][$];
  int   eoe_seen [N];
  int   n_dup = 0, n_conf = 0;
  logic started = 1'b0;
  logic running = 1'b0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic void expect_hit(input int i, input hit_t h);
    if (h.eoe) begin
      for (int o = 0; o < N; o++) if (i == 0) expq[0][o].push_back(h);
    end else begin
      expq[i][h.zip].push_back(h);
      if (h.zip == 5) expq[i][4].push_back(h);
      if (h.zip == 9 && i < 2) expq[i][1].push_back(h);
    end
  endfunction

  initial begin
    int id = 0;
    for (int i = 0; i < N; i++)
      for (int e = 0; e < EVENTS; e++) begin
        for (int k = 0; k < HITS; k++) begin
          hit_t h;
          h = '0;
          h.zip = 4'($urandom_range(0, 15));
          h.ts  = 4'(e);
          h.u   = 14'(id++);
          h.v   = 14'(i);
          stim[i].push_back(h);
        end
        begin
          hit_t h;
          h = '0; h.eoe = 1'b1; h.ts = 4'(e);
          stim[i].push_back(h);
        end
      end
  end

  initial begin
    int t0;
    in_valid = '0; out_ready = '1; map_we = 1'b0;
    map_stage = '0; map_node = '0; map_zip = '0; map_mask = '0;
    for (int i = 0; i < N; i++) in_hit[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // latency of one lone hit
    in_valid[0] <= 1'b1;
    in_hit[0]   <= '{eoe: 1'b0, zip: 4'd15, ts: 4'd0, layer: 4'd0, u: 14'd77, v: 14'd0};
    @(posedge clk);           // accepted by the first stage on this edge
    in_valid[0] <= 1'b0;
    t0 = 1;
    @(negedge clk);
    while (!out_valid[15]) begin
      @(posedge clk);
      t0++;
      @(negedge clk);
    end
    check(t0 == 4, $sformatf("lone hit output after %0d cycles (expect 4 stages)", t0));
    check(out_hit[15].u == 14'd77, "lone hit content");
    @(posedge clk);
    // duplicate maps
    map_we <= 1'b1; map_stage <= 8'd3; map_node <= 16'd2; map_zip <= 4'd5; map_mask <= 2'b11;
    @(posedge clk);
    map_stage <= 8'd0; map_node <= 16'd0; map_zip <= 4'd9; map_mask <= 2'b11;
    @(posedge clk);
    map_we <= 1'b0;
    @(posedge clk);
    running <= 1'b1;
  end

  always @(posedge clk) begin
    if (running) begin
      started <= 1'b1;
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) expect_hit(i, stim[i].pop_front());
      end
      for (int o = 0; o < N; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          hit_t h;
          int   src;
          h   = out_hit[o];
          src = h.eoe ? 0 : int'(h.v);
          if (expq[src][o].size() == 0) check(1'b0, $sformatf("unexpected word %h on %0d", h, o));
          else begin
            hit_t e;
            e = expq[src][o].pop_front();
            check(h == e, $sformatf("output %0d got %h expected %h", o, h, e));
            if (h.eoe) begin
              eoe_seen[o]++;
              for (int i = 0; i < N; i++)
                check(expq[i][o].size() == 0 || expq[i][o][0].ts != h.ts || expq[i][o][0].eoe,
                      "end-of-event behind its hits");
            end
          end
        end
      end
      n_dup  += $countones(dup);
      n_conf += $countones(conflict);
      for (int i = 0; i < N; i++) begin
        if (!(in_valid[i] && !in_ready[i])) begin
          if (stim[i].size() > 0 && $urandom_range(0, 2) != 0) begin
            in_valid[i] <= 1'b1;
            in_hit[i]   <= stim[i][0];
          end else in_valid[i] <= 1'b0;
        end
      end
      for (int o = 0; o < N; o++) out_ready[o] <= ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    bit all_empty;
    wait (started);
    do begin
      @(posedge clk);
      all_empty = 1;
      for (int i = 0; i < N; i++) if (stim[i].size() != 0) all_empty = 0;
    end while (!all_empty);
    repeat (100) @(posedge clk);
    for (int o = 0; o < N; o++) begin
      check(eoe_seen[o] == EVENTS, $sformatf("output %0d end-of-event count %0d", o, eoe_seen[o]));
      for (int i = 0; i < N; i++) check(expq[i][o].size() == 0, "all expected words delivered");
    end
    check(n_dup > 0, "duplications happened");
    check(n_conf > 0, "conflicts happened");
    $display("duplications=%0d conflicts=%0d", n_dup, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
