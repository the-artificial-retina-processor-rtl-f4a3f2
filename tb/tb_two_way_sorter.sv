// tb_two_way_sorter: self-checking test of one switch node.
//
// Two random hit streams (random valid gaps) enter the node, random back-pressure is
// applied to the outputs. The zip-code map is left at its reset content (route by
// bit 0) except for one zip-code sent to both outputs and one that is dropped. Every
// event ends with an end-of-event word on both inputs. An independent model keeps,
// per (input, output) pair, the queue of hits that must appear; each output word is
// checked against the queue of the input it came from (carried in v), so order per
// input and the duplication are verified. Each output must see exactly one
// end-of-event word per event, after all hits of that event. Conflicts (both inputs
// wanting the same output) and duplications are counted and must occur.
module tb_two_way_sorter;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] in_valid, in_ready, out_valid, out_ready;
  hit_t       in_hit [2];
  hit_t       out_hit [2];
  logic       map_we;
  logic [ZIP_W-1:0] map_zip;
  logic [1:0] map_mask;
  logic       conflict, dup;

  two_way_sorter #(.DEPTH(4), .ROUTE_BIT(0)) dut (.*);

  int checks = 0, failures = 0;
  localparam int EVENTS = 40;
  localparam int HITS_PER_EVENT = 12;

  hit_t stim [2][$];
  hit_t expq [2][2][$];      // [input][output]
  int   eoe_seen [2];
  int   n_conflict = 0, n_dup = 0, n_out = 0;
  logic [1:0] cur_mask [16];

  function automatic logic [1:0] ref_mask(input logic [ZIP_W-1:0] z);
    return cur_mask[z];
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int z = 0; z < 16; z++) cur_mask[z] = z[0] ? 2'b10 : 2'b01;
    cur_mask[3] = 2'b11;
    cur_mask[4] = 2'b00;
    for (int i = 0; i < 2; i++) begin
      int id = 0;
      for (int e = 0; e < EVENTS; e++) begin
        for (int k = 0; k < HITS_PER_EVENT; k++) begin
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
          h = '0;
          h.eoe = 1'b1;
          h.ts  = 4'(e);
          h.v   = 14'(i);
          stim[i].push_back(h);
        end
      end
    end
  end

  initial begin
    in_valid = '0; out_ready = '0; map_we = 1'b0; map_zip = '0; map_mask = '0;
    in_hit[0] = '0; in_hit[1] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    map_we <= 1'b1; map_zip <= 4'd3; map_mask <= 2'b11;
    @(posedge clk);
    map_we <= 1'b1; map_zip <= 4'd4; map_mask <= 2'b00;
    @(posedge clk);
    map_we <= 1'b0;
  end

  // stimulus and scoreboard, all sampled on the clock edge
  logic started = 1'b0;
  always @(posedge clk) begin
    if (rst_n && !map_we && $time > 60) started <= 1'b1;
    if (started) begin
      // inputs accepted this cycle
      for (int i = 0; i < 2; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          hit_t h;
          h = stim[i].pop_front();
          if (!h.eoe) begin
            for (int o = 0; o < 2; o++)
              if (ref_mask(h.zip)[o]) expq[i][o].push_back(h);
          end else if (i == 0) begin
            for (int o = 0; o < 2; o++) expq[0][o].push_back(h);
            check(in_ready[1] && in_valid[1] && in_hit[1].eoe, "end-of-event words taken together");
          end
        end
      end
      // outputs taken this cycle
      for (int o = 0; o < 2; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          hit_t h;
          int   src;
          n_out++;
          h   = out_hit[o];
          src = h.eoe ? 0 : int'(h.v);
          if (expq[src][o].size() == 0) begin
            check(1'b0, $sformatf("unexpected word on output %0d", o));
          end else begin
            hit_t e;
            e = expq[src][o].pop_front();
            check(h == e, $sformatf("output %0d word %h expected %h", o, h, e));
            if (h.eoe) begin
              // every hit of the event from input 1 must have left already
              check(expq[1][o].size() == 0 || expq[1][o][0].ts != h.ts,
                    "end-of-event after all hits of its event");
              eoe_seen[o]++;
            end
          end
        end
      end
      if (conflict) n_conflict++;
      if (dup) n_dup++;
      // next stimulus
      for (int i = 0; i < 2; i++) begin
        if (!(in_valid[i] && !in_ready[i])) begin
          // the word just accepted has been popped: the head is the next one
          if (stim[i].size() > 0 && $urandom_range(0, 3) != 0) begin
            in_valid[i] <= 1'b1;
            in_hit[i]   <= stim[i][0];
          end else begin
            in_valid[i] <= 1'b0;
          end
        end
      end
      out_ready <= 2'($urandom_range(0, 3)) | 2'($urandom_range(0, 3));
    end
  end

  initial begin
    wait (started);
    wait (stim[0].size() == 0 && stim[1].size() == 0);
    repeat (50) @(posedge clk);
    for (int o = 0; o < 2; o++) begin
      check(eoe_seen[o] == EVENTS, $sformatf("output %0d saw %0d end-of-event words", o, eoe_seen[o]));
      for (int i = 0; i < 2; i++)
        check(expq[i][o].size() == 0, $sformatf("hits from input %0d left for output %0d", i, o));
    end
    check(n_conflict > 0, "conflicts occurred");
    check(n_dup > 0, "duplications occurred");
    $display("conflicts=%0d duplications=%0d words_out=%0d", n_conflict, n_dup, n_out);
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
