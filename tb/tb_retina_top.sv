// tb_retina_top: end-to-end test of the retina processor at its default size
// (16 x 16 switching network, 16 rows of 12 engines, 16 clustering units).
//
// Toy geometry used by the test. Engine (row r, column c) is the cell centred on
// (U, V) = (32 c, 32 r) in the primary plane. A straight track through the origin
// with primary parameters (tu, tv) crosses layer k (k = 0..9) at
// (tu (k+5)/10, tv (k+5)/10); the receptors of pass 0 are these points for the cell
// centre. The lateral passes move the receptors: d-/d+ by -/+8 in u, p-/p+ by
// -/+2k in u, z-/z+ by -/+8 in v. Hits carry as zip-code the row nearest to tv; the
// switch maps are programmed so that zip-code z reaches rows z-1, z, z+1 (the three
// rows of a 3x3 neighbourhood), which makes the network duplicate hits.
//
// Each event holds one to three tracks plus noise hits, spread over random input
// ports; every input then sends the event's end-of-event word. The next event follows
// at once, so hits of one event are processed while the previous one is clustered,
// and an end-of-event word regularly has to wait for the copies of the previous event
// (a stall). Checks: every generated track appears at the output with its event's
// time stamp and u, v within half a cell of the truth; no more than two extra
// (noise or split) tracks per event; the engine grid completes one end-of-event
// sequence per event; a one-track event reaches the output within 150 cycles of its
// end-of-event word (the paper's total latency bound). The mechanisms (duplication,
// node conflict, row stall, clustering round) are counted and each must occur.
module tb_retina_top;
  import retina_pkg::*;

  localparam int N = 16, G = 12, PITCH = 32, EVENTS = 24;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]              in_valid, in_ready;
  hit_t                      in_hit [N];
  logic                      map_we;
  logic [7:0]                map_stage;
  logic [15:0]               map_node;
  logic [ZIP_W-1:0]          map_zip;
  logic [1:0]                map_mask;
  logic                      rec_we;
  logic [ROW_W-1:0]          rec_row;
  logic [COL_W-1:0]          rec_col;
  logic [2:0]                rec_pass;
  logic [LAYER_W-1:0]        rec_layer;
  logic signed [COORD_W-1:0] rec_u0, rec_v0;
  logic                      base_we;
  logic [ROW_W-1:0]          base_row;
  logic [7:0]                base_idx;
  logic [2:0]                base_sel;
  logic signed [POS_W-1:0]   base_data;
  logic [ACC_W-1:0]          threshold;
  logic                      out_valid, out_ready;
  track_t                    out_track;
  logic [31:0]               mon_conflict, mon_dup;
  logic [N-1:0]              mon_row_stall;
  logic                      mon_cluster_start;
  logic [31:0]               events_done;

  retina_top dut (.*);

  int checks = 0, failures = 0;
  hit_t stim [N][$];
  hit_t late [N][$];      // the isolated last event
  int   tr_u [EVENTS][$];
  int   tr_v [EVENTS][$];
  int   found [EVENTS][$];
  int   extra [EVENTS];
  int   eoe_time [EVENTS];
  int   last_out [EVENTS];
  int   n_dup = 0, n_conf = 0, n_stall = 0, n_rounds = 0, n_tracks = 0;
  int   cycle = 0;
  logic running = 1'b0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int rdiv(input int a, input int b);   // rounded division
    return (a >= 0) ? (a + b / 2) / b : -((-a + b / 2) / b);
  endfunction

  function automatic int clampi(input int x, input int lo, input int hi);
    return x < lo ? lo : (x > hi ? hi : x);
  endfunction

  always @(posedge clk) cycle++;

  // ---------------- configuration
  task automatic configure();
    // switch maps: zip z must reach outputs z-1, z, z+1
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < N / 2; i++)
        for (int z = 0; z < 16; z++) begin
          logic [1:0] m;
          int gsz, grp;
          m   = 2'b00;
          gsz = (N / 2) >> s;
          grp = i / gsz;
          for (int d = z - 1; d <= z + 1; d++) begin
            if (d >= 0 && d < N && (d >> (4 - s)) == grp) m[(d >> (3 - s)) & 1] = 1'b1;
          end
          @(negedge clk);
          map_we = 1'b1; map_stage = 8'(s); map_node = 16'(i); map_zip = 4'(z); map_mask = m;
        end
    @(negedge clk);
    map_we = 1'b0;
    // receptors
    for (int r = 0; r < N; r++)
      for (int c = 0; c < G; c++)
        for (int p = 0; p < N_PASS; p++)
          for (int k = 0; k < 10; k++) begin
            int u0, v0;
            u0 = rdiv(c * PITCH * (k + 5), 10);
            v0 = rdiv(r * PITCH * (k + 5), 10);
            case (p)
              1: u0 -= 8;      2: u0 += 8;
              3: u0 -= 2 * k;  4: u0 += 2 * k;
              5: v0 -= 8;      6: v0 += 8;
              default: ;
            endcase
            @(negedge clk);
            rec_we = 1'b1; rec_row = 8'(r); rec_col = 8'(c); rec_pass = 3'(p);
            rec_layer = 4'(k); rec_u0 = 14'(u0); rec_v0 = 14'(v0);
          end
    @(negedge clk);
    rec_we = 1'b0;
    // base coordinates: cell index in fixed point
    for (int r = 0; r < N; r++)
      for (int c = 0; c < G; c++)
        for (int k = 0; k < 5; k++) begin
          @(negedge clk);
          base_we = 1'b1; base_row = 8'(r); base_idx = 8'(c); base_sel = 3'(k);
          base_data = (k == 0) ? 16'(c << FRAC) : (k == 1) ? 16'(r << FRAC) : 16'd0;
        end
    @(negedge clk);
    base_we = 1'b0;
  endtask

  // ---------------- event generation
  task automatic make_events();
    for (int e = 0; e < EVENTS; e++) begin
      int ntr;
      ntr = (e % 4 == 0 || e == EVENTS - 1) ? 1 : $urandom_range(1, 3);
      for (int t = 0; t < ntr; t++) begin
        int tu, tv, ok;
        // tracks at least 3 cells apart, away from the grid edge
        do begin
          ok = 1;
          tu = $urandom_range(PITCH + 8, (G - 2) * PITCH - 8);
          tv = $urandom_range(PITCH + 8, (N - 2) * PITCH - 8);
          for (int q = 0; q < tr_u[e].size(); q++)
            if ((tu - tr_u[e][q]) < 3 * PITCH && (tr_u[e][q] - tu) < 3 * PITCH &&
                (tv - tr_v[e][q]) < 3 * PITCH && (tr_v[e][q] - tv) < 3 * PITCH) ok = 0;
        end while (!ok);
        tr_u[e].push_back(tu);
        tr_v[e].push_back(tv);
        found[e].push_back(0);
        for (int k = 0; k < 10; k++) begin
          hit_t h;
          h = '0;
          h.ts    = 4'(e % 16);
          h.layer = 4'(k);
          h.u     = 14'(rdiv(tu * (k + 5), 10) + int'($urandom_range(0, 6)) - 3);
          h.v     = 14'(rdiv(tv * (k + 5), 10) + int'($urandom_range(0, 6)) - 3);
          h.zip   = 4'(clampi(rdiv(tv, PITCH), 0, N - 1));
          if (e == EVENTS - 1) late[k].push_back(h);   // one hit per input, all at once
          else stim[$urandom_range(0, N - 1)].push_back(h);
        end
      end
      if (e == EVENTS - 1) begin
        for (int i = 0; i < N; i++) begin
          hit_t h;
          h = '0;
          h.eoe = 1'b1;
          h.ts  = 4'(e % 16);
          late[i].push_back(h);
        end
        continue;
      end
      // noise hits
      for (int j = 0; j < 6; j++) begin
        hit_t h;
        h = '0;
        h.ts    = 4'(e % 16);
        h.layer = 4'($urandom_range(0, 9));
        h.u     = 14'($urandom_range(0, G * PITCH));
        h.v     = 14'($urandom_range(0, N * PITCH));
        h.zip   = 4'($urandom_range(0, 15));
        stim[$urandom_range(0, N - 1)].push_back(h);
      end
      for (int i = 0; i < N; i++) begin
        hit_t h;
        h = '0;
        h.eoe = 1'b1;
        h.ts  = 4'(e % 16);
        stim[i].push_back(h);
      end
    end
  endtask

  // ---------------- drive inputs, collect outputs
  int next_ev [N];
  always @(posedge clk) begin
    if (running) begin
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          hit_t h;
          h = stim[i].pop_front();
          if (h.eoe) begin
            eoe_time[next_ev[i]] = cycle;     // last input to send it sets the time
            next_ev[i]++;
          end
        end
        if (!(in_valid[i] && !in_ready[i])) begin
          if (stim[i].size() > 0) begin
            in_valid[i] <= 1'b1;
            in_hit[i]   <= stim[i][0];
          end else in_valid[i] <= 1'b0;
        end
      end
      if (out_valid && out_ready) begin
        int e, hit;
        n_tracks++;
        // the event is the oldest one with this time stamp not yet completed
        // rounds run in event order: the track belongs to the latest round with its stamp
        e = ((n_rounds - 1) % 16 == int'(out_track.ts)) ? n_rounds - 1 : n_rounds - 2;
        hit = 0;
        for (int q = 0; q < tr_u[e].size(); q++) begin
          int du, dv;
          du = int'(out_track.u) - ((tr_u[e][q] << FRAC) / PITCH);
          dv = int'(out_track.v) - ((tr_v[e][q] << FRAC) / PITCH);
          if (du < (1 << (FRAC - 1)) && -du < (1 << (FRAC - 1)) &&
              dv < (1 << (FRAC - 1)) && -dv < (1 << (FRAC - 1))) begin
            found[e][q]++;
            hit = 1;
          end
        end
        if (!hit) extra[e]++;
        last_out[e] = cycle;
      end
      out_ready <= ($urandom_range(0, 7) != 0);
      n_dup   += $countones(mon_dup);
      n_conf  += $countones(mon_conflict);
      n_stall += (mon_row_stall != '0) ? 1 : 0;
      if (mon_cluster_start) n_rounds++;
    end
  end

  initial begin
    in_valid = '0; out_ready = 1'b1; map_we = 1'b0; rec_we = 1'b0; base_we = 1'b0;
    map_stage = '0; map_node = '0; map_zip = '0; map_mask = '0;
    rec_row = '0; rec_col = '0; rec_pass = '0; rec_layer = '0; rec_u0 = '0; rec_v0 = '0;
    base_row = '0; base_idx = '0; base_sel = '0; base_data = '0;
    threshold = 12'd600;
    for (int i = 0; i < N; i++) begin
      in_hit[i] = '0;
      next_ev[i] = 0;
    end
    for (int e = 0; e < EVENTS; e++) begin
      extra[e] = 0; eoe_time[e] = -1; last_out[e] = -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    configure();
    make_events();
    @(negedge clk);
    running = 1'b1;
    wait (events_done == 32'(EVENTS - 1));
    repeat (20) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < N; i++) while (late[i].size() > 0) stim[i].push_back(late[i].pop_front());
    wait (events_done == 32'(EVENTS));
    repeat (100) @(posedge clk);
    for (int e = 0; e < EVENTS; e++) begin
      for (int q = 0; q < tr_u[e].size(); q++)
        check(found[e][q] >= 1, $sformatf("event %0d track %0d (u=%0d v=%0d) found %0d times",
                                          e, q, tr_u[e][q], tr_v[e][q], found[e][q]));
      check(extra[e] <= 2, $sformatf("event %0d has %0d extra tracks", e, extra[e]));
    end
    check(events_done == 32'(EVENTS), "all events completed");
    // latency of the last event, sent alone into the idle processor
    check(last_out[EVENTS-1] - eoe_time[EVENTS-1] < 150,
          $sformatf("isolated event: last track %0d cycles after its end-of-event word",
                    last_out[EVENTS-1] - eoe_time[EVENTS-1]));
    $display("isolated one-track event latency: %0d cycles", last_out[EVENTS-1] - eoe_time[EVENTS-1]);
    check(n_dup > 0, "switch duplicated hits");
    check(n_conf > 0, "switch node conflicts");
    check(n_stall > 0, "engine rows stalled the switch");
    check(n_rounds == EVENTS, "one clustering round per event");
    $display("tracks=%0d duplications=%0d conflicts=%0d stall_cycles=%0d rounds=%0d cycles=%0d",
             n_tracks, n_dup, n_conf, n_stall, n_rounds, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog events_done=%0d", events_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
