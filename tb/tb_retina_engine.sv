// tb_retina_engine: self-checking test of one receptive-field engine.
//
// Random receptor coordinates are loaded for the 10 layers and 7 passes. A stream of
// events follows: each event has hits near the cell's receptors (some on a layer
// number the engine does not have, which must add nothing), a few early hits of the
// next event, then the event's end-of-event word. The reference model computes, for
// every accepted hit and pass, ds^2 = (u-u0)^2 + (v-v0)^2, the table address
// min(255, ds^2 >> 4), the weight round(255 exp(-addr/32)) and the saturating
// 12-bit sums per event and pass. Each local copy produced by the engine is compared
// with the model. The local copy is released after a random delay, sometimes long,
// so that an end-of-event word has to wait: those stalls are counted and must occur.
// The test also checks that back-to-back hits are accepted exactly every 7 cycles
// and that a lone hit's last pass reaches its accumulator 12 cycles after acceptance.
module tb_retina_engine;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      in_valid, in_ready;
  hit_t                      in_hit;
  logic                      rec_we;
  logic [2:0]                rec_pass;
  logic [LAYER_W-1:0]        rec_layer;
  logic signed [COORD_W-1:0] rec_u0, rec_v0;
  logic                      snap_valid;
  logic [TS_W-1:0]           snap_ts;
  logic [ACC_W-1:0]          snap_acc [N_PASS];
  logic                      snap_release;

  retina_engine #(.N_LAYERS(10)) dut (.*);

  int checks = 0, failures = 0;
  int ru [N_PASS][10];
  int rv [N_PASS][10];
  int model [16][N_PASS];
  int expected [$];          // N_PASS values per ended event
  int exp_ts [$];
  hit_t stim [$];
  int n_eoe_stall = 0, n_snaps = 0;
  localparam int EVENTS = 30;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int weight_of(input int du, input int dv);
    int ds2, a;
    ds2 = du * du + dv * dv;
    a   = ds2 >> 4;
    if (a > 255) a = 255;
    return $rtoi(255.0 * $exp(-a / 32.0) + 0.5);
  endfunction

  function automatic hit_t mk_hit(input int ts, input int layer);
    hit_t h;
    h = '0;
    h.ts    = 4'(ts);
    h.layer = 4'(layer);
    h.u     = 14'((layer < 10 ? ru[0][layer] : 0) + $urandom_range(0, 60) - 30);
    h.v     = 14'((layer < 10 ? rv[0][layer] : 0) + $urandom_range(0, 60) - 30);
    return h;
  endfunction

  // model update for an accepted word
  function automatic void accept_word(input hit_t h);
    if (h.eoe) begin
      for (int p = 0; p < N_PASS; p++) begin
        expected.push_back(model[h.ts][p]);
        model[h.ts][p] = 0;
      end
      exp_ts.push_back(int'(h.ts));
    end else if (h.layer < 10) begin
      for (int p = 0; p < N_PASS; p++) begin
        model[h.ts][p] += weight_of(int'(h.u) - ru[p][int'(h.layer)], int'(h.v) - rv[p][int'(h.layer)]);
        if (model[h.ts][p] > 4095) model[h.ts][p] = 4095;
      end
    end
  endfunction

  initial begin
    int t_acc [$];
    in_valid = 1'b0; in_hit = '0; rec_we = 1'b0; rec_pass = '0; rec_layer = '0;
    rec_u0 = '0; rec_v0 = '0; snap_release = 1'b0;
    for (int t = 0; t < 16; t++) for (int p = 0; p < N_PASS; p++) model[t][p] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // receptors: pass p shifted from the centre cell by a few units per layer
    for (int p = 0; p < N_PASS; p++)
      for (int k = 0; k < 10; k++) begin
        ru[p][k] = (p == 0) ? int'($urandom_range(0, 400)) - 200 : ru[0][k] + int'($urandom_range(0, 40)) - 20;
        rv[p][k] = (p == 0) ? int'($urandom_range(0, 400)) - 200 : rv[0][k] + int'($urandom_range(0, 40)) - 20;
        @(posedge clk);
        rec_we <= 1'b1; rec_pass <= 3'(p); rec_layer <= 4'(k);
        rec_u0 <= 14'(ru[p][k]); rec_v0 <= 14'(rv[p][k]);
      end
    @(posedge clk);
    rec_we <= 1'b0;

    // ---- latency and initiation interval: four back-to-back hits of event 15
    for (int j = 0; j < 4; j++) stim.push_back(mk_hit(15, j));
    @(negedge clk);
    for (int j = 0; j < 4; j++) begin
      automatic int t = 0;
      in_valid = 1'b1;
      in_hit   = stim[j];
      while (!in_ready) begin
        @(negedge clk);
        t++;
      end
      @(posedge clk);
      accept_word(stim[j]);
      t_acc.push_back($rtoi($time / 10));
      @(negedge clk);
    end
    in_valid = 1'b0;
    for (int j = 1; j < 4; j++)
      check(t_acc[j] - t_acc[j-1] == 7, $sformatf("hit interval %0d cycles", t_acc[j] - t_acc[j-1]));
    // last pass of the last hit lands 12 cycles after its acceptance
    repeat (11) @(posedge clk);
    #1;
    check(int'(dut.exc[15][6]) != model[15][6], "last pass not yet accumulated at 11 cycles");
    @(posedge clk);
    #1;
    check(int'(dut.exc[15][6]) == model[15][6], "last pass accumulated at 12 cycles");
    for (int p = 0; p < N_PASS; p++)
      check(int'(dut.exc[15][p]) == model[15][p], $sformatf("event 15 pass %0d accumulator", p));
    stim.delete();

    // ---- event stream
    for (int e = 0; e < EVENTS; e++) begin
      automatic int ts = e % 15;
      automatic int n = $urandom_range(2, 8);
      for (int j = 0; j < n; j++) stim.push_back(mk_hit(ts, $urandom_range(0, 11)));
      for (int j = 0; j < 2; j++) stim.push_back(mk_hit((e + 1) % 15, $urandom_range(0, 9)));
      begin
        hit_t h;
        h = '0; h.eoe = 1'b1; h.ts = 4'(ts);
        stim.push_back(h);
      end
    end
    while (stim.size() > 0) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_hit   = stim[0];
      @(posedge clk);
      if (in_valid && in_ready) begin
        accept_word(stim.pop_front());
      end else if (in_valid && in_hit.eoe && snap_valid) begin
        n_eoe_stall++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (400) @(posedge clk);
    check(n_snaps == EVENTS, $sformatf("%0d local copies for %0d events", n_snaps, EVENTS));
    check(n_eoe_stall > 0, "end-of-event stalls happened");
    $display("local copies=%0d eoe stalls=%0d", n_snaps, n_eoe_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // local copy checker and release
  initial begin
    forever begin
      @(posedge clk);
      #1;
      if (snap_valid) begin
        if (exp_ts.size() == 0) check(1'b0, "unexpected local copy");
        else begin
          int et;
          int row [N_PASS];
          et  = exp_ts.pop_front();
          for (int p = 0; p < N_PASS; p++) row[p] = expected.pop_front();
          check(int'(snap_ts) == et, "local copy time stamp");
          for (int p = 0; p < N_PASS; p++)
            check(int'(snap_acc[p]) == row[p],
                  $sformatf("event %0d pass %0d: %0d expected %0d", et, p, snap_acc[p], row[p]));
        end
        n_snaps++;
        repeat ($urandom_range(0, 3) == 0 ? 120 : $urandom_range(0, 10)) @(posedge clk);
        snap_release <= 1'b1;
        @(posedge clk);
        snap_release <= 1'b0;
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
