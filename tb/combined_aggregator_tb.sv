// combined_aggregator_tb: self-checking test of the polarity aggregator.
//
// A small 8x4 frame pair with 4-pixel memory words (two words per row) is
// used. A reference model written with plain per-pixel arrays computes, for
// every camera event, the aggregated events that must leave the block, in
// scan order. The test covers: the Figure-3 style sequence +1 +1 -1 +1 that
// leaves as one +2 event after the deadline, a clear by `initialize`,
// several pixels flushed from one word, both sides, back-pressure on the
// output, a pixel reused after it was flushed, and the cycle count of an
// event that flushes nothing (2*IMG_H*IMG_W/UNROLL + 3).
module combined_aggregator_tb;
  import evs_pkg::*;

  localparam int W = 8, H = 4, U = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, initialize = 0, busy;
  logic signed [TS_W-1:0] agg_time = 100;
  logic ev_valid = 0, ev_ready;
  cam_event_t ev = '0;
  logic ch_valid, ch_ready;
  agg_event_t ch;

  combined_aggregator #(.IMG_W(W), .IMG_H(H), .UNROLL(U)) dut (.*);

  int checks = 0, failures = 0;
  bit random_ready = 0;
  bit verbose = 0;

  // reference frames
  int ref_pol [2][H][W];
  int ref_ts  [2][H][W];
  agg_event_t expq[$];
  agg_event_t gotq[$];

  task automatic ref_clear();
    for (int s = 0; s < 2; s++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      ref_pol[s][y][x] = 0; ref_ts[s][y][x] = 32'h7fffffff;
    end
  endtask

  task automatic ref_event(input int s, input int x, input int y, input bit p, input int ts);
    int thr = ts - int'(agg_time);
    for (int yy = 0; yy < H; yy++) for (int xx = 0; xx < W; xx++)
      if (ref_ts[s][yy][xx] < thr) begin
        agg_event_t e = '0;
        e.side = side_e'(s); e.ts = ref_ts[s][yy][xx]; e.x = 16'(xx); e.y = 16'(yy);
        e.val = 8'(ref_pol[s][yy][xx]);
        expq.push_back(e);
        ref_pol[s][yy][xx] = 0; ref_ts[s][yy][xx] = 32'h7fffffff;
      end
    ref_pol[s][y][x] += p ? 1 : -1;
    ref_ts[s][y][x] = ts;
  endtask

  always @(posedge clk) if (verbose) $display("%0t st=%0d v=%0d r=%0d eop=%0d start=%0d", $time, dut.state, ev_valid, ev_ready, ev.eop, start);
  // output monitor
  always @(posedge clk) begin
    if (rst_n && ch_valid && ch_ready) gotq.push_back(ch);
  end
  always @(negedge clk) ch_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic send(input int s, input int x, input int y, input bit p, input int ts, input bit eop = 0);
    @(negedge clk);
    ev.eop = eop; ev.side = side_e'(s); ev.x = 16'(x); ev.y = 16'(y); ev.pol = p; ev.ts = ts;
    ev_valid = 1;
    // ready only depends on the state, so it is stable at the falling edge
    while (!ev_ready) @(negedge clk);
    @(posedge clk);
    #1 ev_valid = 0;
    if (!eop) ref_event(s, x, y, p, ts);
  endtask

  task automatic invoke(input bit init);
    @(negedge clk);
    start = 1; initialize = init;
    @(negedge clk);
    start = 0; initialize = 0;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
    else if (verbose) $display("ok: %s", what);
  endtask

  task automatic compare_all();
    check(gotq.size() == expq.size(), $sformatf("count got %0d exp %0d", gotq.size(), expq.size()));
    while (gotq.size() > 0 && expq.size() > 0) begin
      agg_event_t g = gotq.pop_front(), e = expq.pop_front();
      check(g == e, $sformatf("event got s%0d (%0d,%0d) ts=%0d v=%0d eop=%0d exp s%0d (%0d,%0d) ts=%0d v=%0d",
            g.side, g.x, g.y, g.ts, g.val, g.eop, e.side, e.x, e.y, e.ts, e.val));
    end
    gotq.delete(); expq.delete();
  endtask

  task automatic finish_packet();
    agg_event_t e = '0;
    e.eop = 1;
    send(0, 0, 0, 0, 0, 1);
    expq.push_back(e);
    wait (!busy);
    repeat (2) @(posedge clk);
    compare_all();
  endtask

  initial begin
    int t0, t1, fired_from_figure3;
    ref_clear();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // --- invocation 1: Figure 3 sequence on one left pixel, then one on the right
    invoke(1);
    send(0, 5, 2, 1, 1000);   // t_i  +1
    send(0, 5, 2, 1, 1020);   //      +1
    send(0, 5, 2, 0, 1040);   //      -1
    send(0, 5, 2, 1, 1060);   // t_f  +1
    send(1, 5, 2, 1, 1061);   // right camera, same coordinates
    send(0, 0, 0, 1, 1200);   // after t_f + d: the +2 leaves
    fired_from_figure3 = 0;
    foreach (expq[i]) if (expq[i].x == 5 && expq[i].y == 2 && expq[i].val == 2 && expq[i].side == SIDE_LEFT) fired_from_figure3++;
    check(fired_from_figure3 == 1, "figure 3: one +2 event expected by the model");
    finish_packet();

    // --- cycle count of one event with nothing to flush
    invoke(0);
    @(negedge clk);
    ev = '0; ev.side = SIDE_LEFT; ev.x = 1; ev.y = 1; ev.pol = 1; ev.ts = 1201;
    ev_valid = 1;
    while (!ev_ready) @(negedge clk);
    @(posedge clk);
    t0 = int'($time / 10);
    #1 ev_valid = 0;
    ref_event(0, 1, 1, 1, 1201);
    @(negedge clk); while (!ev_ready) @(negedge clk);
    @(posedge clk);
    t1 = int'($time / 10);
    check(t1 - t0 == 2 * H * (W / U) + 3, $sformatf("event cost %0d cycles, expected %0d", t1 - t0, 2 * H * (W / U) + 3));
    finish_packet();

    // --- invocation 3: several pixels of one word flushed at once, back-pressure
    random_ready = 1;
    invoke(0);
    send(1, 0, 3, 1, 2000); send(1, 1, 3, 0, 2001); send(1, 3, 3, 1, 2002);
    send(1, 6, 3, 1, 2003); send(1, 2, 0, 0, 2004);
    send(1, 7, 0, 1, 2500);                       // flushes all of the above
    send(1, 0, 3, 0, 2501);                       // reuse a flushed pixel
    for (int i = 0; i < 60; i++)
      send($urandom_range(0, 1), $urandom_range(0, W - 1), $urandom_range(0, H - 1),
           1'($urandom_range(0, 1)), 2600 + i * 7 + $urandom_range(0, 5));
    finish_packet();

    // --- invocation 4: initialize clears everything that was pending
    random_ready = 0;
    invoke(1);
    ref_clear();
    send(0, 4, 1, 1, 100000);                     // nothing old may leave
    send(0, 4, 1, 1, 100500);                     // now (4,1) leaves with +1
    finish_packet();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (state %0d busy %0d ev_valid %0d)", dut.state, busy, ev_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
