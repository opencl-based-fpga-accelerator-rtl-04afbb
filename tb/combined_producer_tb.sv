// combined_producer_tb: self-checking test of the level producer.
//
// On a 6x4 frame pair, 300 random aggregated events (both sides, values of
// either sign) go in with a randomly stalled input and output; a reference
// frame pair computes L(x,y) <- L(x,y) + A(x,y) and every level event is
// compared. Then the eop record must come out, a second invocation without
// initialize must continue from the kept levels, and one with initialize
// must start again from zero. The throughput of 3 cycles per event is checked
// with an always-ready output.
module combined_producer_tb;
  import evs_pkg::*;

  localparam int W = 6, H = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, initialize = 0, busy;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  agg_event_t in_ev = '0;
  lvl_event_t out_ev;

  combined_producer #(.IMG_W(W), .IMG_H(H)) dut (.*);

  int checks = 0, failures = 0;
  int ref_l [2][H][W];
  lvl_event_t expq [$];
  lvl_event_t gotq [$];
  bit rnd_out = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) out_ready <= rnd_out ? ($urandom_range(0, 2) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) gotq.push_back(out_ev);

  task automatic invoke(input bit init);
    @(negedge clk); start = 1; initialize = init;
    @(negedge clk); start = 0; initialize = 0;
    if (init) foreach (ref_l[s, y, x]) ref_l[s][y][x] = 0;
  endtask

  task automatic send(input agg_event_t e);
    @(negedge clk);
    in_ev = e; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1 in_valid = 0;
    if (!e.eop) begin
      lvl_event_t l = '0;
      ref_l[e.side][e.y][e.x] = 32'(signed'(16'(ref_l[e.side][e.y][e.x] + int'(e.val))));
      l.side = e.side; l.ts = e.ts; l.x = e.x; l.y = e.y; l.level = 16'(ref_l[e.side][e.y][e.x]);
      expq.push_back(l);
    end else begin
      lvl_event_t l = '0;
      l.eop = 1;
      expq.push_back(l);
    end
  endtask

  function automatic agg_event_t rnd_ev(input int t);
    agg_event_t e = '0;
    e.side = side_e'($urandom_range(0, 1)); e.x = 16'($urandom_range(0, W - 1));
    e.y = 16'($urandom_range(0, H - 1)); e.ts = t; e.val = 8'($urandom_range(0, 10) - 5);
    return e;
  endfunction

  task automatic finish_and_compare();
    agg_event_t e = '0;
    e.eop = 1;
    send(e);
    while (busy) @(negedge clk);
    check(gotq.size() == expq.size(), $sformatf("got %0d expected %0d", gotq.size(), expq.size()));
    while (gotq.size() > 0 && expq.size() > 0) begin
      lvl_event_t g = gotq.pop_front(), x = expq.pop_front();
      check(g == x, $sformatf("level event (%0d,%0d) s%0d got %0d exp %0d", x.x, x.y, x.side, g.level, x.level));
    end
    gotq.delete(); expq.delete();
  endtask

  initial begin
    int t0, t1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rnd_out = 1;
    invoke(1);
    for (int i = 0; i < 300; i++) send(rnd_ev(i));
    finish_and_compare();
    invoke(0);                                    // levels are kept
    for (int i = 0; i < 100; i++) send(rnd_ev(1000 + i));
    finish_and_compare();
    rnd_out = 0;
    invoke(1);                                    // levels cleared
    for (int i = 0; i < 50; i++) send(rnd_ev(2000 + i));
    finish_and_compare();
    // throughput: back-to-back events, always-ready output
    invoke(0);
    @(negedge clk); in_ev = rnd_ev(3000); in_valid = 1;
    while (!in_ready) @(negedge clk);
    t0 = int'($time / 10);
    for (int i = 0; i < 10; i++) begin
      @(posedge clk); #1 in_ev = rnd_ev(3001 + i);
      @(negedge clk); while (!in_ready) @(negedge clk);
    end
    t1 = int'($time / 10);
    in_valid = 0;
    check(t1 - t0 == 30, $sformatf("10 events took %0d cycles, expected 30", t1 - t0));
    in_ev = '0; in_ev.eop = 1; in_valid = 1;     // taken at the next edge
    @(posedge clk); #1 in_valid = 0;
    while (busy) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
