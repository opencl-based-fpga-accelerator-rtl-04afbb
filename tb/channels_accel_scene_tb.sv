// channels_accel_scene_tb: the accelerator at its default size on a scene of
// the kind the design targets: a fixed stereo pair watching one moving object.
//
// A bright vertical bar, 20 pixels wide and 40 rows high, moves right by one
// pixel per step. It is seen by the right camera 12 pixels to the left of
// where the left camera sees it (a disparity of 12). At every step the
// leading edge of the bar makes an ON burst and the trailing edge an OFF
// burst, three events per pixel, in both cameras, delivered in time order.
// With agg_time = 100 each burst leaves the aggregator as one event of value
// +3 or -3. The output is compared word by word with the reference model.
// The test also checks that aggregation cut the number of events by three,
// that each level event is +3 on a leading edge and -3 on a trailing edge,
// that the level frames end with the last edges in place, and it reports the
// cycles per camera event, the figure that sets the event rate at a given
// clock.
module channels_accel_scene_tb;
  localparam int W = 320, H = 240, U = 320;   // the accelerator's defaults

`include "accel_tb_common.svh"

  channels_accel_top dut (.*);

  localparam int STEPS = 5, ROW0 = 100, ROWS = 40, BAR = 20, X0 = 150, DISP = 12, BURST = 3;

  initial begin
    tb_event_t evq[$];
    int cyc, n_in, n_out, t_last;
    real cpe;
    agg_time = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < STEPS; k++) begin
      int t0;
      t0 = 1000 + 200 * k;
      for (int b = 0; b < BURST; b++)
        for (int r = 0; r < ROWS; r++)
          for (int s = 0; s < 2; s++)
            for (int eg = 0; eg < 2; eg++) begin
              tb_event_t e;
              int xl;
              xl = X0 + k + (eg == 0 ? BAR : 0);        // leading edge brightens, trailing darkens
              e.s = s; e.y = ROW0 + r; e.x = (s == 0) ? xl : xl - DISP;
              e.p = (eg == 0); e.ts = t0 + 50 * b + r;
              evq.push_back(e);
            end
    end
    t_last = 1000 + 200 * STEPS + 1000;
    // one late event per camera releases the last step
    for (int s = 0; s < 2; s++) begin
      tb_event_t e;
      e.s = s; e.x = 0; e.y = 0; e.p = 1; e.ts = t_last;
      evq.push_back(e);
    end
    n_in = evq.size();
    run_list(evq, 1, cyc);
    n_out = int'(out_count);
    $display("scene: %0d camera events -> %0d level events in %0d cycles",
             n_in, n_out, cyc);
    // the producer's frame clearing overlaps the aggregator's work
    cpe = real'(cyc) / real'(n_in);
    check(cpe >= 2.0 * H + 3.0 && cpe < 2.0 * H + 3.0 + 5.0, $sformatf("%0.1f cycles per camera event", cpe));
    $display("scene: %0.1f cycles per camera event, %0.0f k events/s at a 200 MHz clock", cpe, 200.0e3 / cpe);
    check(n_out == (n_in - 2) / BURST, $sformatf("aggregation: %0d events out, expected %0d", n_out, (n_in - 2) / BURST));
    // every released pixel is an edge pixel touched once: level +3 where the
    // bar arrived (x > trailing edge), -3 where it left
    for (int i = 0; i < n_out; i++) begin
      logic signed [15:0] lv;
      int ex, es;
      lv = mem.mem[16384 + 4 * i + 3][15:0];
      es = int'(mem.mem[16384 + 4 * i + 3][16]);
      ex = int'(mem.mem[16384 + 4 * i + 1]) + (es == 1 ? DISP : 0);   // in left-camera columns
      check(lv == ((ex >= X0 + BAR) ? 16'sd3 : -16'sd3), $sformatf("level %0d of event %0d at x %0d", lv, i, ex));
    end
    // level frames at the end: last leading edge +3, last trailing edge -3, the
    // inside of the bar untouched
    for (int s = 0; s < 2; s++) begin
      int xs;
      xs = X0 + STEPS - 1 - (s == 1 ? DISP : 0);     // last trailing edge
      check(r_lvl[s][ROW0 + 5][xs] == -3 && r_lvl[s][ROW0 + 5][xs + BAR] == 3 &&
            r_lvl[s][ROW0 + 5][xs + BAR / 2] == 0,
            $sformatf("side %0d: bar edges in the level frame", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
