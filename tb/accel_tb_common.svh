// accel_tb_common.svh: shared body of the end-to-end testbenches of
// channels_accel_top. The including module defines the frame size W x H and
// the unroll U, then instantiates the accelerator as `dut` on the signals
// declared here.
//
// Contents: clock/reset, the global memory model, a reference model of the
// whole dataflow (aggregation with deadline, then level integration) written
// with plain per-pixel arrays, a packet runner that writes camera events to
// memory, invokes the accelerator and compares the output buffer word by word
// with the reference, and counters of the mechanisms exercised.

  import evs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, initialize = 0, busy, done, stall = 0;
  logic [31:0] in_base = 16, in_size = 0, out_base = 16384, out_count;
  logic signed [31:0] agg_time = 50;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [31:0] rd_addr, rd_resp_data, wr_addr, wr_data;

  gmem_model #(.AW(15), .LAT(2)) mem (.*);

  int checks = 0, failures = 0;

  // mechanisms
  int n_flush = 0;          // aggregated events emitted after their deadline
  int n_merge = 0;          // camera events added to an already occupied pixel
  int n_multi_word = 0;     // words that flushed two pixels or more at once
  int n_chan_full = 0;      // cycles the aggregator waited on a full channel
  int n_right = 0;          // right-camera events processed
  int n_kept = 0;           // flushes of pixels filled in an earlier invocation
  int n_cleared = 0;        // invocations that had to drop pending pixels on initialize

  // reference state
  int r_pol [2][H][W];
  int r_ts  [2][H][W];
  int r_inv [2][H][W];      // invocation that last filled the pixel
  int r_lvl [2][H][W];
  int exp_words [$];
  int inv_no = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk)
    if (rst_n && dut.u_aggregator.ch_valid && !dut.u_aggregator.ch_ready) n_chan_full++;

  task automatic ref_reset_all();
    int pending = 0;
    for (int s = 0; s < 2; s++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      if (r_ts[s][y][x] != 32'h7fffffff && inv_no > 0) pending++;
      r_pol[s][y][x] = 0; r_ts[s][y][x] = 32'h7fffffff; r_lvl[s][y][x] = 0; r_inv[s][y][x] = 0;
    end
    if (pending > 0) n_cleared++;
  endtask

  task automatic ref_event(input int s, input int x, input int y, input bit p, input int ts);
    int thr = ts - int'(agg_time);
    for (int yy = 0; yy < H; yy++) for (int wx = 0; wx < W / U; wx++) begin
      int in_word = 0;
      for (int l = 0; l < U; l++) begin
        int xx = wx * U + l;
        if (r_ts[s][yy][xx] < thr) begin
          int lv;
          n_flush++; in_word++;
          if (r_inv[s][yy][xx] != inv_no) n_kept++;
          lv = int'(signed'(16'(r_lvl[s][yy][xx] + int'(signed'(8'(r_pol[s][yy][xx]))))));
          r_lvl[s][yy][xx] = lv;
          exp_words.push_back(r_ts[s][yy][xx]);
          exp_words.push_back(xx);
          exp_words.push_back(yy);
          exp_words.push_back({15'd0, 1'(s), 16'(lv)});
          r_pol[s][yy][xx] = 0; r_ts[s][yy][xx] = 32'h7fffffff;
        end
      end
      if (in_word > 1) n_multi_word++;
    end
    if (r_ts[s][y][x] != 32'h7fffffff) n_merge++;
    r_pol[s][y][x] += p ? 1 : -1;
    r_ts[s][y][x] = ts;
    r_inv[s][y][x] = inv_no;
    if (s == 1) n_right++;
  endtask

  // A camera event as the host lays it out in global memory.
  typedef struct { int s; int x; int y; bit p; int ts; } tb_event_t;

  // Writes the events to memory, runs one invocation, compares the output.
  task automatic run_list(input tb_event_t evq[$], input bit init, output int cycles);
    int c0, n, got_words;
    n = evq.size();
    if (init) ref_reset_all();
    inv_no++;
    exp_words.delete();
    foreach (evq[i]) begin
      mem.mem[16 + 3*i]     = evq[i].ts;
      mem.mem[16 + 3*i + 1] = {16'(evq[i].y), 16'(evq[i].x)};
      mem.mem[16 + 3*i + 2] = {30'd0, 1'(evq[i].s), evq[i].p};
      ref_event(evq[i].s, evq[i].x, evq[i].y, evq[i].p, evq[i].ts);
    end
    for (int i = 0; i < 4 * n + 4; i++) mem.mem[16384 + i] = 32'h5a5a5a5a;
    @(negedge clk);
    in_size = n; initialize = init; start = 1;
    c0 = int'($time / 10);
    @(negedge clk);
    start = 0; initialize = 0;
    while (!done) @(negedge clk);
    cycles = int'($time / 10) - c0;
    @(negedge clk);
    check(!busy, "idle after done");
    got_words = 4 * int'(out_count);
    check(got_words == exp_words.size(), $sformatf("packet %0d: %0d output events, expected %0d",
          inv_no, out_count, exp_words.size() / 4));
    for (int i = 0; i < exp_words.size() && i < got_words; i++)
      check(mem.mem[16384 + i] == exp_words[i], $sformatf("packet %0d word %0d: %h expected %h",
            inv_no, i, mem.mem[16384 + i], exp_words[i]));
    check(mem.mem[16384 + got_words] == 32'hffffffff, "terminator -1 after the last event");
  endtask

  // Random packet of n events. They come from a few hot pixels (so they
  // merge) plus random ones; timestamps rise by 1..step so that some pixels
  // outlive the deadline. With gap > 0, time jumps by 4*agg_time after every
  // gap events, so that everything pending leaves in one burst; the events
  // then all fall in row 0, so the burst comes out of few memory words.
  task automatic run_packet(input int n, input bit init, input int t_start, input int step,
                            output int t_end, output int cycles, input int gap = 0);
    int t = t_start;
    tb_event_t evq[$];
    for (int i = 0; i < n; i++) begin
      tb_event_t e;
      e.s = $urandom_range(0, 1);
      e.p = 1'($urandom_range(0, 1));
      if (gap > 0) begin e.x = $urandom_range(0, W - 1); e.y = 0; end   // dense row
      else if ($urandom_range(0, 1) == 0) begin e.x = $urandom_range(0, 2); e.y = $urandom_range(0, 1); end
      else begin e.x = $urandom_range(0, W - 1); e.y = $urandom_range(0, H - 1); end
      t += $urandom_range(1, step);
      if (gap > 0 && i % gap == gap - 1) t += 4 * int'(agg_time);
      e.ts = t;
      evq.push_back(e);
    end
    t_end = t;
    run_list(evq, init, cycles);
  endtask

  task automatic report_mechanisms(input bit need_chan_full);
    $display("mechanisms: flush=%0d merge=%0d multi-pixel words=%0d channel-full cycles=%0d right=%0d kept-across-invocations=%0d initialize-dropped=%0d memory stalls=%0d",
             n_flush, n_merge, n_multi_word, n_chan_full, n_right, n_kept, n_cleared, mem.stalls);
    check(n_flush > 0, "deadline flush happened");
    check(n_merge > 0, "aggregation into an occupied pixel happened");
    check(n_right > 0, "right camera events processed");
    check(n_kept > 0, "pixels kept across invocations");
    if (need_chan_full) begin
      check(n_multi_word > 0, "several pixels flushed from one word");
      check(n_chan_full > 0, "channel back-pressure happened");
      check(n_cleared > 0, "initialize dropped pending pixels");
      check(mem.stalls > 0, "memory stalls happened");
    end
  endtask
