// event_channel_tb: self-checking test of the channel FIFO.
//
// A writer with random valid and a reader with random ready move 500
// numbered records through a 4-deep channel. The reader checks that every
// record arrives once and in order. The test also checks that in_ready drops
// after DEPTH writes with no reads, and the one-cycle latency of an empty FIFO.
module event_channel_tb;
  import evs_pkg::*;

  localparam int DEPTH = 4, N = 500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  agg_event_t in_data = '0, out_data;

  event_channel #(.T(agg_event_t), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0;
  bit rnd = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic agg_event_t rec(input int i);
    agg_event_t e = '0;
    e.ts = i; e.x = 16'(i * 3); e.y = 16'(i * 7); e.val = 8'(i); e.side = side_e'(i[0]);
    return e;
  endfunction

  // reader: check the order at every transfer
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      check(out_data == rec(rcvd), $sformatf("record %0d out of order", rcvd));
      rcvd++;
    end
  end

  // random writer and reader, driven on the falling edge
  always @(negedge clk) begin
    if (rnd) begin
      out_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    int full_seen;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill with no reader
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); in_valid = 1; in_data = rec(i);
      check(in_ready, "ready while not full");
    end
    @(negedge clk); in_valid = 0;
    check(!in_ready, "not ready when full");
    check(out_valid && out_data == rec(0), "head of a full FIFO");
    // drain
    @(negedge clk); out_ready = 1;
    repeat (DEPTH) @(negedge clk);
    check(!out_valid, "empty after drain");
    out_ready = 0;
    // latency of an empty FIFO: written at one edge, visible after it
    @(negedge clk); in_valid = 1; in_data = rec(DEPTH);
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == rec(DEPTH), "one-cycle latency");
    out_ready = 1; @(negedge clk); out_ready = 0;
    // random traffic
    sent = DEPTH + 1;
    rnd = 1;
    full_seen = 0;
    while (sent < N) begin
      bit xfer;
      // a record is only replaced after it has been taken
      if (!in_valid) begin
        in_data  = rec(sent);
        in_valid = ($urandom_range(0, 2) != 0);
      end
      xfer = in_valid && in_ready;          // transfers at the coming edge
      if (in_valid && !in_ready) full_seen++;
      @(negedge clk);
      if (xfer) begin sent++; in_valid = 0; end
    end
    in_valid = 0;
    rnd = 0; out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(rcvd == N, $sformatf("received %0d of %0d", rcvd, N));
    check(full_seen > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
