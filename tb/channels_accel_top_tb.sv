// channels_accel_top_tb: end-to-end test of the accelerator at a reduced
// frame size (16 x 8 pixels, 4 pixels per memory word).
//
// Seven invocations run through global memory: a first one with initialize,
// two that continue from the kept frames (one with a stalling memory), an
// empty packet, a two-event packet that is timed, one with initialize that
// drops pending pixels, and one whose time jumps make many pixels leave at
// once so that the channel fills.
// Every output buffer is compared word by word with a reference model of the
// dataflow, and each mechanism (deadline flush, aggregation into an occupied
// pixel, multi-pixel flush from one word, full channel, memory stalls, frames
// kept across invocations, clear on initialize, both cameras) must occur.
// The cycle count of a packet whose events flush nothing is checked against
// the aggregator's 2*H*W/U + 3 cycles per event plus the read of 3 words.
module channels_accel_top_tb;
  localparam int W = 16, H = 8, U = 4;

`include "accel_tb_common.svh"

  channels_accel_top #(.IMG_W(W), .IMG_H(H), .UNROLL(U), .CH_DEPTH(4)) dut (.*);

  initial begin
    int t, cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_packet(150, 1, 1000, 6, t, cyc);
    run_packet(120, 0, t + 10, 6, t, cyc);
    stall = 1;
    run_packet(120, 0, t + 200, 4, t, cyc);
    stall = 0;
    run_packet(0, 0, t, 1, t, cyc);
    // timing: large deadline, nothing flushes; one event costs
    // 3 reads (2-cycle latency each, plus the request) and 2*H*W/U + 3 in the aggregator
    agg_time = 1000000;
    run_packet(2, 0, t + 100, 1, t, cyc);
    $display("2-event packet with no flush took %0d cycles", cyc);
    check(cyc <= 2 * (2 * H * (W / U) + 3) + 40 && cyc >= 2 * (2 * H * (W / U) + 3),
          $sformatf("cycles %0d for two events outside the expected range", cyc));
    agg_time = 50;
    run_packet(200, 1, t + 10, 6, t, cyc);
    run_packet(120, 0, t + 10, 1, t, cyc, 40);   // bursts of flushes
    report_mechanisms(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
