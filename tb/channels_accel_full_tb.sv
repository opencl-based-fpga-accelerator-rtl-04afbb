// channels_accel_full_tb: the accelerator at its default size (two 320 x 240
// frames per kernel, a whole 320-pixel row per memory word), taken through a
// complete operation: an invocation with initialize on 200 mixed left/right
// events, then a continuing invocation of 150 events whose time jumps make
// many pixels of one row leave together (with a stalling memory), a timed
// single event, and a last invocation with initialize. All output buffers are compared
// word by word with the reference model of the dataflow, and the mechanisms
// are counted as in the reduced test. The cycle count of one event with
// nothing to flush is checked against 2*H + 3 plus the reads of its 3 words.
module channels_accel_full_tb;
  localparam int W = 320, H = 240, U = 320;   // the accelerator's defaults

`include "accel_tb_common.svh"

  channels_accel_top dut (.*);

  initial begin
    int t, cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_packet(200, 1, 1000, 6, t, cyc);
    $display("initialize + 200 events: %0d cycles", cyc);
    stall = 1;
    run_packet(150, 0, t + 10, 1, t, cyc, 50);
    stall = 0;
    agg_time = 1000000;
    run_packet(1, 0, t + 10, 1, t, cyc);
    $display("1 event with no flush: %0d cycles", cyc);
    check(cyc >= 2 * H + 3 && cyc <= 2 * H + 3 + 20, $sformatf("one event took %0d cycles", cyc));
    agg_time = 50;
    run_packet(40, 1, t + 10, 6, t, cyc);          // initialize drops what was pending
    report_mechanisms(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
