// result_writer_tb: self-checking test of the output store unit.
//
// 20 level events go in (random sides, signed levels) while the memory
// randomly stalls. Afterwards the buffer must hold each event as four words
// at base + 4*i, the terminator -1 at base + 80, nothing written past it,
// `done` must have pulsed once and `count` be 20. A second invocation with an
// empty packet must write -1 at its own base and report 0.
module result_writer_tb;
  import evs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stall = 1;
  logic [31:0] base = 0;
  logic in_valid = 0, in_ready;
  lvl_event_t in_ev = '0;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr, wr_data, count;
  logic done;
  logic rd_ready_u, rd_resp_valid_u;
  logic [31:0] rd_resp_data_u;

  result_writer dut (.*);
  gmem_model #(.AW(10), .LAT(1)) mem (
    .clk, .stall, .rd_req_valid(1'b0), .rd_req_ready(rd_ready_u), .rd_addr(32'd0),
    .rd_resp_valid(rd_resp_valid_u), .rd_resp_data(rd_resp_data_u),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0, dones = 0;
  lvl_event_t evs [20];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && done) dones++;

  task automatic send(input lvl_event_t e);
    @(negedge clk); in_ev = e; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    lvl_event_t eop = '0;
    eop.eop = 1;
    for (int i = 0; i < 1024; i++) mem.mem[i] = 32'h5a5a5a5a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); base = 200; start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 20; i++) begin
      evs[i] = '0;
      evs[i].side = side_e'(i % 2); evs[i].ts = 5000 + i; evs[i].x = 16'(i * 11);
      evs[i].y = 16'(i * 5); evs[i].level = 16'(i * 37 - 300);
      send(evs[i]);
    end
    send(eop);
    while (dones == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(dones == 1 && count == 20, $sformatf("done %0d count %0d", dones, count));
    for (int i = 0; i < 20; i++) begin
      check(mem.mem[200 + 4*i] == evs[i].ts, $sformatf("ts of %0d", i));
      check(mem.mem[200 + 4*i + 1] == 32'(evs[i].x), $sformatf("x of %0d", i));
      check(mem.mem[200 + 4*i + 2] == 32'(evs[i].y), $sformatf("y of %0d", i));
      check(mem.mem[200 + 4*i + 3] == {15'd0, evs[i].side, evs[i].level}, $sformatf("side/level of %0d", i));
    end
    check(mem.mem[280] == 32'hffffffff, "terminator -1");
    check(mem.mem[281] == 32'h5a5a5a5a && mem.mem[199] == 32'h5a5a5a5a, "nothing written outside");
    @(negedge clk); base = 600; start = 1; @(negedge clk); start = 0;
    send(eop);
    while (dones == 1) @(negedge clk);
    check(mem.mem[600] == 32'hffffffff && count == 0, "empty packet: terminator at base");
    check(mem.stalls > 0, "memory stalls exercised");
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
