// event_reader_tb: self-checking test of the event load unit.
//
// Global memory holds 40 events in the three-word layout; the reader is
// invoked on 25 of them at an offset, with a stalling memory and a consumer
// that is randomly not ready. Every event's fields, the final eop record and
// the end of `busy` are checked; then an empty packet must yield eop alone.
module event_reader_tb;
  import evs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy;
  logic [31:0] base = 0, size = 0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] rd_addr, rd_resp_data;
  logic ev_valid, ev_ready = 0;
  cam_event_t ev;
  logic stall = 1;
  logic wr_ready_unused;

  event_reader dut (.*);
  gmem_model #(.AW(10), .LAT(3)) mem (
    .clk, .stall, .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid(1'b0), .wr_ready(wr_ready_unused), .wr_addr(32'd0), .wr_data(32'd0));

  int checks = 0, failures = 0;
  cam_event_t exp_ev [40];
  cam_event_t got [$];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) ev_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) got.push_back(ev);

  task automatic run(input int b, input int n);
    @(negedge clk); base = b; size = n; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 40; i++) begin
      cam_event_t e = '0;
      e.ts = 1000 + 13 * i; e.x = 16'($urandom_range(0, 319)); e.y = 16'($urandom_range(0, 239));
      e.pol = 1'($urandom_range(0, 1)); e.side = side_e'($urandom_range(0, 1));
      exp_ev[i] = e;
      mem.mem[100 + 3 * i]     = e.ts;
      mem.mem[100 + 3 * i + 1] = {e.y, e.x};
      mem.mem[100 + 3 * i + 2] = {30'd0, e.side, e.pol};
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(100 + 3 * 5, 25);
    check(got.size() == 26, $sformatf("got %0d records, expected 26", got.size()));
    for (int i = 0; i < 25 && i < got.size(); i++)
      check(got[i] == exp_ev[5 + i], $sformatf("event %0d fields", i));
    if (got.size() == 26) check(got[25].eop, "eop record last");
    got.delete();
    run(100, 0);
    check(got.size() == 1 && got[0].eop, "empty packet gives eop only");
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
