// event_channel: the on-chip channel between the aggregator kernel and the
// producer kernel ("ca2p" in the original code), a synchronous FIFO.
//
// The original kernels use blocking channel reads and writes; here that is a
// valid/ready handshake on both sides. A word is transferred when valid and
// ready are both high on a rising clock edge. The FIFO accepts a write when it
// is not full (in_ready) and presents its oldest entry on out_data whenever
// out_valid is high, so the latency through an empty FIFO is one cycle. Depth
// is a parameter; the original gives no depth, 8 is this design's choice.
// Reset empties the FIFO.
module event_channel #(
  parameter type         T     = evs_pkg::agg_event_t,
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [AW:0]    count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A producer that raised valid keeps it, with the same data, until accepted.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_data));
  endproperty
  a_in_hold: assert property (p_hold) else $error("event_channel: writer dropped valid or changed data while stalled");

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
