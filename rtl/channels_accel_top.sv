// channels_accel_top: the two-kernel event stereo accelerator.
//
// Camera events of both sensors arrive merged in one packet in global memory.
// The aggregator kernel (event_reader + combined_aggregator) turns them into
// aggregated polarity events, which travel through the on-chip channel
// (event_channel) to the producer kernel (combined_producer + result_writer).
// The producer kernel integrates them into level frames and writes one level
// event per aggregated event to an output buffer in global memory, ended by
// -1. The host reads that buffer and runs the disparity search on it.
//
// One `start` pulse invokes both kernels with their arguments: in_base/in_size
// (event packet), agg_time (inactivity deadline), out_base (output buffer) and
// initialize (clear all four frames first; use it on the first invocation).
// `done` pulses when the terminator has been written; out_count then holds the
// number of level events written. `busy` is high from start to done.
// Global memory is reached through one read port (valid/ready request, in-order
// response) and one write port (valid/ready), both 32 bits wide.
module channels_accel_top
  import evs_pkg::*;
#(
  parameter int unsigned IMG_W    = 320,
  parameter int unsigned IMG_H    = 240,
  parameter int unsigned UNROLL   = 320,
  parameter int unsigned CH_DEPTH = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // kernel invocation
  input  logic                   start,
  input  logic                   initialize,
  input  logic [WORD_W-1:0]      in_base,
  input  logic [WORD_W-1:0]      in_size,
  input  logic signed [TS_W-1:0] agg_time,
  input  logic [WORD_W-1:0]      out_base,
  output logic                   busy,
  output logic                   done,
  output logic [WORD_W-1:0]      out_count,
  // global memory read port
  output logic                   rd_req_valid,
  input  logic                   rd_req_ready,
  output logic [WORD_W-1:0]      rd_addr,
  input  logic                   rd_resp_valid,
  input  logic [WORD_W-1:0]      rd_resp_data,
  // global memory write port
  output logic                   wr_valid,
  input  logic                   wr_ready,
  output logic [WORD_W-1:0]      wr_addr,
  output logic [WORD_W-1:0]      wr_data
);
  cam_event_t ev;
  logic       ev_valid, ev_ready;
  agg_event_t agg, agg_q;
  logic       agg_valid, agg_ready, agg_q_valid, agg_q_ready;
  lvl_event_t lvl;
  logic       lvl_valid, lvl_ready;
  logic       rd_busy, agg_busy, prod_busy, wr_pending;

  event_reader u_reader (
    .clk, .rst_n, .start, .base(in_base), .size(in_size), .busy(rd_busy),
    .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .ev_valid, .ev_ready, .ev
  );

  combined_aggregator #(.IMG_W(IMG_W), .IMG_H(IMG_H), .UNROLL(UNROLL)) u_aggregator (
    .clk, .rst_n, .start, .initialize, .agg_time, .busy(agg_busy),
    .ev_valid, .ev_ready, .ev,
    .ch_valid(agg_valid), .ch_ready(agg_ready), .ch(agg)
  );

  event_channel #(.T(agg_event_t), .DEPTH(CH_DEPTH)) u_ca2p (
    .clk, .rst_n,
    .in_valid(agg_valid), .in_ready(agg_ready), .in_data(agg),
    .out_valid(agg_q_valid), .out_ready(agg_q_ready), .out_data(agg_q)
  );

  combined_producer #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_producer (
    .clk, .rst_n, .start, .initialize, .busy(prod_busy),
    .in_valid(agg_q_valid), .in_ready(agg_q_ready), .in_ev(agg_q),
    .out_valid(lvl_valid), .out_ready(lvl_ready), .out_ev(lvl)
  );

  result_writer u_writer (
    .clk, .rst_n, .start, .base(out_base),
    .in_valid(lvl_valid), .in_ready(lvl_ready), .in_ev(lvl),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .done, .count(out_count)
  );

  // the writer is the last stage; it is pending from start until done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     wr_pending <= 1'b0;
    else if (start) wr_pending <= 1'b1;
    else if (done)  wr_pending <= 1'b0;
  end
  assign busy = rd_busy | agg_busy | prod_busy | wr_pending;

endmodule
