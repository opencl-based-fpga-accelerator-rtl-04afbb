// combined_producer: level producer for both cameras (the compute part of the
// producer kernel).
//
// It keeps one level frame per camera. For every aggregated event A(x,y) from
// the channel it integrates the event into its side's frame,
//     L(x,y) <- L(x,y) + A(x,y),
// and emits a level event carrying the new L(x,y) with the event's side, x, y
// and timestamp: one level event for each aggregated event received. An eop
// record is passed on unchanged and ends the invocation.
// The integration rule, one frame per side, and an output event for every
// input event follow the original design. Clearing the frames on
// `initialize`, the level width and wrap-around arithmetic are this design's
// choices.
//
// Timing: a read-modify-write of one pixel, 3 cycles per event when the output
// is ready (accept, read, then write and present the result; the next event
// is taken once the result has been accepted). `initialize` on `start` clears both frames first, one pixel
// per cycle (2*IMG_W*IMG_H cycles).
module combined_producer
  import evs_pkg::*;
#(
  parameter int unsigned IMG_W = 320,
  parameter int unsigned IMG_H = 240
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        initialize,
  output logic        busy,
  input  logic        in_valid,
  output logic        in_ready,
  input  agg_event_t  in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output lvl_event_t  out_ev
);
  localparam int unsigned FPIX  = IMG_W * IMG_H;
  localparam int unsigned DEPTH = 2 * FPIX;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic signed [LVL_W-1:0] lvl_mem [DEPTH];

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_ACCEPT, S_RD, S_OUT, S_EOP} state_e;
  state_e state;

  agg_event_t              cur;
  logic [AW-1:0]           addr;
  logic signed [LVL_W-1:0] old_lvl, new_lvl;

  assign busy      = (state != S_IDLE);
  assign in_ready  = (state == S_ACCEPT);
  assign out_valid = (state == S_OUT) || (state == S_EOP);
  assign new_lvl   = old_lvl + LVL_W'(cur.val);   // sign-extending add

  always_comb begin
    out_ev       = '0;
    out_ev.eop   = (state == S_EOP);
    if (state == S_OUT) begin
      out_ev.side  = cur.side;
      out_ev.ts    = cur.ts;
      out_ev.x     = cur.x;
      out_ev.y     = cur.y;
      out_ev.level = new_lvl;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      addr  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          addr  <= '0;
          state <= initialize ? S_INIT : S_ACCEPT;
        end
        S_INIT: begin
          addr <= addr + 1'b1;
          if (addr == AW'(DEPTH - 1)) state <= S_ACCEPT;
        end
        S_ACCEPT: if (in_valid) begin
          cur   <= in_ev;
          addr  <= AW'(((in_ev.side == SIDE_RIGHT) ? FPIX : 0) + int'(in_ev.y) * IMG_W + int'(in_ev.x));
          state <= in_ev.eop ? S_EOP : S_RD;
        end
        S_RD:  state <= S_OUT;
        S_OUT: if (out_ready) state <= S_ACCEPT;
        S_EOP: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // level frames: synchronous read in S_RD, write when the result leaves
  always_ff @(posedge clk) begin
    if (state == S_RD) old_lvl <= lvl_mem[addr];
    if (state == S_INIT) lvl_mem[addr] <= '0;
    else if (state == S_OUT && out_ready) lvl_mem[addr] <= new_lvl;
  end

endmodule
