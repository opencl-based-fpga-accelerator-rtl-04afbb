// combined_aggregator: polarity aggregator for both cameras (the compute part
// of the aggregator kernel).
//
// Every pixel of the left and of the right frame holds an aggregated polarity
// rpol and the timestamp rtime of its last event; an empty pixel holds rpol=0
// and rtime=INT_MAX. For each camera event (ts, x, y, pol, side) the block
//   1. sets the threshold thr = ts - agg_time,
//   2. scans the whole frame of that side in row-major order and, for every
//      pixel with rtime < thr, emits an aggregated event (its last timestamp,
//      x, y, rpol) and empties the pixel: the pixel has been inactive for
//      longer than the deadline agg_time,
//   3. adds +1 or -1 to rpol of the event's pixel and sets its rtime to ts.
// After an eop record it emits an eop record and the invocation ends.
// The deadline rule, the INT_MAX empty marker, the compare rtime < thr, one
// pair of frames per camera, the unrolled inner scan loop and the clear on
// `initialize` follow the original kernel. Scanning before storing, scanning
// only the event's own side, and the widths are this design's choices.
//
// Organisation: each frame row is split into IMG_W/UNROLL memory words of
// UNROLL pixels. The scan reads one word (1 cycle), compares all UNROLL
// pixels against thr in parallel (1 cycle), then, only if some fired, emits
// one aggregated event per cycle while ch_ready is high and writes the
// cleaned word back (1 cycle). With nothing to flush one event therefore
// costs 2*IMG_H*IMG_W/UNROLL + 3 cycles (accept, two per word,
// read and write of the event's own pixel); each flushed pixel adds one cycle
// and each word holding one adds a write-back cycle. `initialize` on `start` clears both
// frames first, one word per cycle. Contents persist across invocations.
//
// Interface: start/initialize/agg_time are sampled in idle; events come in on
// ev_valid/ev_ready; aggregated events leave on ch_valid/ch_ready; busy is
// high from start until the eop record has been accepted. Events must lie inside
// the frame (asserted) and arrive in timestamp order.
module combined_aggregator
  import evs_pkg::*;
#(
  parameter int unsigned IMG_W  = 320,
  parameter int unsigned IMG_H  = 240,
  parameter int unsigned UNROLL = 320
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   initialize,
  input  logic signed [TS_W-1:0] agg_time,
  output logic                   busy,
  // camera events
  input  logic                   ev_valid,
  output logic                   ev_ready,
  input  cam_event_t             ev,
  // aggregated events to the channel
  output logic                   ch_valid,
  input  logic                   ch_ready,
  output agg_event_t             ch
);
  localparam int unsigned WPR   = IMG_W / UNROLL;      // words per row
  localparam int unsigned FWORDS = IMG_H * WPR;        // words per frame
  localparam int unsigned DEPTH = 2 * FWORDS;          // both frames
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW    = (UNROLL > 1) ? $clog2(UNROLL) : 1;

  typedef logic        [UNROLL-1:0][AGG_W-1:0] pol_word_t;
  typedef logic        [UNROLL-1:0][TS_W-1:0]  ts_word_t;

  pol_word_t pol_mem [DEPTH];
  ts_word_t  ts_mem  [DEPTH];

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ACCEPT, S_RD, S_CHK, S_EMIT, S_WB, S_UPD_RD, S_UPD_WR, S_EOP
  } state_e;
  state_e state;

  // current event and scan position
  cam_event_t             cur;
  logic signed [TS_W-1:0] thr, agg_time_q;
  logic [AW-1:0]          addr, upd_addr;
  logic [LW-1:0]          upd_lane;
  logic [COORD_W-1:0]     row, col_base;
  logic [$clog2(WPR+1)-1:0] cw;

  // word under work
  pol_word_t   w_pol;
  ts_word_t    w_ts;
  logic [UNROLL-1:0] mask, fire;
  logic [LW-1:0]     lane;
  logic              one_left;

  // fire: pixels of the word just read whose deadline has passed
  always_comb begin
    for (int l = 0; l < UNROLL; l++)
      fire[l] = $signed(w_ts[l]) < thr;
  end

  // lowest pending lane
  always_comb begin
    lane = '0;
    for (int l = UNROLL - 1; l >= 0; l--)
      if (mask[l]) lane = LW'(l);
  end
  assign one_left = ((mask & (mask - 1'b1)) == '0);

  assign busy     = (state != S_IDLE);
  assign ev_ready = (state == S_ACCEPT);
  assign ch_valid = (state == S_EMIT) || (state == S_EOP);

  always_comb begin
    ch      = '0;
    ch.eop  = (state == S_EOP);
    if (state == S_EMIT) begin
      ch.side = cur.side;
      ch.ts   = $signed(w_ts[lane]);
      ch.x    = col_base + COORD_W'(lane);
      ch.y    = row;
      ch.val  = $signed(w_pol[lane]);
    end
  end

  // pixel address of an incoming event
  function automatic logic [AW-1:0] word_addr(input cam_event_t e);
    return AW'(((e.side == SIDE_RIGHT) ? FWORDS : 0) + int'(e.y) * WPR + int'(e.x) / UNROLL);
  endfunction

  // a word with nothing to flush needs no write-back
  wire do_adv = ((state == S_CHK) && (fire == '0)) || (state == S_WB);
  wire last_word = (row == COORD_W'(IMG_H - 1)) && (cw == ($bits(cw))'(WPR - 1));


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      thr        <= '0;
      agg_time_q <= '0;
      addr       <= '0;
      upd_addr   <= '0;
      upd_lane   <= '0;
      row        <= '0;
      col_base   <= '0;
      cw         <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          agg_time_q <= agg_time;
          addr       <= '0;
          state      <= initialize ? S_INIT : S_ACCEPT;
        end
        S_INIT: begin
          addr <= addr + 1'b1;
          if (addr == AW'(DEPTH - 1)) state <= S_ACCEPT;
        end
        S_ACCEPT: if (ev_valid) begin
          if (ev.eop) begin
            state <= S_EOP;
          end else begin
            cur      <= ev;
            thr      <= ev.ts - agg_time_q;
            addr     <= (ev.side == SIDE_RIGHT) ? AW'(FWORDS) : '0;
            upd_addr <= word_addr(ev);
            upd_lane <= LW'(int'(ev.x) % UNROLL);
            row      <= '0;
            cw       <= '0;
            col_base <= '0;
            state    <= S_RD;
          end
        end
        S_RD: state <= S_CHK;
        S_CHK: begin
          if (fire != '0) state <= S_EMIT;
        end
        S_EMIT: if (ch_ready && one_left) state <= S_WB;
        S_WB: ;                            // write in the memory process, then advance
        S_UPD_RD: state <= S_UPD_WR;
        S_UPD_WR: state <= S_ACCEPT;
        S_EOP: if (ch_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      // move the scan to the next word, or to the update of the event's pixel
      if (do_adv) begin
        if (last_word) begin
          addr  <= upd_addr;
          state <= S_UPD_RD;
        end else begin
          addr <= addr + 1'b1;
          if (cw == ($bits(cw))'(WPR - 1)) begin
            cw       <= '0;
            col_base <= '0;
            row      <= row + 1'b1;
          end else begin
            cw       <= cw + 1'b1;
            col_base <= col_base + COORD_W'(UNROLL);
          end
          state <= S_RD;
        end
      end
    end
  end

  // word under work: read data register, fire mask, lanes emptied as they go
  always_ff @(posedge clk) begin
    unique case (state)
      S_RD, S_UPD_RD: begin
        w_pol <= pol_mem[addr];
        w_ts  <= ts_mem[addr];
      end
      S_CHK: mask <= fire;
      S_EMIT: if (ch_ready) begin
        mask[lane]  <= 1'b0;
        w_pol[lane] <= '0;
        w_ts[lane]  <= TS_EMPTY;
      end
      default: ;
    endcase
  end

  // single-port frame memory: clear, write-back of a scanned word, update
  always_ff @(posedge clk) begin
    unique case (state)
      S_INIT: begin
        pol_mem[addr] <= '0;
        ts_mem[addr]  <= {UNROLL{TS_EMPTY}};
      end
      S_WB: if (mask == '0) begin
        pol_mem[addr] <= w_pol;
        ts_mem[addr]  <= w_ts;
      end
      S_UPD_WR: begin
        pol_mem[addr] <= upd_pol(w_pol, upd_lane, cur.pol);
        ts_mem[addr]  <= upd_ts(w_ts, upd_lane, cur.ts);
      end
      default: ;
    endcase
  end

  function automatic pol_word_t upd_pol(input pol_word_t w, input logic [LW-1:0] l, input logic p);
    pol_word_t r = w;
    r[l] = w[l] + (p ? AGG_W'(1) : {AGG_W{1'b1}});
    return r;
  endfunction

  function automatic ts_word_t upd_ts(input ts_word_t w, input logic [LW-1:0] l, input logic signed [TS_W-1:0] t);
    ts_word_t r = w;
    r[l] = t;
    return r;
  endfunction

  initial assert (IMG_W % UNROLL == 0) else $error("combined_aggregator: UNROLL must divide IMG_W");

  // camera events must lie inside the frame
  a_event_in_frame: assert property (@(posedge clk) disable iff (!rst_n)
    (ev_valid && ev_ready && !ev.eop) |-> (int'(ev.x) < IMG_W && int'(ev.y) < IMG_H))
    else $error("combined_aggregator: event outside the %0dx%0d frame", IMG_W, IMG_H);

  // an emitted pixel must really have passed its deadline
  a_emit_deadline: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EMIT) |-> (ch.ts < thr));

endmodule
