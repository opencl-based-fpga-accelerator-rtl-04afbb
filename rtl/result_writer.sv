// result_writer: store unit of the producer kernel.
//
// Each level event is written to the output buffer in global memory as
// EVENT_STRIDE consecutive 32-bit words at out[base + lpe*EVENT_STRIDE], lpe
// being the event's index within the invocation. When the eop record
// arrives, the value -1 is written to word 0 of the next slot, which tells the
// host where the valid output ends, and `done` pulses for one cycle with
// `count` holding the number of events written. The -1 terminator and word 0
// being the timestamp follow the original kernel; the rest of the layout is
// this design's choice:
//   word 0  timestamp            word 2  y
//   word 1  x                    word 3  bit 16 side (1 = right),
//                                        bits 15:0 level (signed)
// Memory interface: one valid/ready word write per cycle at most, so an event
// takes EVENT_STRIDE cycles when the memory never stalls.
module result_writer
  import evs_pkg::*;
#(
  parameter int unsigned EVENT_STRIDE = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [WORD_W-1:0] base,
  input  logic              in_valid,
  output logic              in_ready,
  input  lvl_event_t        in_ev,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [WORD_W-1:0] wr_addr,
  output logic [WORD_W-1:0] wr_data,
  output logic              done,
  output logic [WORD_W-1:0] count
);
  typedef enum logic [1:0] {S_IDLE, S_ACCEPT, S_WRITE, S_TERM} state_e;
  state_e state;

  lvl_event_t        cur;
  logic [WORD_W-1:0] slot;   // base + lpe*EVENT_STRIDE
  logic [1:0]        word_idx;

  assign in_ready = (state == S_ACCEPT);
  assign wr_valid = (state == S_WRITE) || (state == S_TERM);
  assign wr_addr  = slot + WORD_W'(word_idx);

  always_comb begin
    unique case (word_idx)
      2'd0:    wr_data = WORD_W'(cur.ts);
      2'd1:    wr_data = WORD_W'(cur.x);
      2'd2:    wr_data = WORD_W'(cur.y);
      default: wr_data = {15'd0, cur.side, cur.level};
    endcase
    if (state == S_TERM) wr_data = '1;   // -1
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      slot     <= '0;
      word_idx <= '0;
      count    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          slot     <= base;
          word_idx <= '0;
          count    <= '0;
          state    <= S_ACCEPT;
        end
        S_ACCEPT: if (in_valid) begin
          cur      <= in_ev;
          word_idx <= '0;
          state    <= in_ev.eop ? S_TERM : S_WRITE;
        end
        S_WRITE: if (wr_ready) begin
          if (word_idx == 2'(EVENT_STRIDE - 1)) begin
            word_idx <= '0;
            slot     <= slot + WORD_W'(EVENT_STRIDE);
            count    <= count + 1'b1;
            state    <= S_ACCEPT;
          end else begin
            word_idx <= word_idx + 1'b1;
          end
        end
        S_TERM: if (wr_ready) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (EVENT_STRIDE == 4) else $error("result_writer: the word layout is defined for 4 words per event");

endmodule
