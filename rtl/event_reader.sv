// event_reader: load unit of the aggregator kernel.
//
// On a start pulse it reads a packet of `size` combined left/right camera
// events from global memory, starting at word address `base`, and streams them
// to the aggregator as cam_event_t records. After the last event it sends one
// record with eop=1, which makes the aggregator close the packet.
//
// Each event occupies three 32-bit words, as in the original combined kernels.
// The packing inside the three words is this design's choice:
//   word 0  timestamp (signed)
//   word 1  {y[15:0], x[15:0]}
//   word 2  bit 0 polarity (1 = ON/+1, 0 = OFF/-1), bit 1 side (1 = right)
//
// Memory interface: one valid/ready read request at a time, read data returned
// on rd_resp_valid some cycles later, in order. Timing: three requests per
// event; the next event's reads start once the previous event has been handed
// over on ev_valid/ev_ready.
module event_reader
  import evs_pkg::*;
#(
  parameter int unsigned WORDS_PER_EVENT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [WORD_W-1:0]    base,
  input  logic [WORD_W-1:0]    size,
  output logic                 busy,
  // global memory read port
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output logic [WORD_W-1:0]    rd_addr,
  input  logic                 rd_resp_valid,
  input  logic [WORD_W-1:0]    rd_resp_data,
  // event stream
  output logic                 ev_valid,
  input  logic                 ev_ready,
  output cam_event_t           ev
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_SEND, S_EOP} state_e;
  state_e state;

  logic [WORD_W-1:0] ev_idx, n_events, addr;
  logic [1:0]        word_idx;
  logic [WORD_W-1:0] words [WORDS_PER_EVENT];

  assign busy         = (state != S_IDLE);
  assign rd_req_valid = (state == S_REQ);
  assign rd_addr      = addr;
  assign ev_valid     = (state == S_SEND) || (state == S_EOP);

  always_comb begin
    ev      = '0;
    ev.eop  = (state == S_EOP);
    if (state != S_EOP) begin
      ev.ts   = signed'(words[0][TS_W-1:0]);
      ev.x    = words[1][COORD_W-1:0];
      ev.y    = words[1][2*COORD_W-1:COORD_W];
      ev.pol  = words[2][0];
      ev.side = side_e'(words[2][1]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ev_idx   <= '0;
      n_events <= '0;
      addr     <= '0;
      word_idx <= '0;
      for (int i = 0; i < WORDS_PER_EVENT; i++) words[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          ev_idx   <= '0;
          n_events <= size;
          addr     <= base;
          word_idx <= '0;
          state    <= (size == '0) ? S_EOP : S_REQ;
        end
        S_REQ: if (rd_req_ready) begin
          addr  <= addr + 1'b1;
          state <= S_WAIT;
        end
        S_WAIT: if (rd_resp_valid) begin
          words[word_idx] <= rd_resp_data;
          if (word_idx == 2'(WORDS_PER_EVENT - 1)) begin
            word_idx <= '0;
            state    <= S_SEND;
          end else begin
            word_idx <= word_idx + 1'b1;
            state    <= S_REQ;
          end
        end
        S_SEND: if (ev_ready) begin
          ev_idx <= ev_idx + 1'b1;
          state  <= (ev_idx + 1'b1 == n_events) ? S_EOP : S_REQ;
        end
        S_EOP: if (ev_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (WORDS_PER_EVENT == 3) else $error("event_reader: the word layout is defined for 3 words per event");

endmodule
