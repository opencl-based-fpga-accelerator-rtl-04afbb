// evs_pkg: types and constants shared by the event-stream stereo accelerator.
//
// Three event records travel through the pipeline, one per stage:
//   cam_event_t  a raw polarity event from the left or right camera,
//   agg_event_t  an aggregated polarity event A(x,y) leaving the aggregator,
//   lvl_event_t  an integrated level event L(x,y) leaving the producer.
// Each carries an eop flag. A record with eop=1 carries no pixel and marks the
// end of a packet. It stands for the all -1 word that the original kernels
// push through their channel. The widths below are this design's choice; only
// the 32-bit signed timestamp with INT_MAX as the "empty" value follows the
// original kernel code.
package evs_pkg;

  localparam int TS_W    = 32;  // signed timestamp, microseconds
  localparam int COORD_W = 16;  // x / y coordinate
  localparam int AGG_W   = 8;   // signed aggregated polarity stored per pixel
  localparam int LVL_W   = 16;  // signed integrated level per pixel
  localparam int WORD_W  = 32;  // global memory word

  localparam logic signed [TS_W-1:0] TS_EMPTY = {1'b0, {(TS_W-1){1'b1}}}; // INT_MAX

  typedef enum logic {
    SIDE_LEFT  = 1'b0,
    SIDE_RIGHT = 1'b1
  } side_e;

  typedef struct packed {
    logic                      eop;
    side_e                     side;
    logic                      pol;   // 1: +1 (ON), 0: -1 (OFF)
    logic signed [TS_W-1:0]    ts;
    logic [COORD_W-1:0]        x;
    logic [COORD_W-1:0]        y;
  } cam_event_t;

  typedef struct packed {
    logic                      eop;
    side_e                     side;
    logic signed [TS_W-1:0]    ts;    // last timestamp seen at the pixel
    logic [COORD_W-1:0]        x;
    logic [COORD_W-1:0]        y;
    logic signed [AGG_W-1:0]   val;   // aggregated polarity A(x,y)
  } agg_event_t;

  typedef struct packed {
    logic                      eop;
    side_e                     side;
    logic signed [TS_W-1:0]    ts;
    logic [COORD_W-1:0]        x;
    logic [COORD_W-1:0]        y;
    logic signed [LVL_W-1:0]   level; // integrated level L(x,y)
  } lvl_event_t;

endpackage
