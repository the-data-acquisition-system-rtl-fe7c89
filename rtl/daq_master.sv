// daq_master -- DAQ Master: turns an accepted trigger into an event window.
//
// An event is the stretch of time from a pre-event window before the trigger
// to `post_window` samples after it (the digitizers apply the pre-event
// window themselves).  When the Data Sparsifier
// Master reports a trigger, the DAQ Master tells all digitizers the trigger
// time (`event_start`, which stops them from discarding data of the
// pre-event window), waits out the post-event window, and then ends the event
// on all digitizers at once (`event_close`) and hands the event number to the
// Data Extractors (`extract`).  Further triggers inside the post-event window
// do not extend it.  A post-event holdoff of `holdoff` samples follows, during
// which no trigger can start an event.
// `ready` tells the Data Sparsifier Master that a trigger would be accepted:
// the master is idle and every digitizer has a buffer to write into (`live`).
// The master also counts the clock cycles in which it could not accept a
// trigger (`dead_cycles`), split into window, holdoff and buffer-full time;
// this design's way of exposing the live time the paper computes offline.
module daq_master
  import fadr_pkg::*;
#(
  parameter int unsigned SW = N_SOURCES
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           running,
  input  win_t           post_window,
  input  win_t           holdoff,
  input  logic           live,
  output logic           ready,
  input  logic           trig,
  input  tstamp_t        trig_ts,
  input  logic [SW-1:0]  trig_src,
  output logic           event_start,
  output tstamp_t        event_time,
  output logic           event_close,
  output logic           extract,
  output logic [31:0]    event_id,
  output logic [SW-1:0]  event_src,
  output logic [47:0]    busy_cycles,
  output logic [47:0]    hold_cycles,
  output logic [47:0]    full_cycles
);
  typedef enum logic [1:0] {M_IDLE, M_POST, M_HOLD} mst_t;
  mst_t mst;
  win_t cnt;

  assign ready = running && mst == M_IDLE && live;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mst <= M_IDLE; cnt <= '0;
      event_start <= 1'b0; event_time <= '0; event_close <= 1'b0;
      extract <= 1'b0; event_id <= '0; event_src <= '0;
      busy_cycles <= '0; hold_cycles <= '0; full_cycles <= '0;
    end else begin
      event_start <= 1'b0;
      event_close <= 1'b0;
      extract     <= 1'b0;
      unique case (mst)
        M_IDLE: if (trig && ready) begin
          mst <= M_POST; cnt <= post_window;
          event_start <= 1'b1; event_time <= trig_ts; event_src <= trig_src;
        end
        M_POST: if (cnt <= win_t'(1)) begin
          event_close <= 1'b1; extract <= 1'b1; event_id <= event_id + 1'b1;
          if (holdoff == '0) mst <= M_IDLE;
          else begin mst <= M_HOLD; cnt <= holdoff; end
        end else cnt <= cnt - 1'b1;
        M_HOLD: if (cnt <= win_t'(1)) mst <= M_IDLE;
                else cnt <= cnt - 1'b1;
        default: mst <= M_IDLE;
      endcase
      if (running && mst == M_POST) busy_cycles <= busy_cycles + 1'b1;
      if (running && mst == M_HOLD) hold_cycles <= hold_cycles + 1'b1;
      if (running && mst == M_IDLE && !live) full_cycles <= full_cycles + 1'b1;
    end
endmodule
