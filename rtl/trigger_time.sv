// trigger_time: turns triggers into acceptance windows.
//
// A trigger is time-stamped with the coarse counter. The programmable latency
// (time for the trigger to be formed and distributed) is subtracted to give
// the lower window limit, and the programmable gate (drift time or time of
// flight) is added to that to give the upper limit. Each real trigger gets
// the next value of an 8-bit identifier tag. The window is broadcast to the
// trigger FIFOs of all channels.
//
// When no trigger has come for art_period cycles, an artificial trigger with
// the same window arithmetic is issued; it only moves the search start
// pointers of the hit buffers forward so that they do not fill up, and
// produces no data. art_period = 0 switches this off.
// Timing: trig_valid is registered, one clk after the trigger input.
// The window arithmetic and the artificial triggers follow the paper; the tag
// width, the interval counter and the rule that a real trigger restarts the
// interval are this design's choices.
module trigger_time
  import tdc_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [COARSE_W-1:0] coarse_time,
  input  logic                trigger,
  input  logic [COARSE_W-1:0] latency,
  input  logic [COARSE_W-1:0] gate,
  input  logic [15:0]         art_period,
  output logic                trig_valid,
  output trig_t               trig,
  output logic [TAG_W-1:0]    event_no
);
  logic [15:0]         since;
  logic                art;
  logic [COARSE_W-1:0] low;

  assign art = (art_period != '0) && (since >= art_period - 1'b1) && !trigger;
  assign low = coarse_time - latency;

  always_ff @(posedge clk) begin
    if (rst) begin
      since      <= '0;
      trig_valid <= 1'b0;
      trig       <= '0;
      event_no   <= '0;
    end else begin
      trig_valid <= trigger | art;
      if (trigger | art) begin
        since           <= '0;
        trig.artificial <= ~trigger;
        trig.tag        <= event_no;
        trig.win_low    <= low;
        trig.win_high   <= low + gate;
      end else begin
        since <= since + 1'b1;
      end
      if (trigger) event_no <= event_no + 1'b1;
    end
  end
endmodule
