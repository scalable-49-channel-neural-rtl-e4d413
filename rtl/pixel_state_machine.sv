// Pixel state machine of one channel's digital front-end.
//
// Once per ramp the state machine learns whether the channel's signal lies above
// the primary threshold: the ramp generator pulses `threshold` when the ramp code
// seen by the (synchronized) comparator equals threshold 1, and a comparator that
// has not tripped by then means the signal is above it (ADC code > threshold 1).
// When the comparator then trips, the state machine raises `sample`, which stays
// high until the address decoder answers with `clear` (the decoder latched the
// code when the request arrived). The first digitized sample sets the pixel `triggered`; a triggered
// pixel digitizes every ramp, whatever the amplitude, until the spike detector
// sends `clear_trigger`. With event_mode low every ramp is digitized (raw mode
// without detection). A disabled pixel never requests a sample.
//
// What follows the paper: the primary-threshold gate, the triggered state that
// holds until Clear trigger, Sample held until Clear ch. This design's choices:
// the threshold is tested by sampling the comparator at the Threshold strobe, the
// request is the rising edge of the synchronized comparator, one request per ramp,
// and a new trigger wins over a simultaneous clear_trigger.
//
// Timing: sample rises one cycle after the synchronized comparator rises and
// falls one cycle after clear.
module pixel_state_machine (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,          // pixel enable register bit
  input  logic event_mode,      // 1: event-driven digitization
  input  logic ramp_start,      // first code of a ramp reaches the comparator
  input  logic threshold,       // ramp code at the comparator equals threshold 1
  input  logic cmp_sync,        // synchronized comparator output
  input  logic clear,           // Clear ch from the address decoder
  input  logic clear_trigger,   // Clear trigger from the spike detector
  output logic sample,          // sample request
  output logic triggered        // pixel triggered
);
  logic cmp_d;      // comparator one cycle earlier
  logic above;      // signal above threshold 1 during this ramp
  logic done;       // already requested a sample during this ramp
  logic rise;
  logic digitize;

  assign rise     = cmp_sync && !cmp_d;
  // On the first code of a ramp the flags of the previous ramp no longer count.
  assign digitize = enable && rise && !(done && !ramp_start) &&
                    (!event_mode || triggered || (above && !ramp_start));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_d     <= 1'b0;
      above     <= 1'b0;
      done      <= 1'b0;
      sample    <= 1'b0;
      triggered <= 1'b0;
    end else begin
      cmp_d <= cmp_sync;

      if (threshold)       above <= !cmp_sync;
      else if (ramp_start) above <= 1'b0;

      if (digitize)        done <= 1'b1;
      else if (ramp_start) done <= 1'b0;

      if (!enable)       sample <= 1'b0;
      else if (digitize) sample <= 1'b1;
      else if (clear)    sample <= 1'b0;

      if (!enable || !event_mode)      triggered <= 1'b0;
      else if (digitize)               triggered <= 1'b1;
      else if (clear_trigger)          triggered <= 1'b0;
    end
  end
endmodule
