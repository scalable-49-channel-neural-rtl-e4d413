// Digital front-end of one pixel: comparator synchronizer plus pixel state machine.
//
// The asynchronous comparator output of the analog front-end is synchronized
// (synchro) and handed to the pixel state machine, which decides whether this
// ramp's crossing is digitized and raises the sample request towards the address
// decoder. The structure (Synchro feeding the Pixel state machine) is the one the
// paper draws; the internals are described in the two sub-modules.
//
// Timing: a comparator edge at cycle t shows as `sample` at cycle t+SYNC_STAGES+1.
module digital_front_end #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cmp,             // comparator output, asynchronous
  input  logic enable,
  input  logic event_mode,
  input  logic ramp_start,
  input  logic threshold,
  input  logic clear,
  input  logic clear_trigger,
  output logic sample,
  output logic triggered
);
  logic cmp_sync;

  synchro #(.STAGES(SYNC_STAGES)) u_sync (
    .clk, .rst_n, .d(cmp), .q(cmp_sync)
  );

  pixel_state_machine u_fsm (
    .clk, .rst_n, .enable, .event_mode, .ramp_start, .threshold,
    .cmp_sync, .clear, .clear_trigger, .sample, .triggered
  );
endmodule
