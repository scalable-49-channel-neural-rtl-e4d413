// Shared event-driven ramp ADC: ramp generator plus address decoder.
//
// One 8-bit ramp is broadcast to all pixels each sampling period. The pixels'
// sample requests come back to the address decoder, which serves them lowest
// address first, pauses the ramp on collisions and emits (address, code) pairs
// on `out`. This wrapper only wires the two halves together the way the paper
// draws them: Ramp enable from the decoder to the generator, Counter delayed from
// the generator to the decoder's counter buffer.
//
// Timing: see ramp_generator and address_decoder; a comparator edge at cycle t is
// reported on `out` at cycle t+4 when it does not collide (2 synchronizer flops,
// 1 pixel flop, 1 decoder flop).
module ramp_adc
  import nr_pkg::*;
#(
  parameter int unsigned N     = NCH,
  parameter int unsigned DELAY = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic [PERIOD_W-1:0] period,
  input  logic [ADC_W-1:0]    thr1,
  input  logic [N-1:0]        sample,
  output logic [N-1:0]        clear,
  output logic [2**ADC_W-1:0] therm,
  output logic                dac_rst,
  output logic                sh_sample,
  output logic                ramp_start,
  output logic                threshold,
  output logic                frame_end,
  output logic                ramp_paused,   // collision being resolved
  output adc_sample_t         out
);
  logic             ramp_enable;
  logic [ADC_W-1:0] count;
  logic [ADC_W-1:0] count_delayed;

  ramp_generator #(.DELAY(DELAY)) u_gen (
    .clk, .rst_n, .run, .period, .thr1, .ramp_enable,
    .therm, .dac_rst, .sh_sample, .count, .count_delayed,
    .ramp_start, .threshold, .frame_end
  );

  address_decoder #(.N(N)) u_dec (
    .clk, .rst_n, .sample, .count_delayed, .clear, .ramp_enable, .out
  );

  assign ramp_paused = !ramp_enable;
endmodule
