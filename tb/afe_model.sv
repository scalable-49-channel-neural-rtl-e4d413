// Behavioural model of one pixel's analog front-end (not synthesizable logic:
// LNA, sample-and-hold and comparator of the real chip are analog circuits).
//
// The amplified electrode signal is given directly in ramp-code units
// (vin_code: the code at which the ramp crosses it; 256 or more never crosses).
// While sh_sample is high the sample-and-hold tracks vin_code; when it falls the
// value is held for the ramp. The ramp level is the number of switched unit
// capacitors of the thermometer code minus one, and the comparator output is
// high once the ramp has reached the held level; the DAC reset pulls the ramp
// below every level. A disabled front-end keeps its comparator low.
module afe_model (
  input  logic         enable,
  input  logic [8:0]   vin_code,
  input  logic         sh_sample,
  input  logic [255:0] ramp_therm,
  input  logic         ramp_dac_rst,
  output logic         cmp
);
  logic [8:0] held;

  always_latch if (sh_sample) held = vin_code;

  always_comb cmp = enable && !ramp_dac_rst && ($countones(ramp_therm) - 1 >= int'(held));
endmodule
