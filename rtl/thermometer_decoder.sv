// Thermometer decoder of the ramp generator.
//
// Turns the BITS-bit ramp counter into a 2**BITS-bit unary code b[] for the
// unary-weighted capacitor DAC: b[k] is 1 for every k up to the count, so code c
// switches c+1 unit capacitors (all 256 at code 255; the DAC's separate reset
// switch gives the ramp's bottom level) and consecutive codes differ in one switch.
// The paper gives the 8-bit to 256-bit conversion; the bit order is this design's.
//
// Purely combinational.
module thermometer_decoder #(
  parameter int unsigned BITS = 8
) (
  input  logic [BITS-1:0]      count,
  output logic [2**BITS-1:0]   therm
);
  always_comb begin
    for (int unsigned k = 0; k < 2**BITS; k++) begin
      therm[k] = (k <= 32'(count));
    end
  end
endmodule
