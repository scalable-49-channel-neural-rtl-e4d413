// Digital part of the shared ramp generator.
//
// Every sampling period (PERIOD clock cycles, 800 = 20 kHz at 16 MHz by default
// in the register bank) the generator releases the DAC reset and steps an 8-bit
// counter from 0 to 255, one code per clock while ramp_enable is high; the
// address decoder drops ramp_enable to pause the ramp while it resolves a
// collision. The counter drives the capacitor DAC through the thermometer
// decoder. For the rest of the period the DAC is held in reset, which is also when
// the sample-and-hold of every pixel tracks its amplifier (sh_sample high).
//
// Because each pixel sees its comparator through a synchronizer and an edge
// detector, the generator also keeps a delayed copy of the counter ("Counter
// delayed"): count_delayed is the code the comparators saw DELAY cycles ago,
// which is the code a sample request refers to when it reaches the address
// decoder. The Threshold strobe and the ramp_start flag handed to the pixels are
// taken from the same delay line, DELAY-1 cycles back, because the pixel state
// machine evaluates them one cycle before its request appears.
//
// Follows the paper: shared 8-bit counter, thermometer-coded DAC with reset,
// delayed counter, Threshold signal, ramp pause. This design's choices: one code
// per clock, the period counter, DELAY=3, threshold as an equality on the
// delayed code, frame_end at the last cycle of each period.
//
// Interface: run, period, thr1 from configuration; ramp_enable from the address
// decoder; therm/dac_rst to the DAC; count_delayed to the counter buffer;
// ramp_start/threshold to the pixels; frame_end (one pulse per period) to the
// central controller.
module ramp_generator
  import nr_pkg::*;
#(
  parameter int unsigned DELAY = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic [PERIOD_W-1:0] period,
  input  logic [ADC_W-1:0]    thr1,
  input  logic                ramp_enable,
  output logic [2**ADC_W-1:0] therm,
  output logic                dac_rst,
  output logic                sh_sample,
  output logic [ADC_W-1:0]    count,
  output logic [ADC_W-1:0]    count_delayed,
  output logic                ramp_start,
  output logic                threshold,
  output logic                frame_end
);
  logic [PERIOD_W-1:0] pcnt;
  logic                active;
  logic                first;        // first cycle of a ramp (code 0 applied)

  // Delay line of {active, first, code}; index 0 is the current cycle.
  logic [DELAY:0]            d_active;
  logic [DELAY:0]            d_first;
  logic [DELAY:0][ADC_W-1:0] d_code;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt   <= '0;
      active <= 1'b0;
      first  <= 1'b0;
      count  <= '0;
    end else if (!run) begin
      pcnt   <= '0;
      active <= 1'b0;
      first  <= 1'b0;
      count  <= '0;
    end else begin
      pcnt  <= (pcnt >= period - 1'b1) ? '0 : pcnt + 1'b1;
      first <= 1'b0;
      if (!active) begin
        count <= '0;
        if (pcnt == '0) begin
          active <= 1'b1;
          first  <= 1'b1;
        end
      end else if (ramp_enable) begin
        if (count == '1) active <= 1'b0;
        else             count  <= count + 1'b1;
      end
    end
  end

  assign d_active[0] = active;
  assign d_first[0]  = first;
  assign d_code[0]   = count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_active[DELAY:1] <= '0;
      d_first[DELAY:1]  <= '0;
      d_code[DELAY:1]   <= '0;
    end else begin
      d_active[DELAY:1] <= d_active[DELAY-1:0];
      d_first[DELAY:1]  <= d_first[DELAY-1:0];
      d_code[DELAY:1]   <= d_code[DELAY-1:0];
    end
  end

  thermometer_decoder #(.BITS(ADC_W)) u_therm (.count(count), .therm(therm));

  assign dac_rst       = !active;
  assign sh_sample     = run && !active;
  assign count_delayed = d_code[DELAY];
  assign ramp_start    = d_first[DELAY-1];
  assign threshold     = d_active[DELAY-1] && (d_code[DELAY-1] == thr1);
  assign frame_end     = run && (pcnt >= period - 1'b1);
endmodule
