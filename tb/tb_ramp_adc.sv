// Testbench of ramp_adc together with 49 pixel front-ends (digital_front_end) and
// behavioural analog front-ends, in non-event mode so every ramp digitizes every
// channel. Channel levels are drawn from a few well separated values so that
// several channels share a level (collisions). Each ramp, every channel whose
// level is below 256 must be reported exactly once with its level as code; the
// ramp must pause for every collision, the ramp must last exactly 256 codes plus
// one cycle per extra channel of a collision, and it must fit the sampling
// period. Two directed ramps close the run: all 49 channels at one code (the
// worst case, 304 cycles), and 49 channels spread over five adjacent codes, where
// requests keep arriving from the comparator pipeline during the pause and must
// still get their own codes.
module tb_ramp_adc;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, run = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [15:0] period = 16'd800;
  logic [7:0]  thr1 = 8'd0;
  logic [NCH-1:0] sample, clear, cmp, trig;
  logic [255:0] therm;
  logic dac_rst, sh_sample, ramp_start, threshold, frame_end, ramp_paused;
  adc_sample_t out;
  logic [8:0] level [NCH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ramp_adc dut (.clk, .rst_n, .run, .period, .thr1, .sample, .clear, .therm, .dac_rst,
                .sh_sample, .ramp_start, .threshold, .frame_end, .ramp_paused, .out);

  for (genvar i = 0; i < NCH; i++) begin : g_pix
    afe_model u_afe (.enable(1'b1), .vin_code(level[i]), .sh_sample, .ramp_therm(therm),
                     .ramp_dac_rst(dac_rst), .cmp(cmp[i]));
    digital_front_end u_dfe (.clk, .rst_n, .cmp(cmp[i]), .enable(1'b1), .event_mode(1'b0),
                             .ramp_start, .threshold, .clear(clear[i]), .clear_trigger(1'b0),
                             .sample(sample[i]), .triggered(trig[i]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen [NCH];
  int code_of [NCH];
  int paused, expected_pauses, samples, ramp_cycles;

  always @(posedge clk) if (rst_n && run) begin
    if (out.valid) begin
      samples++;
      if (out.addr < NCH) begin
        seen[out.addr]++;
        code_of[out.addr] = out.amp;
      end
    end
    if (ramp_paused) paused++;
    if (!dac_rst) ramp_cycles++;
  end

  initial begin
    int lv [8];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      int hist [256];
      // the directed worst-case ramps only run on a design that passed the random
      // ramps: a ramp that does not pause would overflow the decoder queue there
      if (r == 10 && failures > 0) break;
      // new levels while the ramp is idle
      for (int k = 0; k < 8; k++) lv[k] = 8 + 30 * k + $urandom_range(0, 5);
      for (int c = 0; c < 256; c++) hist[c] = 0;
      for (int i = 0; i < NCH; i++) begin
        case (r)
          10: level[i] = 9'(100 + i % 5);        // dense: five adjacent codes, late arrivals
          11: level[i] = 9'd77;                  // worst case: all channels at one code
          default: level[i] = 9'(($urandom_range(0, 15) == 0) ? 300 : lv[$urandom_range(0, 7)]);
        endcase
        if (level[i] < 256) hist[level[i]]++;
      end
      expected_pauses = 0;
      for (int c = 0; c < 256; c++) if (hist[c] > 1) expected_pauses += hist[c] - 1;
      for (int i = 0; i < NCH; i++) begin seen[i] = 0; code_of[i] = -1; end
      paused = 0; samples = 0; ramp_cycles = 0;
      @(negedge clk) run = 1;
      @(posedge frame_end); @(negedge clk);
      for (int i = 0; i < NCH; i++) begin
        if (level[i] < 256) begin
          check(seen[i] === 1, $sformatf("ramp %0d ch %0d seen %0d times", r, i, seen[i]));
          check(code_of[i] === int'(level[i]), $sformatf("ramp %0d ch %0d code %0d level %0d", r, i, code_of[i], level[i]));
        end else begin
          check(seen[i] === 0, "no crossing, no sample");
        end
      end
      check(ramp_cycles === 256 + paused, "ramp lasts 256 codes plus the paused cycles");
      if (r == 11) check(ramp_cycles === 304, "all 49 channels at one code: 304-cycle ramp");
      // in the dense ramp, requests of adjacent codes overlap, so the pause is longer
      // than one cycle per extra channel of a code; only the codes are checked there
      if (r != 10) check(paused === expected_pauses, $sformatf("ramp paused %0d cycles, expected %0d", paused, expected_pauses));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
