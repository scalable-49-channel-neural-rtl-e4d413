// Testbench of ramp_generator: ramp timing within a sampling period, one code per
// enabled clock, pauses, the delayed counter, the Threshold strobe, ramp_start,
// the DAC reset, the thermometer code and frame_end once per period.
module tb_ramp_generator;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, run = 0, ramp_enable = 1;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [15:0] period;
  logic [7:0]  thr1;
  logic [255:0] therm;
  logic dac_rst, sh_sample, ramp_start, threshold, frame_end;
  logic [7:0] count, count_delayed;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ramp_generator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // history of the counter and of "ramp active" (index 0 = this cycle)
  logic [7:0] hist [0:3];
  logic       act  [0:3];
  int cyc, frame_ends, first_cycle, active_cycles, paused_cycles, strobes;
  int last_frame_end;

  initial begin
    period = 16'd400; thr1 = 8'd77;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) run = 1;
    cyc = 0; frame_ends = 0; active_cycles = 0; paused_cycles = 0; strobes = 0;
    last_frame_end = -1;
    for (int i = 0; i < 4; i++) begin hist[i] = 0; act[i] = 0; end
    for (int t = 0; t < 1600; t++) begin
      @(negedge clk);
      // random pauses of the ramp
      ramp_enable = ($urandom_range(0, 9) != 0);
      #1;
      for (int i = 3; i > 0; i--) begin hist[i] = hist[i-1]; act[i] = act[i-1]; end
      hist[0] = count; act[0] = !dac_rst;
      // DAC code and reset
      if (!dac_rst) check($countones(therm) === int'(count) + 1, "thermometer code follows count");
      check(sh_sample === dac_rst, "sample-and-hold tracks while the DAC is reset");
      check(count_delayed === hist[3], "count_delayed is count three cycles earlier");
      check(threshold === (act[2] && hist[2] === thr1), "threshold strobe on delayed code");
      if (threshold) strobes++;
      if (!dac_rst) begin
        active_cycles++;
        if (!ramp_enable) paused_cycles++;
      end
      if (frame_end) begin
        if (last_frame_end >= 0) check(t - last_frame_end === 400, "frame_end once per period");
        last_frame_end = t;
        frame_ends++;
      end
      @(posedge clk); #1;
      // the counter advances only when enabled
      if (act[0] && ramp_enable && hist[0] != 8'hFF) check(count === hist[0] + 1, "count steps by one");
      if (act[0] && !ramp_enable) check(count === hist[0], "count holds during pause");
    end
    // each ramp is 256 codes plus its paused cycles
    check(frame_ends === 4, $sformatf("frame_end count %0d", frame_ends));
    check(active_cycles === 4 * 256 + paused_cycles, $sformatf("active %0d paused %0d", active_cycles, paused_cycles));
    check(strobes >= 4, "threshold strobe in every ramp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
