// Testbench of digital_front_end: an asynchronous comparator edge must reach the
// sample request exactly SYNC_STAGES+1 clocks later, gated by the threshold rule
// of the pixel state machine (event mode: code above threshold 1 or triggered).
module tb_digital_front_end;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic cmp, enable, event_mode, ramp_start, threshold, clear, clear_trigger;
  logic sample, triggered;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  digital_front_end dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Ramp code c is applied to the comparator at cycle c; the pixel sees it two
  // cycles later, so ramp_start and threshold are issued two cycles late.
  task automatic ramp(input int code, input int thr, output int seen_at);
    seen_at = -1;
    for (int c = 0; c < 262; c++) begin
      @(negedge clk);
      #2 cmp = (c >= code) && (c < 256);      // asynchronous to the clock
      ramp_start = (c == 2);
      threshold  = (c - 2 == thr);
      clear = 0;
      @(posedge clk); #1;
      if (sample && seen_at < 0) begin
        seen_at = c;
        @(negedge clk) clear = 1; ramp_start = 0; threshold = 0;
        c++;
      end
    end
    @(negedge clk) cmp = 0; clear = 0; ramp_start = 0; threshold = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int seen;
    bit trig;
    cmp = 0; enable = 1; event_mode = 1; ramp_start = 0; threshold = 0;
    clear = 0; clear_trigger = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    trig = 0;
    for (int r = 0; r < 200; r++) begin
      int code, thr;
      bit expect_req;
      thr  = $urandom_range(10, 240);
      code = $urandom_range(0, 255);
      expect_req = trig || code > thr;
      ramp(code, thr, seen);
      check((seen >= 0) === expect_req, $sformatf("request code %0d thr %0d trig %0b", code, thr, trig));
      if (seen >= 0) check(seen === code + 2, $sformatf("latency: seen at %0d for code %0d", seen, code));
      if (expect_req) trig = 1;
      check(triggered === trig, "triggered");
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk) clear_trigger = 1; @(negedge clk) clear_trigger = 0;
        trig = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
