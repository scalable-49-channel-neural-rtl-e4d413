// Testbench of pixel_state_machine. Each "ramp" is replayed cycle by cycle: the
// synchronized comparator rises at the signal's code, the threshold strobe comes
// at threshold 1. Expected behaviour per ramp is computed here from the rules:
// a sample is requested when the pixel is enabled and (non-event mode, or
// triggered, or code > threshold 1); the first one in event mode triggers the
// pixel; clear_trigger releases it.
module tb_pixel_state_machine;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic enable, event_mode, ramp_start, threshold, cmp_sync, clear, clear_trigger;
  logic sample, triggered;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pixel_state_machine dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One ramp with the comparator tripping at `code` (>=256: never). Returns
  // whether a sample request was raised, checking it is raised the cycle after
  // the comparator edge and dropped the cycle after clear.
  task automatic ramp(input int code, input int thr, output bit got);
    got = 0;
    for (int c = 0; c < 258; c++) begin
      @(negedge clk);
      ramp_start = (c == 0);
      threshold  = (c == thr);
      cmp_sync   = (c >= code) && (c < 256);
      clear      = 0;
      @(posedge clk); #1;
      if (sample && !got) begin
        got = 1;
        check(c === code, $sformatf("request timing: at %0d expected %0d", c, code));
        @(negedge clk); ramp_start = 0; threshold = 0; clear = 1;
        @(posedge clk); #1;
        check(sample === 0, "sample dropped after clear");
        c++;
      end
    end
    @(negedge clk); cmp_sync = 0; clear = 0; threshold = 0; ramp_start = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit got;
    bit trig_model;
    int thr;
    enable = 1; event_mode = 1; ramp_start = 0; threshold = 0; cmp_sync = 0;
    clear = 0; clear_trigger = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    thr = 100;
    trig_model = 0;
    // directed: below threshold, not digitized
    ramp(80, thr, got);  check(!got && !triggered, "below threshold not digitized");
    ramp(100, thr, got); check(!got, "code equal to threshold not digitized");
    ramp(120, thr, got); check(got && triggered, "above threshold digitized and triggered");
    ramp(50, thr, got);  check(got, "triggered pixel digitizes below threshold");
    ramp(300, thr, got); check(!got && triggered, "no crossing: no request, stays triggered");
    @(negedge clk) clear_trigger = 1; @(negedge clk) clear_trigger = 0;
    check(!triggered, "clear trigger");
    ramp(50, thr, got);  check(!got, "after clear, below threshold ignored");
    // random sequences
    for (int r = 0; r < 300; r++) begin
      int code;
      bit expect_got;
      int mode;
      mode = $urandom_range(0, 9);
      enable = (mode != 0);
      event_mode = (mode != 1);
      if (!enable || !event_mode) trig_model = 0;
      thr  = $urandom_range(20, 230);
      code = $urandom_range(0, 270);
      expect_got = enable && (code < 256) && (!event_mode || trig_model || code > thr);
      ramp(code, thr, got);
      check(got === expect_got, $sformatf("ramp %0d code %0d thr %0d en %0b ev %0b trig %0b",
                                         r, code, thr, enable, event_mode, trig_model));
      if (expect_got && event_mode) trig_model = 1;
      check(triggered === trig_model, "triggered state");
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk) clear_trigger = 1; @(negedge clk) clear_trigger = 0;
        trig_model = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
