// Testbench of deserializer: random 32-bit frames are Manchester coded here
// (start bit '1', 8 clocks per bit, '1' = low-to-high at mid-bit) with random
// idle gaps; each must come out exactly once and unchanged, within 1.5 bit times
// of its last bit. Frames of the wrong length must be dropped.
module tb_deserializer;
  logic clk = 0, rst_n = 1, din = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic frame_valid;
  logic [31:0] frame;
  int checks = 0, failures = 0, got = 0;
  logic [31:0] last_frame;
  always #5 clk = ~clk;

  deserializer dut (.*);

  task automatic send_bits(input logic [63:0] bits, input int n);
    for (int i = n - 1; i >= 0; i--) begin
      repeat (4) @(negedge clk) din = ~bits[i];
      repeat (4) @(negedge clk) din = bits[i];
    end
    @(negedge clk) din = 0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (frame_valid) begin got++; last_frame = frame; end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    for (int n = 0; n < 150; n++) begin
      logic [31:0] f;
      int nb;
      f = $urandom;
      nb = got;
      send_bits({31'd0, 1'b1, f}, 33);
      repeat (16) @(posedge clk);      // 1.5 bit timeout plus synchronizer
      check(got === nb + 1, $sformatf("frame %0d received once", n));
      check(last_frame === f, $sformatf("frame %0d: %h expected %h", n, last_frame, f));
      repeat ($urandom_range(0, 30)) @(posedge clk);
    end
    // wrong lengths are dropped
    for (int n = 0; n < 10; n++) begin
      int nb;
      nb = got;
      send_bits({$urandom, $urandom}, (n % 2) ? 20 : 40);
      repeat (30) @(posedge clk);
      check(got === nb, "short or long frame dropped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
