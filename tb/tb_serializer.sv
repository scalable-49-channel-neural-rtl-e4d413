// Testbench of serializer: random bytes offered with random gaps must appear on
// dout MSB first, one bit per clock, back to back when offered back to back
// (16 Mbit/s at 16 MHz: a burst of B bytes takes exactly 8*B clocks).
module tb_serializer;
  logic clk = 0, rst_n = 1, byte_valid = 0, byte_ready, dout;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [7:0] byte_data;
  int checks = 0, failures = 0;
  byte unsigned sent [$];
  always #5 clk = ~clk;

  serializer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: a byte starts with the first cycle dout is driven by a busy shifter
  int first_busy = -1, last_busy = -1, cyc = 0;
  initial begin
    logic [7:0] rx;
    forever begin
      @(posedge clk); cyc++;
      if (!rst_n) continue;
      if (dut.busy) begin
        if (first_busy < 0) first_busy = cyc;
        last_busy = cyc;
        rx = {rx[6:0], dout};
        if (dut.bitcnt == 3'd7) begin
          checks++;
          if (sent.size() == 0 || rx !== sent[0]) begin
            failures++; $display("FAIL: byte %h", rx);
          end
          if (sent.size() != 0) void'(sent.pop_front());
        end
      end else begin
        checks++;
        if (dout !== 1'b0) begin failures++; $display("FAIL: idle line not low"); end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // burst of 20 bytes back to back: 160 busy cycles
    for (int i = 0; i < 20; i++) begin
      @(negedge clk) byte_valid = 1; byte_data = 8'($urandom);
      while (!byte_ready) @(negedge clk);
      sent.push_back(byte_data);
      @(posedge clk);
    end
    @(negedge clk) byte_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (last_busy - first_busy + 1 != 160) begin
      failures++; $display("FAIL: burst took %0d cycles", last_busy - first_busy + 1);
    end
    // random traffic
    for (int i = 0; i < 300; i++) begin
      repeat ($urandom_range(0, 12)) @(negedge clk);
      byte_valid = 1; byte_data = 8'($urandom);
      while (!byte_ready) @(negedge clk);
      sent.push_back(byte_data);
      @(posedge clk);
      @(negedge clk) byte_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL: %0d bytes not sent", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
