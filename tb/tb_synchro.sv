// Testbench of synchro: the output must equal the input two clocks earlier.
module tb_synchro;
  logic clk = 0, rst_n = 1, d = 0, q;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [1:0] hist;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  synchro dut (.clk, .rst_n, .d, .q);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hist = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (q !== hist[1]) begin failures++; $display("FAIL: q=%0b expected %0b", q, hist[1]); end
      d = $urandom_range(0, 1);
      @(posedge clk);
      hist = {hist[0], d};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
