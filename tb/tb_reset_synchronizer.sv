// Testbench of reset_synchronizer: reset must assert at once with the pad and
// release exactly on the second clock edge after the pad is released.
module tb_reset_synchronizer;
  logic clk = 0, rst_n_async = 0, rst_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  reset_synchronizer dut (.clk, .rst_n_async, .rst_n);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    check(rst_n === 0, "held in reset");
    for (int trial = 0; trial < 20; trial++) begin
      @(negedge clk) rst_n_async = 1;
      @(posedge clk); #1 check(rst_n === 0, "still in reset after 1 edge");
      @(posedge clk); #1 check(rst_n === 1, "released after 2 edges");
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #2 rst_n_async = 0;        // asynchronous assertion between edges
      #1 check(rst_n === 0, "asynchronous assertion");
      repeat ($urandom_range(1, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
