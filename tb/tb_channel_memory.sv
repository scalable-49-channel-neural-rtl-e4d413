// Testbench of channel_memory: every channel starts in Standby with zero sums;
// random writes of full 51-bit context words are read back from a copy kept here.
module tb_channel_memory;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, we = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [5:0] raddr, waddr;
  ch_ctx_t rdata, wdata;
  ch_ctx_t model [NCH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  channel_memory dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = 0; waddr = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if ($bits(ch_ctx_t) != 51) begin failures++; $display("FAIL: context is %0d bits", $bits(ch_ctx_t)); end
    for (int i = 0; i < NCH; i++) begin
      model[i] = '0;
      raddr = 6'(i); #1;
      checks++;
      if (rdata !== '0) begin failures++; $display("FAIL: channel %0d not reset", i); end
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = 6'($urandom_range(0, NCH-1));
      wdata = {$urandom, $urandom};
      raddr = 6'($urandom_range(0, NCH-1));
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL: read channel %0d", raddr); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
