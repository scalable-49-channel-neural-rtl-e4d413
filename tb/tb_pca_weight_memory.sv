// Testbench of pca_weight_memory: reset contents are zero; random writes are
// checked against a copy kept here by reading every index; out-of-range writes
// must not land anywhere and out-of-range indices read zero.
module tb_pca_weight_memory;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, we = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [7:0] waddr;
  logic [8:0] wdata;
  logic [4:0] ridx;
  logic [3:0][8:0] rdata;
  logic [8:0] model [NPC*NSAMP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pca_weight_memory dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_all();
    for (int i = 0; i < 32; i++) begin
      ridx = 5'(i); #1;
      for (int p = 0; p < NPC; p++)
        check(rdata[p] === ((i < NSAMP) ? model[p*NSAMP + i] : 9'd0),
              $sformatf("component %0d index %0d", p, i));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; wdata = 0; ridx = 0;
    for (int i = 0; i < NPC*NSAMP; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    read_all();
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = 1;
      waddr = 8'($urandom_range(0, 100));
      wdata = 9'($urandom);
      @(posedge clk); #1;
      if (waddr < NPC*NSAMP) model[waddr] = wdata;
      we = 0;
      if (n % 50 == 49) read_all();
    end
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
