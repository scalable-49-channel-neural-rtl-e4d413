// Testbench of thermometer_decoder: every count 0..255 must give a code with
// exactly count+1 ones, all at the low end.
module tb_thermometer_decoder;
  logic [7:0]   count;
  logic [255:0] therm;
  int checks = 0, failures = 0;

  thermometer_decoder dut (.count, .therm);

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      logic [255:0] expect_code;
      count = 8'(c);
      #1;
      expect_code = '0;
      for (int k = 0; k <= c; k++) expect_code[k] = 1'b1;
      checks++;
      if (therm !== expect_code || $countones(therm) != c + 1) begin
        failures++; $display("FAIL: count %0d ones %0d", c, $countones(therm));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
