// Testbench of address_decoder. A reference model of the batch queue is kept
// here: requests arriving in the same cycle form a batch holding the delayed
// counter of that cycle; each cycle the lowest address of the oldest batch must
// be cleared and reported on the next cycle with the batch code, and the ramp
// must be paused while two or more requests are outstanding. New batches are only
// offered while fewer than four are outstanding, as in the ADC where arrivals stop
// DELAY cycles after the ramp pauses.
module tb_address_decoder;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [NCH-1:0] sample, clear;
  logic [7:0] count_delayed;
  logic ramp_enable;
  adc_sample_t out;
  int checks = 0, failures = 0, collisions = 0;
  always #5 clk = ~clk;

  address_decoder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NCH-1:0] pend, newreq;
    logic [NCH-1:0] qm[$];
    int qc[$];
    int exp_addr, exp_code, npend, late;
    sample = '0; count_delayed = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    pend = '0; late = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // new requests: mostly none, sometimes one, sometimes several at once
      newreq = '0;
      if (qm.size() < 4)
        case ($urandom_range(0, 9))
          0, 1: newreq[$urandom_range(0, NCH-1)] = 1'b1;
          2: for (int k = 0; k < $urandom_range(2, 6); k++) newreq[$urandom_range(0, NCH-1)] = 1'b1;
          default: ;
        endcase
      newreq &= ~pend;
      count_delayed = 8'($urandom);
      if (newreq != '0) begin
        if (pend != '0) late++;
        qm.push_back(newreq);
        qc.push_back(int'(count_delayed));
      end
      pend |= newreq;
      sample = pend;
      #1;
      npend = $countones(pend);
      exp_addr = -1;
      if (qm.size() > 0)
        for (int i = NCH - 1; i >= 0; i--) if (qm[0][i]) exp_addr = i;
      check(ramp_enable === (npend < 2), "ramp_enable low only with two or more pending");
      if (npend >= 2) collisions++;
      if (exp_addr >= 0) check(clear === (NCH'(1) << exp_addr), "clear lowest of oldest batch");
      else check(clear === '0, "no clear without request");
      if (exp_addr >= 0) exp_code = qc[0];
      @(posedge clk); #1;
      check(out.valid === (exp_addr >= 0), "valid");
      if (exp_addr >= 0) begin
        check(out.addr === ADDR_W'(exp_addr), $sformatf("address %0d expected %0d", out.addr, exp_addr));
        check(out.amp === 8'(exp_code), $sformatf("batch code %0d expected %0d", out.amp, exp_code));
        pend[exp_addr] = 1'b0;
        newreq = qm[0];
        newreq[exp_addr] = 1'b0;
        qm[0] = newreq;
        if (newreq == '0) begin
          void'(qm.pop_front());
          void'(qc.pop_front());
        end
      end
    end
    check(late > 100, "late batches exercised");
    check(collisions > 100, "collisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
