// Testbench of central_controller, driven only through its pins: configuration
// frames are Manchester coded onto din, and the serial output is collected and
// split into packets here. Checks: register writes reach the configuration and
// the coefficient port, a register read comes back as a register packet, raw
// samples come back framed with the current timestamp and ASIC address, spikes
// in compressed mode, and an overfilled period sets the sticky overflow bit.
// Every register is written with random values and read back (masked to its
// width), all 88 coefficients are forwarded, each command is accepted 33 bit
// times (8 clocks each) after it starts, and every packet leaves at exactly one
// bit per clock with no gaps between bytes.
module tb_central_controller;
  import nr_pkg::*;
  logic clk = 0, rst_n_pad = 1, rst_n, din = 0, dout, frame_end = 0;
  initial #1 rst_n_pad = 0;   // power-on reset edge: asynchronous resets act at once
  adc_sample_t raw;
  spike_t spk;
  cfg_t cfg;
  logic w_we, overflow_evt;
  logic [7:0] w_addr, timestamp;
  logic [8:0] w_data;
  int checks = 0, failures = 0, wes = 0;
  always #5 clk = ~clk;

  central_controller dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [7:0] op, input logic [7:0] a, input logic [15:0] d);
    logic [32:0] bits;
    bits = {1'b1, op, a, d};
    for (int i = 32; i >= 0; i--) begin
      repeat (4) @(negedge clk) din = ~bits[i];
      repeat (4) @(negedge clk) din = bits[i];
    end
    @(negedge clk) din = 0;
    repeat (24) @(negedge clk);
  endtask

  // serial receiver: splits the stream into packets using the header
  byte unsigned pk [$];        // bytes of completed packets, in order
  int npk = 0, npk_base = 0, cyc = 0, bad_timing = 0;
  always @(posedge clk) cyc++;
  initial begin
    byte unsigned cur [$];
    logic [7:0] sh;
    int nb, need, t0;
    forever begin
      @(posedge clk);
      if (!rst_n || !dout) continue;
      cur.delete();
      t0 = cyc;
      need = 3;
      while (cur.size() < need) begin
        sh = '0;
        for (int b = 0; b < 8; b++) begin
          if (b > 0 || cur.size() > 0) @(posedge clk);
          sh = {sh[6:0], dout};
        end
        cur.push_back(sh);
        if (cur.size() == 3) begin
          nb = cur[1] & 8'h3F;
          case (cur[2])
            PKT_RAW: need = 4 + 2 * nb;
            PKT_CMP: need = 3 + 5 * nb;
            default: need = 6;
          endcase
        end
      end
      // 16 Mbit/s: one bit per clock, bytes back to back
      if (cyc - t0 + 1 != 8 * cur.size()) bad_timing++;
      foreach (cur[i]) pk.push_back(cur[i]);
      npk++;
    end
  end

  logic [16:0] wq [$];         // {addr, data} of coefficient writes
  always @(posedge clk) if (rst_n && w_we) begin wes++; wq.push_back({w_addr, w_data}); end

  // a frame on din is 33 bits of 8 clocks (2 Mbit/s at 16 MHz); the register
  // must change within the frame plus the 1.5-bit end-of-frame timeout
  task automatic write_timed(input logic [7:0] a, input logic [15:0] d, output int took);
    int t;
    t = cyc;
    fork
      send(OP_WRITE, a, d);
      begin
        wait (dut.u_regs.frame_valid);
        took = cyc - t;
      end
    join
  endtask

  task automatic read_reg(input logic [7:0] a, output logic [15:0] v, output bit got);
    int n0;
    n0 = npk;
    pk.delete();
    send(OP_READ, a, 16'd0);
    for (int w = 0; w < 200 && npk == n0; w++) @(negedge clk);
    got = (npk == n0 + 1 && pk.size() == 6 && pk[2] == PKT_REG && pk[3] == a);
    v = got ? {pk[4], pk[5]} : 16'hxxxx;
    pk.delete();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raw = '0; spk = '0;
    repeat (3) @(posedge clk);
    rst_n_pad = 1;
    repeat (5) @(posedge clk);
    check(rst_n === 1, "reset released");
    send(OP_WRITE, REG_ASIC, 16'd1);
    send(OP_WRITE, REG_CTRL, 16'b001);           // raw mode, run
    send(OP_WRITE, REG_THR1, 16'd99);
    check(cfg.asic_addr === 1 && cfg.compressed === 0 && cfg.run === 1 && cfg.thr1 === 99, "register writes");
    send(OP_WRITE, REG_WEIGHT0 + 8'd5, 16'h1AB);
    check(wes === 1, "coefficient write forwarded");
    send(OP_READ, REG_PERIOD, 16'd0);
    repeat (100) @(negedge clk);
    check(npk === 1, "register packet received");
    if (pk.size() >= 6)
      check(pk[0] === PKT_SOF && pk[1] === {2'd1, 6'd1} && pk[2] === PKT_REG && pk[3] === REG_PERIOD
            && pk[4] == 8'h03 && pk[5] == 8'h20, "register packet contents");
    pk.delete();

    // every register: write a random value, check the configuration and read it back
    begin
      static logic [7:0] regs [11] = '{REG_CTRL, REG_THR1, REG_THR2, REG_PRE_N, REG_POST_M, REG_PERIOD,
                                REG_ASIC, REG_PIXEN0, REG_PIXEN0 + 8'd1, REG_PIXEN0 + 8'd2, REG_PIXEN0 + 8'd3};
      static logic [15:0] mask [11] = '{16'h7, 16'hFF, 16'hFF, 16'h1F, 16'h1F, 16'hFFFF,
                                 16'h3, 16'hFFFF, 16'hFFFF, 16'hFFFF, 16'h1};
      logic [15:0] val, rb;
      bit got;
      int took;
      for (int rep = 0; rep < 3; rep++)
        for (int r = 0; r < 11; r++) begin
          val = 16'($urandom);
          write_timed(regs[r], val, took);
          check(took >= 33 * 8 && took <= 33 * 8 + 12 + 4, $sformatf("command accepted after %0d clocks", took));
          case (r)
            0: check({cfg.compressed, cfg.event_mode, cfg.run} === val[2:0], "CTRL field");
            1: check(cfg.thr1 === val[7:0], "THR1 field");
            2: check(cfg.thr2 === val[7:0], "THR2 field");
            3: check(cfg.pre_n === val[4:0], "PRE_N field");
            4: check(cfg.post_m === val[4:0], "POST_M field");
            5: check(cfg.period === val, "PERIOD field");
            6: check(cfg.asic_addr === val[1:0], "ASIC field");
            7: check(cfg.pix_en[15:0] === val, "PIXEN0 field");
            8: check(cfg.pix_en[31:16] === val, "PIXEN1 field");
            9: check(cfg.pix_en[47:32] === val, "PIXEN2 field");
            default: check(cfg.pix_en[48] === val[0], "PIXEN3 field");
          endcase
          read_reg(regs[r], rb, got);
          check(got, $sformatf("read-back packet of register %h", regs[r]));
          check(rb === (val & mask[r]), $sformatf("register %h read %h wrote %h", regs[r], rb, val));
        end
      // all 88 coefficients
      wq.delete();
      for (int i = 0; i < NPC * NSAMP; i++) begin
        val = 16'($urandom);
        send(OP_WRITE, REG_WEIGHT0 + 8'(i), val);
        check(wq.size() === 1 && wq[0] === {8'(i), val[8:0]}, $sformatf("coefficient %0d forwarded", i));
        wq.delete();
      end
      read_reg(REG_WEIGHT0, rb, got);
      check(got && rb === 16'd0, "coefficients are write only");
      send(OP_WRITE, REG_ASIC, 16'd1);
      send(OP_WRITE, REG_CTRL, 16'b001);
    end

    npk_base = npk;
    // close a period so the raw mode is taken, then send raw samples
    @(negedge clk) frame_end = 1; @(negedge clk) frame_end = 0;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk) raw.valid = 1; raw.addr = 6'(10 + i); raw.amp = 8'(50 + i);
    end
    @(negedge clk) raw.valid = 0;
    @(negedge clk) frame_end = 1; @(negedge clk) frame_end = 0;
    repeat (300) @(negedge clk);
    check(npk - npk_base === 1, "raw packet received");
    if (pk.size() >= 14) begin
      check(pk[0] === PKT_SOF && pk[1] === {2'd1, 6'd5} && pk[2] === PKT_RAW, "raw header");
      check(pk[3] === 8'd1, $sformatf("raw timestamp %0d", pk[3]));
      for (int i = 0; i < 5; i++)
        check(pk[4 + 2*i] === 8'(10 + i) && pk[5 + 2*i] === 8'(50 + i), "raw entry");
    end
    pk.delete();

    // overflow: 120 samples in one period
    for (int i = 0; i < 120; i++) begin
      @(negedge clk) raw.valid = 1; raw.addr = 6'(i % 49); raw.amp = 8'(i);
    end
    @(negedge clk) raw.valid = 0;
    @(negedge clk) frame_end = 1; @(negedge clk) frame_end = 0;
    repeat (2000) @(negedge clk);
    pk.delete();
    send(OP_READ, REG_STATUS, 16'd0);
    repeat (100) @(negedge clk);
    check(pk.size() === 6 && pk[5] === 8'h01, "sticky overflow read back");
    pk.delete();

    // compressed mode: a spike
    send(OP_WRITE, REG_CTRL, 16'b101);
    @(negedge clk) frame_end = 1; @(negedge clk) frame_end = 0;
    @(negedge clk) spk.valid = 1; spk.addr = 6'd7; spk.pc = 24'hABCDEF;
    @(negedge clk) spk.valid = 0;
    @(negedge clk) frame_end = 1; @(negedge clk) frame_end = 0;
    repeat (200) @(negedge clk);
    check(pk.size() === 8, $sformatf("compressed packet size %0d", pk.size()));
    if (pk.size() == 8)
      check(pk[2] === PKT_CMP && pk[4] === 8'd7 && pk[5] === 8'hAB && pk[6] === 8'hCD && pk[7] === 8'hEF,
            "compressed packet contents");
    check(bad_timing === 0 && npk > 40, $sformatf("%0d packets, %0d not sent at one bit per clock", npk, bad_timing));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
