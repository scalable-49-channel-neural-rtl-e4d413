// Testbench of packet_builder. Random raw samples or compressed spikes are fed
// for a number of sampling periods, switching mode at period boundaries; the
// expected byte stream (header, timestamp, entries, split at 30 samples or 12
// spikes per packet) is built here and compared byte for byte with the output,
// taken with a randomly stalling ready. Then the entry FIFO is overfilled inside
// one period and the dropped records must equal the overflow pulses, and a
// register read-back must produce its 6-byte packet.
module tb_packet_builder;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, compressed = 0, frame_end = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [1:0] asic_addr = 2'd2;
  logic [7:0] timestamp = 0;
  adc_sample_t raw;
  spike_t spk;
  logic rd_valid = 0;
  logic [7:0] rd_addr = 0;
  logic [15:0] rd_data = 0;
  logic byte_valid, byte_ready, overflow_evt;
  logic [7:0] byte_data;
  int checks = 0, failures = 0, overflows = 0, packets = 0, multi = 0;
  byte unsigned expq [$];
  always #5 clk = ~clk;

  packet_builder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side
  always @(posedge clk) begin
    if (rst_n && byte_valid && byte_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: unexpected byte %h", byte_data); end
      else begin
        byte unsigned e;
        e = expq.pop_front();
        if (byte_data != e) begin failures++; $display("FAIL: byte %h expected %h", byte_data, e); end
        if (e == PKT_SOF) ;
      end
    end
    if (rst_n && overflow_evt) overflows++;
  end
  always @(negedge clk) byte_ready = ($urandom_range(0, 3) != 0);

  // expected packets of one period
  task automatic expect_period(input bit cmp, input logic [7:0] ts,
                               input logic [39:0] ent [$]);
    int n, k, mx;
    mx = cmp ? 12 : 30;
    k = 0;
    if (ent.size() > mx) multi++;
    while (k < ent.size()) begin
      n = (ent.size() - k > mx) ? mx : ent.size() - k;
      packets++;
      expq.push_back(PKT_SOF);
      expq.push_back({asic_addr, 6'(n)});
      expq.push_back(cmp ? PKT_CMP : PKT_RAW);
      if (!cmp) expq.push_back(ts);
      for (int j = 0; j < n; j++) begin
        logic [39:0] e;
        e = ent[k + j];
        if (cmp) begin
          expq.push_back(e[39:32]); expq.push_back(e[31:24]);
          expq.push_back(e[23:16]); expq.push_back(e[15:8]); expq.push_back(e[7:0]);
        end else begin
          expq.push_back(e[31:24]); expq.push_back(e[7:0]);
        end
      end
      k += n;
    end
  endtask

  initial begin
    logic [39:0] ent [$];
    bit mode;
    raw = '0; spk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    mode = 1;                    // reset mode is compressed
    for (int p = 0; p < 40; p++) begin
      int cnt;
      ent.delete();
      cnt = (p % 7 == 3) ? $urandom_range(31, 45) : $urandom_range(0, 14);
      for (int i = 0; i < cnt; i++) begin
        @(negedge clk);
        if (mode) begin
          spk.valid = 1; spk.addr = 6'($urandom_range(0, 48)); spk.pc = 24'($urandom);
          ent.push_back({timestamp, 8'(spk.addr), spk.pc});
        end else begin
          raw.valid = 1; raw.addr = 6'($urandom_range(0, 48)); raw.amp = 8'($urandom);
          ent.push_back({timestamp, 8'(raw.addr), 16'd0, raw.amp});
        end
        @(negedge clk) raw.valid = 0; spk.valid = 0;
        repeat ($urandom_range(0, 20)) @(negedge clk);
      end
      // close the period; the next mode is taken here
      @(negedge clk) frame_end = 1; compressed = $urandom_range(0, 1);
      expect_period(mode, timestamp, ent);
      mode = compressed;
      @(negedge clk) frame_end = 0; timestamp++;
      while (expq.size() > 40) @(negedge clk);
    end
    while (expq.size() > 0) @(negedge clk);
    repeat (20) @(negedge clk);
    check(overflows === 0, "no overflow in normal traffic");
    check(multi > 2, "periods split into several packets");

    // register read-back packet
    @(negedge clk) rd_valid = 1; rd_addr = 8'h05; rd_data = 16'h0320;
    expq.push_back(PKT_SOF); expq.push_back({asic_addr, 6'd1}); expq.push_back(PKT_REG);
    expq.push_back(8'h05); expq.push_back(8'h03); expq.push_back(8'h20);
    @(negedge clk) rd_valid = 0;
    repeat (100) @(negedge clk);
    check(expq.size() === 0, "register packet sent");

    // overflow: 100 raw samples in one period with the output stalled
    force byte_ready = 1'b0;
    @(negedge clk) compressed = 0; frame_end = 1;
    @(negedge clk) frame_end = 0; timestamp++;
    ent.delete();
    for (int i = 0; i < 100; i++) begin
      @(negedge clk) raw.valid = 1; raw.addr = 6'(i % 49); raw.amp = 8'(i);
      if (i < 64) ent.push_back({timestamp, 8'(raw.addr), 16'd0, raw.amp});
    end
    @(negedge clk) raw.valid = 0;
    check(overflows === 36, $sformatf("overflow pulses %0d, expected 36", overflows));
    @(negedge clk) frame_end = 1;
    expect_period(1'b0, timestamp, ent);
    @(negedge clk) frame_end = 0; timestamp++;
    release byte_ready;
    while (expq.size() > 0) @(negedge clk);
    repeat (20) @(negedge clk);
    check(expq.size() === 0, "kept records sent after overflow");
    $display("packets %0d", packets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
