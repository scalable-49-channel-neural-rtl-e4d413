// Testbench of spike_compressor. Samples of all channels are sent interleaved, up
// to one per clock, with amplitudes drawn so that spikes start, get confirmed or
// discarded. A reference model written here keeps each channel's state, index and
// running sums with plain integers (product shifted right by 9, saturation to 11
// bits, output = sum >> 5) and predicts every compressed spike and Clear trigger
// one cycle after the sample. Coefficients are loaded through the write port;
// components 1 and 2 are biased so the sums saturate high and low.
// N and M are changed between runs, including the paper's N=3, M=19.
module tb_spike_compressor;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  adc_sample_t in;
  logic [7:0] thr1, thr2;
  logic [4:0] pre_n, post_m;
  logic w_we;
  logic [7:0] w_addr;
  logic [8:0] w_data;
  logic clr_valid, discarded;
  logic [5:0] clr_addr;
  spike_t spike;
  int checks = 0, failures = 0;
  int n_spikes = 0, n_discards = 0, n_direct = 0, n_sat_hi = 0, n_sat_lo = 0;
  always #5 clk = ~clk;

  spike_compressor dut (.*);

  int wt [NPC][NSAMP];
  int m_state [NCH];      // 0 standby, 1 armed, 2 triggered
  int m_idx [NCH];
  int m_sum [NCH][NPC];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(input int x);
    if (x > 1023) begin n_sat_hi++; return 1023; end
    if (x < -1024) begin n_sat_lo++; return -1024; end
    return x;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; thr1 = 8'd140; thr2 = 8'd180; pre_n = 5'd3; post_m = 5'd19;
    w_we = 0; w_addr = 0; w_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load coefficients
    for (int p = 0; p < NPC; p++)
      for (int i = 0; i < NSAMP; i++) begin
        @(negedge clk);
        // component 1 strongly positive and component 2 strongly negative so the
        // 11-bit sums saturate both ways; components 3 and 4 random
        case (p)
          0: wt[p][i] = $urandom_range(150, 255);
          1: wt[p][i] = -$urandom_range(150, 256);
          default: wt[p][i] = $urandom_range(0, 511) - 256;
        endcase
        w_we = 1; w_addr = 8'(p * NSAMP + i); w_data = 9'(wt[p][i]);
      end
    @(negedge clk) w_we = 0;
    for (int c = 0; c < NCH; c++) begin m_state[c] = 0; m_idx[c] = 0; for (int p = 0; p < NPC; p++) m_sum[c][p] = 0; end

    for (int run = 0; run < 4; run++) begin
      int last;
      case (run)
        0: begin pre_n = 3; post_m = 19; end
        1: begin pre_n = 5; post_m = 10; end
        2: begin pre_n = 1; post_m = 6;  end
        default: begin pre_n = 3; post_m = 19; end
      endcase
      last = (pre_n + post_m > NSAMP) ? NSAMP : pre_n + post_m;
      for (int n = 0; n < 20000; n++) begin
        int ch, amp, base_i, nsum [NPC];
        bit exp_emit, exp_drop, active;
        @(negedge clk);
        in.valid = ($urandom_range(0, 3) != 0);
        ch = $urandom_range(0, 7);                // few channels: long interleaved spikes
        case ($urandom_range(0, 7))
          0, 1:    amp = $urandom_range(181, 255);
          2:       amp = int'(thr2);                 // exactly at threshold 2: does not confirm
          3:       amp = int'(thr1);                 // exactly at threshold 1: does not start
          default: amp = $urandom_range(100, 179);
        endcase
        in.addr = 6'(ch); in.amp = 8'(amp);
        exp_emit = 0; exp_drop = 0;
        if (in.valid) begin
          active = (m_state[ch] != 0) || (amp > thr1);
          if (active) begin
            base_i = (m_state[ch] == 0) ? 0 : m_idx[ch];
            for (int p = 0; p < NPC; p++) begin
              int prod;
              prod = amp * wt[p][base_i];
              nsum[p] = sat(((m_state[ch] == 0) ? 0 : m_sum[ch][p]) + (prod >>> 9));
            end
            if (m_state[ch] == 0) m_state[ch] = (amp > thr2) ? 2 : 1;
            else if (m_state[ch] == 1 && amp > thr2) m_state[ch] = 2;
            if (m_state[ch] == 2 && base_i == 0) n_direct++;
            m_idx[ch] = base_i + 1;
            for (int p = 0; p < NPC; p++) m_sum[ch][p] = nsum[p];
            if (m_state[ch] == 2 && m_idx[ch] >= last) exp_emit = 1;
            else if (m_state[ch] == 1 && m_idx[ch] >= pre_n) exp_drop = 1;
          end
        end
        @(posedge clk); #1;
        check(spike.valid === exp_emit, $sformatf("spike valid ch %0d (n=%0d)", ch, n));
        check(clr_valid === (exp_emit || exp_drop), "clear trigger");
        check(discarded === exp_drop, "discard");
        if (clr_valid) check(clr_addr === 6'(ch), "clear address");
        if (exp_emit) begin
          n_spikes++;
          check(spike.addr === 6'(ch), "spike address");
          for (int p = 0; p < NPC; p++)
            check(spike.pc[NPC-1-p] === 6'(m_sum[ch][p] >>> 5),
                  $sformatf("ch %0d component %0d: %0d expected %0d", ch, p, spike.pc[NPC-1-p], 6'(m_sum[ch][p] >>> 5)));
        end
        if (exp_drop) n_discards++;
        if (exp_emit || exp_drop) begin
          m_state[ch] = 0; m_idx[ch] = 0;
          for (int p = 0; p < NPC; p++) m_sum[ch][p] = 0;
        end
      end
    end
    check(n_spikes > 50 && n_discards > 50 && n_direct > 10,
          $sformatf("coverage: %0d spikes, %0d discards, %0d direct triggers", n_spikes, n_discards, n_direct));
    check(n_sat_hi > 10 && n_sat_lo > 10,
          $sformatf("saturation: %0d high, %0d low", n_sat_hi, n_sat_lo));
    $display("spikes %0d discards %0d saturations %0d / %0d", n_spikes, n_discards, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
