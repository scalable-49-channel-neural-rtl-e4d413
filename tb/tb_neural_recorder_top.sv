// End-to-end testbench of neural_recorder_top at its default (paper) size:
// 49 channels, 8-bit ramp, 800-cycle sampling period, N=3, M=19, 4 x 22 x 9-bit
// coefficients.
//
// Every pixel gets a behavioural analog front-end (afe_model) whose signal is
// given in ramp codes and changed once per sampling period. The chip is
// configured only through its Manchester input (random coefficients, thresholds
// 140 / 170) and observed only through its serial output, which is split into
// packets here. A reference model of the whole chain (primary-threshold gate,
// triggered pixel, Standby / Armed / Triggered, multiply-accumulate with shift 9
// and 11-bit saturation, 6-bit outputs) predicts every compressed spike with its
// timestamp; each received spike must match, and none may be missing.
//
// Phase 1, compressed event-driven mode: baseline noise below threshold 1, small
// events that cross threshold 1 only (discarded), full spikes, and a group of
// channels spiking together with equal amplitudes (ramp collisions).
// Phase 2, raw mode with detection off: every channel is digitized every period;
// raw packets (split at 30 samples) must carry the true codes; the 16 Mbit/s
// link cannot carry 49 samples every 50 us, so the entry FIFO overflows and the
// sticky status bit must read back as 1.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_neural_recorder_top;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, din = 0, dout;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [NCH-1:0] pix_cmp, afe_enable;
  logic sh_sample, ramp_dac_rst;
  logic [255:0] ramp_therm;
  logic [8:0] vin [NCH];
  int checks = 0, failures = 0;
  always #31.25 clk = ~clk;          // 16 MHz

  neural_recorder_top dut (.*);

  for (genvar i = 0; i < NCH; i++) begin : g_afe
    afe_model u_afe (.enable(afe_enable[i]), .vin_code(vin[i]), .sh_sample,
                     .ramp_therm, .ramp_dac_rst, .cmp(pix_cmp[i]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- command link ----------------
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

  // ---------------- reference model ----------------
  localparam int THR1 = 140, THR2 = 170, PRE_N = 3, POST_M = 19;
  int wt [NPC][NSAMP];
  int m_state [NCH], m_idx [NCH], m_sum [NCH][NPC];
  logic [31:0] exp_spk [NCH][$];     // {ts, pc1, pc2, pc3, pc4}
  int n_model_spikes = 0, n_model_drops = 0, n_below_gate = 0, n_below_trig = 0, n_model_adc = 0;

  function automatic int sat(input int x);
    return (x > 1023) ? 1023 : (x < -1024) ? -1024 : x;
  endfunction

  task automatic model_period(input int ts);
    for (int ch = 0; ch < NCH; ch++) begin
      int c, bi;
      c = vin[ch];
      if (c >= 256) continue;
      if (m_state[ch] == 0 && c <= THR1) begin n_below_gate++; continue; end
      if (m_state[ch] != 0 && c <= THR1) n_below_trig++;
      n_model_adc++;
      bi = (m_state[ch] == 0) ? 0 : m_idx[ch];
      for (int p = 0; p < NPC; p++)
        m_sum[ch][p] = sat(((m_state[ch] == 0) ? 0 : m_sum[ch][p]) + ((c * wt[p][bi]) >>> 9));
      if (m_state[ch] == 0) m_state[ch] = (c > THR2) ? 2 : 1;
      else if (m_state[ch] == 1 && c > THR2) m_state[ch] = 2;
      m_idx[ch] = bi + 1;
      if (m_state[ch] == 2 && m_idx[ch] >= PRE_N + POST_M) begin
        exp_spk[ch].push_back({8'(ts), 6'(m_sum[ch][0] >>> 5), 6'(m_sum[ch][1] >>> 5),
                               6'(m_sum[ch][2] >>> 5), 6'(m_sum[ch][3] >>> 5)});
        n_model_spikes++;
        m_state[ch] = 0;
      end else if (m_state[ch] == 1 && m_idx[ch] >= PRE_N) begin
        n_model_drops++;
        m_state[ch] = 0;
      end
    end
  endtask

  // ---------------- output receiver ----------------
  int n_cmp_pkts = 0, n_raw_pkts = 0, n_reg_pkts = 0, n_rx_spikes = 0, n_raw_samples = 0;
  int n_full_raw_pkts = 0;
  logic [15:0] last_reg;
  int raw_per_ts [256];

  task automatic handle_packet(input byte unsigned b [$]);
    int n;
    n = b[1] & 8'h3F;
    check(b[0] === PKT_SOF, "start of frame");
    check((b[1] >> 6) === 2'd0, "ASIC address field");
    case (b[2])
      PKT_CMP: begin
        n_cmp_pkts++;
        check(n >= 1 && n <= 12, "spikes per packet");
        for (int s = 0; s < n; s++) begin
          int ch;
          logic [31:0] got;
          ch = b[3 + 5*s + 1];
          got = {b[3 + 5*s], b[3 + 5*s + 2], b[3 + 5*s + 3], b[3 + 5*s + 4]};
          n_rx_spikes++;
          if (ch >= NCH) begin check(0, "spike address out of range"); continue; end
          if (exp_spk[ch].size() == 0) begin check(0, $sformatf("unexpected spike ch %0d", ch)); continue; end
          check(got === exp_spk[ch][0], $sformatf("spike ch %0d: %h expected %h", ch, got, exp_spk[ch][0]));
          void'(exp_spk[ch].pop_front());
        end
      end
      PKT_RAW: begin
        n_raw_pkts++;
        if (n == 30) n_full_raw_pkts++;
        check(n >= 1 && n <= 30, "samples per packet");
        for (int s = 0; s < n; s++) begin
          int ch;
          ch = b[4 + 2*s];
          n_raw_samples++;
          raw_per_ts[b[3]]++;
          check(ch < NCH && b[5 + 2*s] === 8'(vin[ch]), $sformatf("raw sample ch %0d code %0d", ch, b[5 + 2*s]));
        end
      end
      PKT_REG: begin
        n_reg_pkts++;
        last_reg = {b[4], b[5]};
      end
      default: check(0, "unknown packet type");
    endcase
  endtask

  initial begin
    byte unsigned cur [$];
    logic [7:0] sh;
    int nb, need;
    forever begin
      @(posedge clk);
      if (!dut.srst_n || !dout) continue;
      cur.delete();
      need = 3;
      while (cur.size() < need) begin
        sh = '0;
        for (int k = 0; k < 8; k++) begin
          if (k > 0 || cur.size() > 0) @(posedge clk);
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
      handle_packet(cur);
    end
  end

  // ---------------- mechanism counters (probes) ----------------
  int n_pause = 0, n_discard = 0, n_emit = 0, n_clear_trig = 0, n_overflow = 0, n_adc = 0;
  always @(posedge clk) if (dut.srst_n) begin
    if (dut.ramp_paused) n_pause++;
    if (dut.discarded) n_discard++;
    if (dut.spk.valid) n_emit++;
    if (dut.clr_valid) n_clear_trig++;
    if (dut.overflow_evt) n_overflow++;
    if (dut.adc.valid) n_adc++;
  end

  // ---------------- stimulus ----------------
  // per-channel event waveform (ramp codes), one value per period
  int wave [NCH][$];
  int full_spike [] = '{160, 200, 235, 220, 190, 165, 150, 135, 120, 110, 105, 108,
                        112, 118, 122, 125, 127, 128, 129, 130, 130, 130};
  int small_bump [] = '{150, 160, 155, 150};

  function automatic int baseline();
    return $urandom_range(100, 135);
  endfunction

  initial begin
    int period_no;
    for (int i = 0; i < NCH; i++) vin[i] = 9'(baseline());
    for (int c = 0; c < NCH; c++) begin
      m_state[c] = 0; m_idx[c] = 0;
      for (int p = 0; p < NPC; p++) m_sum[c][p] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);

    // configuration over the Manchester link
    for (int p = 0; p < NPC; p++)
      for (int i = 0; i < NSAMP; i++) begin
        wt[p][i] = $urandom_range(0, 511) - 256;
        send(OP_WRITE, 8'(REG_WEIGHT0 + p * NSAMP + i), 16'(wt[p][i]));
      end
    send(OP_WRITE, REG_THR1, 16'(THR1));
    send(OP_WRITE, REG_THR2, 16'(THR2));
    send(OP_READ, REG_THR2, 16'd0);
    repeat (80) @(negedge clk);
    check(n_reg_pkts === 1 && last_reg === 16'(THR2), "register read-back over the link");
    send(OP_WRITE, REG_CTRL, 16'b111);        // run, event-driven, compressed

    // ---------- phase 1: compressed, event-driven ----------
    period_no = 0;
    for (int k = 0; k < 90; k++) begin
      @(posedge dut.frame_end);
      @(negedge clk);
      model_period(period_no);
      period_no++;
      // schedule events
      if (k == 5 || k == 40) for (int c = 0; c < 10; c++) foreach (full_spike[j]) wave[c].push_back(full_spike[j]);
      for (int c = 10; c < NCH; c++) if (wave[c].size() == 0) begin
        case ($urandom_range(0, 39))
          0: foreach (full_spike[j]) wave[c].push_back(full_spike[j] + $urandom_range(0, 8));
          1: foreach (small_bump[j]) wave[c].push_back(small_bump[j]);
          2: wave[c].push_back(300);       // above the ramp's range: no crossing
          default: ;
        endcase
      end
      for (int c = 0; c < NCH; c++)
        vin[c] = 9'((wave[c].size() != 0) ? wave[c].pop_front() : baseline());
    end
    // let the channels finish with baseline
    for (int c = 0; c < NCH; c++) wave[c].delete();
    for (int k = 0; k < 25; k++) begin
      @(posedge dut.frame_end);
      @(negedge clk);
      model_period(period_no);
      period_no++;
      for (int c = 0; c < NCH; c++) vin[c] = 9'(baseline());
    end
    repeat (2000) @(negedge clk);
    for (int c = 0; c < NCH; c++)
      check(exp_spk[c].size() === 0, $sformatf("ch %0d: %0d spikes not received", c, exp_spk[c].size()));
    check(n_rx_spikes === n_model_spikes, $sformatf("spikes received %0d, model %0d", n_rx_spikes, n_model_spikes));
    check(n_emit === n_model_spikes, "compressor emitted as many spikes as the model");
    check(n_discard === n_model_drops, $sformatf("discards %0d, model %0d", n_discard, n_model_drops));
    // the pixels digitized exactly the samples above threshold 1 or of triggered channels
    check(n_adc === n_model_adc, $sformatf("ADC samples %0d, model %0d", n_adc, n_model_adc));

    // ---------- phase 2: raw mode, detection off ----------
    for (int c = 0; c < NCH; c++) vin[c] = 9'((c % 7 == 0) ? 77 : $urandom_range(0, 255));
    send(OP_WRITE, REG_CTRL, 16'b001);        // run, raw, every ramp digitized
    for (int t = 0; t < 256; t++) raw_per_ts[t] = 0;
    for (int k = 0; k < 40; k++) @(posedge dut.frame_end);
    repeat (3000) @(negedge clk);
    send(OP_READ, REG_STATUS, 16'd0);
    // the reply waits for the data packet being sent; bounded by one period plus
    // one full packet
    for (int w = 0; w < 2000 && n_reg_pkts < 2; w++) @(negedge clk);
    check(last_reg[0] === 1'b1, "overflow flag read back");

    // ---------- mechanism coverage ----------
    $display("spikes %0d discards %0d pauses %0d below-gate %0d below-but-triggered %0d",
             n_model_spikes, n_model_drops, n_pause, n_below_gate, n_below_trig);
    $display("packets: compressed %0d raw %0d (full %0d) register %0d; raw samples %0d; overflow drops %0d",
             n_cmp_pkts, n_raw_pkts, n_full_raw_pkts, n_reg_pkts, n_raw_samples, n_overflow);
    check(n_model_spikes > 10, "compressed spikes happened");
    check(n_model_drops > 5, "unconfirmed events were discarded");
    check(n_pause > 0, "ramp collisions paused the ramp");
    check(n_below_gate > 100, "samples below threshold 1 not digitized");
    check(n_below_trig > 10, "triggered pixels digitized below threshold 1");
    check(n_raw_pkts > 10 && n_full_raw_pkts > 5, "raw packets, split at 30 samples");
    check(n_overflow > 0, "output FIFO overflow");
    check(n_reg_pkts === 2, "register packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
