// Workload testbench: a compressed recording in the conditions of the paper's
// evaluation, on the full-size chip. The evaluation injects a synthetic recording
// (cells convolved with spike templates, 10 uV noise) into all electrodes and
// reports a mean spike rate of 20 Hz and a compression ratio of 328 against the
// raw signal. This bench generates an equivalent stimulus itself: three spike
// templates (22 samples each, in ramp codes) scaled by a random amplitude,
// placed on every channel as a Bernoulli process of 20 spikes/s per channel
// (probability 1/1000 per 50 us period), on a noisy baseline that now and then
// crosses threshold 1 without a spike (those events must be discarded).
// Overlapping spikes on different channels are frequent at the ramp level
// (several channels at one code), so collisions are part of the load.
//
// It runs 4000 sampling periods (0.2 s of recording) in compressed,
// event-driven mode and checks:
//   - every spike predicted by the reference model arrives with its timestamp
//     and components, none is lost (the link and FIFO keep up);
//   - the payload compression ratio, raw bits (49 x 8 bit x periods) over
//     transmitted component bits (24 per spike), is within 250..450 (the
//     expected value at 20 Hz is 20 000 x 8 / (20 x 24) = 333);
//   - the ratio including all packet bytes stays above 100;
//   - the overflow flag stays clear.
// It then runs 1000 periods of the calibration mode (raw samples, detection on):
// exactly the samples the detection model digitizes must arrive, each channel's
// in order and with the level it had in that period.
module tb_workload_compressed;
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
    repeat (6000000) @(posedge clk);
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
      if (raw_phase) exp_raw[ch].push_back(c);
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

  longint out_bytes = 0;
  int exp_raw [NCH][$];              // levels the model digitized, per channel, in order
  bit raw_phase = 0;
  task automatic handle_packet(input byte unsigned b [$]);
    int n;
    out_bytes += b.size();
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
          if (ch >= NCH || exp_raw[ch].size() == 0) check(0, $sformatf("unexpected raw sample ch %0d", ch));
          else begin
            check(b[5 + 2*s] === 8'(exp_raw[ch][0]),
                  $sformatf("raw sample ch %0d code %0d expected %0d", ch, b[5 + 2*s], exp_raw[ch][0]));
            void'(exp_raw[ch].pop_front());
          end
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
  int wave [NCH][$];
  int tmpl [3][22] = '{
    '{160, 195, 230, 215, 185, 160, 145, 130, 118, 108, 104, 107, 112, 117, 121, 124, 126, 127, 128, 128, 128, 128},
    '{150, 175, 200, 210, 200, 180, 160, 142, 128, 118, 112, 110, 112, 116, 120, 123, 125, 126, 127, 127, 127, 127},
    '{165, 210, 250, 240, 200, 150, 120, 100,  95,  98, 105, 112, 118, 122, 125, 126, 127, 127, 127, 127, 127, 127}};
  int n_inj_spikes = 0, n_inj_noise = 0;

  function automatic int baseline();
    return $urandom_range(108, 132);
  endfunction

  initial begin
    int period_no, nper;
    real ratio_payload, ratio_total;
    nper = 4000;
    for (int i = 0; i < NCH; i++) vin[i] = 9'(baseline());
    for (int c = 0; c < NCH; c++) begin
      m_state[c] = 0; m_idx[c] = 0;
      for (int p = 0; p < NPC; p++) m_sum[c][p] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    for (int p = 0; p < NPC; p++)
      for (int i = 0; i < NSAMP; i++) begin
        wt[p][i] = $urandom_range(0, 511) - 256;
        send(OP_WRITE, 8'(REG_WEIGHT0 + p * NSAMP + i), 16'(wt[p][i]));
      end
    send(OP_WRITE, REG_THR1, 16'(THR1));
    send(OP_WRITE, REG_THR2, 16'(THR2));
    send(OP_WRITE, REG_CTRL, 16'b111);
    @(posedge dut.frame_end);
    @(negedge clk);
    out_bytes = 0;
    period_no = 1;                      // the timestamp counts periods since run
    for (int k = 0; k < nper; k++) begin
      @(posedge dut.frame_end);
      @(negedge clk);
      model_period(period_no);
      period_no++;
      for (int c = 0; c < NCH; c++) if (wave[c].size() == 0) begin
        if ($urandom_range(0, 999) == 0) begin
          int t, a;
          t = $urandom_range(0, 2);
          a = $urandom_range(80, 110);                  // amplitude in percent
          foreach (tmpl[t][j]) wave[c].push_back(128 + ((tmpl[t][j] - 128) * a) / 100 + $urandom_range(0, 3));
          n_inj_spikes++;
        end else if ($urandom_range(0, 499) == 0) begin
          wave[c].push_back(THR1 + $urandom_range(1, 10));   // noise crossing, no spike
          n_inj_noise++;
        end
      end
      for (int c = 0; c < NCH; c++)
        vin[c] = 9'((wave[c].size() != 0) ? wave[c].pop_front() : baseline());
    end
    for (int c = 0; c < NCH; c++) wave[c].delete();
    for (int k = 0; k < 30; k++) begin
      @(posedge dut.frame_end);
      @(negedge clk);
      model_period(period_no);
      period_no++;
      for (int c = 0; c < NCH; c++) vin[c] = 9'(baseline());
    end
    repeat (2000) @(negedge clk);
    for (int c = 0; c < NCH; c++)
      check(exp_spk[c].size() == 0, $sformatf("ch %0d: %0d spikes not received", c, exp_spk[c].size()));
    check(n_rx_spikes === n_model_spikes, $sformatf("spikes received %0d, model %0d", n_rx_spikes, n_model_spikes));
    check(n_discard === n_model_drops, $sformatf("discards %0d, model %0d", n_discard, n_model_drops));
    check(n_overflow === 0, "no output overflow");
    ratio_payload = real'(NCH) * 8.0 * real'(period_no - 1) / (24.0 * real'(n_rx_spikes));
    ratio_total   = real'(NCH) * 8.0 * real'(period_no - 1) / (8.0 * real'(out_bytes));
    $display("periods %0d spikes injected %0d received %0d, noise events %0d discarded %0d, ramp pause cycles %0d",
             period_no, n_inj_spikes, n_rx_spikes, n_inj_noise, n_discard, n_pause);
    $display("output %0d bytes; compression ratio %0.1f (components only), %0.1f (whole packets)",
             out_bytes, ratio_payload, ratio_total);
    check(n_rx_spikes > 100, "enough spikes for a ratio");
    check(ratio_payload > 250.0 && ratio_payload < 450.0, "payload compression ratio near 333");
    check(ratio_total > 100.0, "compression ratio with packet overhead above 100");
    check(n_pause > 0, "collisions happened");

    // ---------- calibration run: raw samples with detection on ----------
    begin
      int adc0, raw0, spk_inj0, nraw;
      send(OP_WRITE, REG_CTRL, 16'b011);      // run, event-driven, raw output
      for (int k = 0; k < 3; k++) begin
        @(posedge dut.frame_end);
        @(negedge clk);
        model_period(period_no);
        period_no++;
      end
      adc0 = n_model_adc; raw0 = n_raw_samples; spk_inj0 = n_inj_spikes;
      raw_phase = 1;
      for (int k = 0; k < 1000; k++) begin
        @(posedge dut.frame_end);
        @(negedge clk);
        model_period(period_no);
        period_no++;
        for (int c = 0; c < NCH; c++) if (wave[c].size() == 0) begin
          if ($urandom_range(0, 999) == 0) begin
            int t, a;
            t = $urandom_range(0, 2);
            a = $urandom_range(80, 110);
            foreach (tmpl[t][j]) wave[c].push_back(128 + ((tmpl[t][j] - 128) * a) / 100 + $urandom_range(0, 3));
            n_inj_spikes++;
          end else if ($urandom_range(0, 499) == 0) begin
            wave[c].push_back(THR1 + $urandom_range(1, 10));
          end
        end
        for (int c = 0; c < NCH; c++)
          vin[c] = 9'((wave[c].size() != 0) ? wave[c].pop_front() : baseline());
      end
      for (int c = 0; c < NCH; c++) wave[c].delete();
      for (int k = 0; k < 30; k++) begin
        @(posedge dut.frame_end);
        @(negedge clk);
        model_period(period_no);
        period_no++;
        for (int c = 0; c < NCH; c++) vin[c] = 9'(baseline());
      end
      repeat (2000) @(negedge clk);
      nraw = n_raw_samples - raw0;
      $display("calibration run: %0d spikes injected, %0d raw samples received, model %0d",
               n_inj_spikes - spk_inj0, nraw, n_model_adc - adc0);
      check(nraw === n_model_adc - adc0, "raw samples: exactly the detected ones");
      for (int c = 0; c < NCH; c++)
        check(exp_raw[c].size() === 0, $sformatf("ch %0d: %0d raw samples missing", c, exp_raw[c].size()));
      check(nraw > 22 * 20, "calibration run carried spikes");
      check(n_overflow === 0, "no output overflow in the calibration run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
