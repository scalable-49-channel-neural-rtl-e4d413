// Digital top of the 49-channel event-driven neural recorder.
//
// Each of the NCH pixels has an analog front-end (amplifier, sample-and-hold,
// comparator against the shared ramp) outside this RTL: its comparator output
// enters on pix_cmp, its enable and the sample-and-hold control leave on
// afe_enable and sh_sample, and the ramp DAC is driven through ramp_therm and
// ramp_dac_rst. Inside, every pixel has a digital front-end that decides,
// against the primary threshold, whether its ramp crossing is digitized; the
// shared ramp ADC resolves the requests (lowest address first, ramp paused on
// collisions) into (address, code) samples; the spike compressor tracks each
// channel through Standby / Armed / Triggered, accumulates four principal
// components per spike and clears the pixel's trigger; the central controller
// takes configuration commands on din and sends raw samples or compressed spikes
// on dout. The partition follows the paper's block diagram.
//
// Clock: one 16 MHz clock (ramp step, compressor, 16 Mbit/s output, 8x
// oversampling of the 2 Mbit/s input).
//
// Lint notes. timestamp, overflow_evt, triggered, ramp_paused and discarded are
// internal nets with no load at this level; they name the events (period count,
// output overflow, triggered pixels, ramp pauses, discarded events) so that they
// can be observed in simulation. The cfg fields compressed and asic_addr are
// used inside the central controller only, so they have no load here either. ramp_therm[0] is constant 1:
// the DAC's first unary cell is on for every code including 0 (code k turns on
// cells 0..k), and off only through ramp_dac_rst.
module neural_recorder_top
  import nr_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,          // reset pad, active low
  input  logic                din,            // Data in (Manchester, 2 Mbit/s)
  output logic                dout,           // Data out (16 Mbit/s)
  input  logic [NCH-1:0]      pix_cmp,        // comparator outputs of the pixels
  output logic [NCH-1:0]      afe_enable,     // pixel enables to the front-ends
  output logic                sh_sample,      // sample-and-hold tracks while high
  output logic [2**ADC_W-1:0] ramp_therm,     // unary code to the ramp DAC
  output logic                ramp_dac_rst    // ramp DAC reset switch
);
  logic        srst_n;
  cfg_t        cfg;
  logic        w_we;
  logic [7:0]  w_addr;
  logic [W_W-1:0] w_data;
  logic [7:0]  timestamp;
  logic        overflow_evt;

  logic [NCH-1:0] sample;
  logic [NCH-1:0] clear;
  logic [NCH-1:0] clear_trigger;
  logic [NCH-1:0] triggered;
  logic           ramp_start;
  logic           threshold;
  logic           frame_end;
  logic           ramp_paused;
  adc_sample_t    adc;
  spike_t         spk;
  logic           clr_valid;
  logic [ADDR_W-1:0] clr_addr;
  logic           discarded;

  central_controller u_ctrl (
    .clk, .rst_n_pad(rst_n), .rst_n(srst_n), .din, .dout, .frame_end,
    .raw(adc), .spk, .cfg, .w_we, .w_addr, .w_data, .timestamp, .overflow_evt
  );

  for (genvar i = 0; i < NCH; i++) begin : g_pix
    assign clear_trigger[i] = clr_valid && (clr_addr == ADDR_W'(i));
    digital_front_end u_dfe (
      .clk, .rst_n(srst_n), .cmp(pix_cmp[i]), .enable(cfg.pix_en[i]),
      .event_mode(cfg.event_mode), .ramp_start, .threshold,
      .clear(clear[i]), .clear_trigger(clear_trigger[i]),
      .sample(sample[i]), .triggered(triggered[i])
    );
  end

  ramp_adc #(.N(NCH)) u_adc (
    .clk, .rst_n(srst_n), .run(cfg.run), .period(cfg.period), .thr1(cfg.thr1),
    .sample, .clear, .therm(ramp_therm), .dac_rst(ramp_dac_rst), .sh_sample,
    .ramp_start, .threshold, .frame_end, .ramp_paused, .out(adc)
  );

  spike_compressor #(.N(NCH)) u_cmp (
    .clk, .rst_n(srst_n), .in(adc), .thr1(cfg.thr1), .thr2(cfg.thr2),
    .pre_n(cfg.pre_n), .post_m(cfg.post_m),
    .w_we, .w_addr, .w_data, .clr_valid, .clr_addr, .spike(spk), .discarded
  );

  assign afe_enable = cfg.pix_en;
endmodule
