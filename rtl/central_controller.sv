// Central controller: reset, command input, configuration, data output.
//
// The reset pad goes through the reset synchronizer, and the synchronized reset
// (rst_n) is handed to the rest of the chip. Command frames arrive Manchester
// coded at 2 Mbit/s (deserializer) and update the register bank, which drives
// the configuration of the ramp ADC, the pixels and the compressor, and writes
// the PCA coefficients. Outbound, the compressed/raw selection picks either the
// ADC's raw samples or the compressor's spikes; the packet builder frames them
// per sampling period with an 8-bit timestamp (count of sampling periods,
// advanced by the ramp generator's frame_end) and the serializer sends them at
// one bit per clock. This grouping follows the paper's block diagram; the
// timestamp counter is this design's.
module central_controller
  import nr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n_pad,      // reset pad, active low
  output logic        rst_n,          // synchronized reset for the whole chip
  input  logic        din,            // inbound line (Manchester)
  output logic        dout,           // outbound line (16 Mbit/s)
  input  logic        frame_end,      // end of a sampling period
  input  adc_sample_t raw,            // raw samples from the ramp ADC
  input  spike_t      spk,            // compressed spikes
  output cfg_t        cfg,
  output logic        w_we,
  output logic [7:0]  w_addr,
  output logic [W_W-1:0] w_data,
  output logic [7:0]  timestamp,
  output logic        overflow_evt
);
  logic        frame_valid;
  logic [31:0] frame;
  logic        rd_valid;
  logic [7:0]  rd_addr;
  logic [15:0] rd_data;
  logic        byte_valid;
  logic [7:0]  byte_data;
  logic        byte_ready;

  reset_synchronizer u_rst (.clk, .rst_n_async(rst_n_pad), .rst_n);

  deserializer u_des (.clk, .rst_n, .din, .frame_valid, .frame);

  register_bank u_regs (
    .clk, .rst_n, .frame_valid, .frame, .overflow_evt, .cfg,
    .w_we, .w_addr, .w_data, .rd_valid, .rd_addr, .rd_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         timestamp <= '0;
    else if (frame_end) timestamp <= timestamp + 1'b1;
  end

  packet_builder u_pkt (
    .clk, .rst_n, .compressed(cfg.compressed), .asic_addr(cfg.asic_addr),
    .timestamp, .frame_end, .raw, .spk, .rd_valid, .rd_addr, .rd_data,
    .byte_valid, .byte_data, .byte_ready, .overflow_evt
  );

  serializer u_ser (.clk, .rst_n, .byte_valid, .byte_data, .byte_ready, .dout);
endmodule
