// Configuration register bank of the central controller.
//
// Decodes command frames {op, addr, data} from the deserializer. A write
// (op 0x01) updates a 16-bit register; a read (op 0x02) requests a read-back
// packet carrying the register's value. The registers are the ones the paper
// lists (pixel enables, primary and secondary thresholds, sampling period,
// compression weights, pretrigger quantity N) plus the post-trigger quantity M,
// the run / event-mode / compressed-mode control bits, the ASIC address sent in
// packet headers and a sticky FIFO-overflow status bit. The register map,
// op codes and reset values are this design's; N=3 and M=19 reset to the values
// the paper uses, the period to 800 cycles (20 kHz at 16 MHz).
//
// Map: 0x00 CTRL {compressed, event_mode, run}; 0x01 THR1; 0x02 THR2;
// 0x03 PRE_N; 0x04 POST_M; 0x05 PERIOD; 0x06 ASIC address; 0x07 STATUS
// (bit 0 overflow, write 1 to clear); 0x08-0x0B pixel enables, 16 per register;
// 0x40 + component*22 + index: PCA coefficient (write only, passed to the
// coefficient memory of the compressor; reads return 0).
//
// Timing: registers update on the cycle after frame_valid; rd_valid pulses then.
module register_bank
  import nr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_valid,
  input  logic [31:0] frame,
  input  logic        overflow_evt,     // packet FIFO dropped an entry
  output cfg_t        cfg,
  output logic        w_we,             // PCA coefficient write
  output logic [7:0]  w_addr,
  output logic [W_W-1:0] w_data,
  output logic        rd_valid,         // read-back request
  output logic [7:0]  rd_addr,
  output logic [15:0] rd_data
);
  logic [7:0]  op;
  logic [7:0]  addr;
  logic [15:0] data;
  logic        overflow;
  logic [63:0] pix_en_w;
  logic [15:0] rdval;

  assign op   = frame[31:24];
  assign addr = frame[23:16];
  assign data = frame[15:0];

  assign pix_en_w = 64'(cfg.pix_en);

  always_comb begin
    unique case (addr)
      REG_CTRL:        rdval = {13'd0, cfg.compressed, cfg.event_mode, cfg.run};
      REG_THR1:        rdval = 16'(cfg.thr1);
      REG_THR2:        rdval = 16'(cfg.thr2);
      REG_PRE_N:       rdval = 16'(cfg.pre_n);
      REG_POST_M:      rdval = 16'(cfg.post_m);
      REG_PERIOD:      rdval = cfg.period;
      REG_ASIC:        rdval = 16'(cfg.asic_addr);
      REG_STATUS:      rdval = {15'd0, overflow};
      REG_PIXEN0:      rdval = pix_en_w[15:0];
      REG_PIXEN0 + 1:  rdval = pix_en_w[31:16];
      REG_PIXEN0 + 2:  rdval = pix_en_w[47:32];
      REG_PIXEN0 + 3:  rdval = pix_en_w[63:48];
      default:         rdval = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.run        <= 1'b0;
      cfg.event_mode <= 1'b1;
      cfg.compressed <= 1'b1;
      cfg.thr1       <= 8'd140;
      cfg.thr2       <= 8'd170;
      cfg.pre_n      <= 5'd3;
      cfg.post_m     <= 5'd19;
      cfg.period     <= 16'd800;
      cfg.asic_addr  <= 2'd0;
      cfg.pix_en     <= '1;
      overflow       <= 1'b0;
      w_we           <= 1'b0;
      w_addr         <= '0;
      w_data         <= '0;
      rd_valid       <= 1'b0;
      rd_addr        <= '0;
      rd_data        <= '0;
    end else begin
      w_we     <= 1'b0;
      rd_valid <= 1'b0;
      if (overflow_evt) overflow <= 1'b1;
      if (frame_valid && op == OP_WRITE) begin
        unique case (addr)
          REG_CTRL:       {cfg.compressed, cfg.event_mode, cfg.run} <= data[2:0];
          REG_THR1:       cfg.thr1      <= data[ADC_W-1:0];
          REG_THR2:       cfg.thr2      <= data[ADC_W-1:0];
          REG_PRE_N:      cfg.pre_n     <= data[IDX_W-1:0];
          REG_POST_M:     cfg.post_m    <= data[IDX_W-1:0];
          REG_PERIOD:     cfg.period    <= data;
          REG_ASIC:       cfg.asic_addr <= data[1:0];
          REG_STATUS:     if (data[0]) overflow <= 1'b0;
          REG_PIXEN0:     cfg.pix_en[15:0]  <= data;
          REG_PIXEN0 + 1: cfg.pix_en[31:16] <= data;
          REG_PIXEN0 + 2: cfg.pix_en[47:32] <= data;
          REG_PIXEN0 + 3: cfg.pix_en[NCH-1:48] <= data[NCH-49:0];
          default: begin
            if (addr >= REG_WEIGHT0 && addr < REG_WEIGHT0 + 8'(NPC * NSAMP)) begin
              w_we   <= 1'b1;
              w_addr <= addr - REG_WEIGHT0;
              w_data <= data[W_W-1:0];
            end
          end
        endcase
      end
      if (frame_valid && op == OP_READ) begin
        rd_valid <= 1'b1;
        rd_addr  <= addr;
        rd_data  <= rdval;
      end
    end
  end
endmodule
