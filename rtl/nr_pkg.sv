// Shared types and constants of the 49-channel event-driven neural recorder.
//
// The recorder digitizes 49 electrode channels with one shared 8-bit ramp ADC,
// keeps only samples around spikes (dual-threshold detection) and compresses each
// spike to four 6-bit principal components. This package holds the sizes the
// design is built around (taken from the paper where it gives them), the per-channel
// context word of the spike compressor, the configuration record produced by the
// register bank, the record types of the sample and spike streams, and the
// register map of the command interface (the register map is this design's own).
package nr_pkg;

  // Array and converter sizes (paper values).
  localparam int unsigned NCH       = 49;   // electrodes / pixels
  localparam int unsigned ADDR_W    = 6;    // electrode address width
  localparam int unsigned ADC_W     = 8;    // ramp counter / ADC code width
  localparam int unsigned NPC       = 4;    // principal components per spike
  localparam int unsigned NSAMP     = 22;   // PCA coefficients per component (N+M)
  localparam int unsigned W_W       = 9;    // PCA coefficient width
  localparam int unsigned SUM_W     = 11;   // running sum width per component
  localparam int unsigned PC_W      = 6;    // transmitted component width
  localparam int unsigned IDX_W     = 5;    // sample index width
  localparam int unsigned PERIOD_W  = 16;   // sampling-period register width

  // Per-channel state of the spike detection state machine (2 bits).
  typedef enum logic [1:0] {
    CH_STANDBY   = 2'd0,
    CH_ARMED     = 2'd1,
    CH_TRIGGERED = 2'd2
  } ch_state_e;

  // Channel memory word: 2 + 5 + 4*11 = 51 bits.
  typedef struct packed {
    ch_state_e                            state;
    logic [IDX_W-1:0]                     idx;
    logic [NPC-1:0][SUM_W-1:0]            sum;   // two's complement running sums
  } ch_ctx_t;

  // One digitized sample leaving the ramp ADC.
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;
    logic [ADC_W-1:0]  amp;
  } adc_sample_t;

  // One compressed spike leaving the compressor.
  typedef struct packed {
    logic                     valid;
    logic [ADDR_W-1:0]        addr;
    logic [NPC-1:0][PC_W-1:0] pc;    // pc[3] is component 1 (sent first)
  } spike_t;

  // Configuration held by the register bank.
  typedef struct packed {
    logic                run;          // acquisition running
    logic                event_mode;   // 1: event-driven digitization
    logic                compressed;   // 1: transmit compressed spikes, 0: raw samples
    logic [ADC_W-1:0]    thr1;         // primary threshold (ADC code)
    logic [ADC_W-1:0]    thr2;         // secondary threshold (ADC code)
    logic [IDX_W-1:0]    pre_n;        // pretrigger sample quantity N
    logic [IDX_W-1:0]    post_m;       // post-trigger sample quantity M
    logic [PERIOD_W-1:0] period;       // clock cycles per sampling period
    logic [1:0]          asic_addr;    // ASIC address sent in packet headers
    logic [NCH-1:0]      pix_en;       // per-pixel enable
  } cfg_t;

  // Command frame: {op, address, data}.
  localparam logic [7:0] OP_WRITE = 8'h01;
  localparam logic [7:0] OP_READ  = 8'h02;

  // Register map (16-bit registers).
  localparam logic [7:0] REG_CTRL    = 8'h00;  // [0] run [1] event_mode [2] compressed
  localparam logic [7:0] REG_THR1    = 8'h01;
  localparam logic [7:0] REG_THR2    = 8'h02;
  localparam logic [7:0] REG_PRE_N   = 8'h03;
  localparam logic [7:0] REG_POST_M  = 8'h04;
  localparam logic [7:0] REG_PERIOD  = 8'h05;
  localparam logic [7:0] REG_ASIC    = 8'h06;
  localparam logic [7:0] REG_STATUS  = 8'h07;  // [0] sticky overflow, write 1 to clear
  localparam logic [7:0] REG_PIXEN0  = 8'h08;  // 0x08..0x0B: pixel enables, 16 per register
  localparam logic [7:0] REG_WEIGHT0 = 8'h40;  // 0x40 + component*22 + index

  // Packet framing.
  localparam logic [7:0] PKT_SOF  = 8'hA5;
  localparam logic [7:0] PKT_RAW  = 8'h01;
  localparam logic [7:0] PKT_CMP  = 8'h02;
  localparam logic [7:0] PKT_REG  = 8'h03;

endpackage
