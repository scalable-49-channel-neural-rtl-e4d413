// Spike detection and PCA compression unit.
//
// Digitized samples of all channels arrive interleaved, at most one per clock.
// For each sample the unit reads the channel's context from the channel memory
// (state, sample index i, four running sums), reads the four PCA coefficients of
// index i from the weight memory, multiplies the sample by each coefficient and
// adds the products to the running sums, then decides from the state:
//
//   Standby   : a sample above threshold 1 starts a spike (index 0 is
//               accumulated) and moves the channel to Armed, or straight to
//               Triggered when it is already above threshold 2.
//   Armed     : a sample above threshold 2 moves to Triggered. If N samples have
//               been taken without that, the spike is discarded: sums cleared,
//               channel back to Standby, Clear trigger sent to the pixel.
//   Triggered : accumulation goes on until index N+M (22 with the paper's N=3,
//               M=19, one coefficient per index); then the four sums, cut to
//               their 6 most significant bits, leave as a compressed spike,
//               Clear trigger is sent and the channel returns to Standby.
//
// Follows the paper: the three states and their transitions, the per-channel
// context sizes (2 + 5 + 4 x 11 bits), 4 x 22 x 9-bit coefficients, 6-bit
// outputs, one sample per clock, both thresholds tested as strictly above, as the
// state diagram prints them (one sentence of the text says "meets or exceeds"
// for threshold 2). This design's choices: the count that ends
// Triggered is the total index N+M (the context holds one index only), the first
// sample is accumulated, unsigned samples times signed coefficients shifted right
// by PROD_SHIFT into a saturating 11-bit sum, and an index limit of NSAMP.
//
// Timing: a sample at cycle t updates the context at the edge ending t; the
// compressed spike and the Clear trigger appear at cycle t+1 for one cycle.
module spike_compressor
  import nr_pkg::*;
#(
  parameter int unsigned N          = NCH,
  parameter int unsigned PROD_SHIFT = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  adc_sample_t        in,
  input  logic [ADC_W-1:0]   thr1,
  input  logic [ADC_W-1:0]   thr2,
  input  logic [IDX_W-1:0]   pre_n,
  input  logic [IDX_W-1:0]   post_m,
  // coefficient write port (from the register bank)
  input  logic               w_we,
  input  logic [7:0]         w_addr,
  input  logic [W_W-1:0]     w_data,
  // outputs
  output logic               clr_valid,    // Clear trigger
  output logic [ADDR_W-1:0]  clr_addr,
  output spike_t             spike,
  output logic               discarded     // a started spike was dropped (statistics)
);
  localparam int signed SUM_MAX = 2**(SUM_W-1) - 1;
  localparam int signed SUM_MIN = -(2**(SUM_W-1));

  ch_ctx_t                  ctx;
  ch_ctx_t                  nxt;
  logic [NPC-1:0][W_W-1:0]  coef;
  logic [IDX_W-1:0]         ridx;
  logic                     write;
  logic                     emit;
  logic                     drop;
  logic [5:0]               last_idx;      // N+M, limited to NSAMP
  logic [NPC-1:0][SUM_W-1:0] acc;

  channel_memory #(.N(N)) u_chmem (
    .clk, .rst_n, .raddr(in.addr), .rdata(ctx),
    .we(write), .waddr(in.addr), .wdata(nxt)
  );

  assign ridx = (ctx.state == CH_STANDBY) ? '0 : ctx.idx;

  pca_weight_memory u_wmem (
    .clk, .rst_n, .we(w_we), .waddr(w_addr), .wdata(w_data),
    .ridx, .rdata(coef)
  );

  assign last_idx = (6'(pre_n) + 6'(post_m) > 6'(NSAMP)) ? 6'(NSAMP)
                                                          : 6'(pre_n) + 6'(post_m);

  // Multiply-and-accumulate: base is zero for a new spike.
  always_comb begin
    for (int p = 0; p < NPC; p++) begin
      logic signed [ADC_W+W_W:0]   prod;
      logic signed [SUM_W+1:0]     base;
      logic signed [SUM_W+1:0]     total;
      prod  = $signed({1'b0, in.amp}) * $signed(coef[p]);
      base  = (ctx.state == CH_STANDBY) ? '0 : (SUM_W+2)'($signed(ctx.sum[p]));
      total = base + (SUM_W+2)'(prod >>> PROD_SHIFT);
      if (total > (SUM_W+2)'(SUM_MAX))      acc[p] = SUM_W'(SUM_MAX);
      else if (total < (SUM_W+2)'(SUM_MIN)) acc[p] = SUM_W'(SUM_MIN);
      else                      acc[p] = total[SUM_W-1:0];
    end
  end

  // Next context and actions.
  always_comb begin
    logic [5:0] new_idx;
    nxt     = ctx;
    write   = 1'b0;
    emit    = 1'b0;
    drop    = 1'b0;
    new_idx = 6'(ridx) + 6'd1;
    if (in.valid) begin
      unique case (ctx.state)
        CH_STANDBY: begin
          if (in.amp > thr1) begin
            write     = 1'b1;
            nxt.state = (in.amp > thr2) ? CH_TRIGGERED : CH_ARMED;
            nxt.idx   = IDX_W'(new_idx);
            nxt.sum   = acc;
            if (nxt.state == CH_ARMED && new_idx >= 6'(pre_n)) drop = 1'b1;
            if (nxt.state == CH_TRIGGERED && new_idx >= last_idx) emit = 1'b1;
          end
        end
        CH_ARMED: begin
          write     = 1'b1;
          nxt.idx   = IDX_W'(new_idx);
          nxt.sum   = acc;
          if (in.amp > thr2) begin
            nxt.state = CH_TRIGGERED;
            if (new_idx >= last_idx) emit = 1'b1;
          end else if (new_idx >= 6'(pre_n)) begin
            drop = 1'b1;
          end
        end
        CH_TRIGGERED: begin
          write   = 1'b1;
          nxt.idx = IDX_W'(new_idx);
          nxt.sum = acc;
          if (new_idx >= last_idx) emit = 1'b1;
        end
        default: begin
          write = 1'b1;
          nxt   = '{state: CH_STANDBY, default: '0};
        end
      endcase
      if (emit || drop) nxt = '{state: CH_STANDBY, default: '0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_valid <= 1'b0;
      clr_addr  <= '0;
      spike     <= '0;
      discarded <= 1'b0;
    end else begin
      clr_valid   <= emit || drop;
      discarded   <= drop;
      spike.valid <= emit;
      if (emit || drop) clr_addr <= in.addr;
      if (emit) begin
        spike.addr <= in.addr;
        for (int p = 0; p < NPC; p++) begin
          // component 1 in the most significant field
          spike.pc[NPC-1-p] <= acc[p][SUM_W-1 -: PC_W];
        end
      end
    end
  end
endmodule
