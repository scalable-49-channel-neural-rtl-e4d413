// Channel memory of the spike compressor.
//
// One 51-bit context word per channel: detection state (2 bits), sample index
// (5 bits) and the four 11-bit PCA running sums, as the paper sizes them. Because
// every channel keeps its own context, samples of simultaneously spiking channels
// may arrive interleaved in any order. Reset puts every channel in Standby with
// zero sums (this design's choice; implemented as a register array).
//
// Timing: combinational read, write on the clock edge, so a read-modify-write of
// one sample takes one cycle.
module channel_memory
  import nr_pkg::*;
#(
  parameter int unsigned N = NCH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] raddr,
  output ch_ctx_t           rdata,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  ch_ctx_t           wdata
);
  ch_ctx_t mem [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) mem[i] <= '{state: CH_STANDBY, default: '0};
    end else if (we && 32'(waddr) < N) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (32'(raddr) < N) ? mem[raddr] : '{state: CH_STANDBY, default: '0};
endmodule
