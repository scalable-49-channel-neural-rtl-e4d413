// PCA coefficient memory of the spike compressor.
//
// Holds NPC x NSAMP coefficients of W_W bits (4 x 22 x 9 = 792 bits, the paper's
// size), one set shared by all channels. The register bank writes one coefficient
// at a time at address component*NSAMP + index; the compressor reads the NPC
// coefficients of one sample index per cycle (the paper's "Weight memory 1..N"
// feeding a multiplexer). Coefficients are two's complement (this design's
// choice); an index past NSAMP reads as zero. Reset clears all coefficients.
//
// Timing: combinational read, write on the clock edge.
module pca_weight_memory
  import nr_pkg::*;
#(
  parameter int unsigned P  = NPC,
  parameter int unsigned S  = NSAMP,
  parameter int unsigned WB = W_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [7:0]              waddr,   // component*S + index
  input  logic [WB-1:0]           wdata,
  input  logic [IDX_W-1:0]        ridx,
  output logic [P-1:0][WB-1:0]    rdata    // rdata[p]: coefficient of component p
);
  logic [P*S-1:0][WB-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      mem <= '0;
    else if (we && waddr < 8'(P*S))  mem[waddr] <= wdata;
  end

  always_comb begin
    for (int unsigned p = 0; p < P; p++) begin
      rdata[p] = (32'(ridx) < S) ? mem[p*S + 32'(ridx)] : '0;
    end
  end
endmodule
