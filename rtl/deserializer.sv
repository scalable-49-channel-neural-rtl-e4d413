// Inbound deserializer: Manchester decoder and command framer.
//
// The inbound wire is AC coupled, so data is Manchester coded and carries no DC
// level; it runs at 2 Mbit/s, CLKS_PER_BIT = 8 cycles of the 16 MHz clock per bit
// (both rates from the paper). Coding and framing are this design's: a '1' is a
// low-to-high transition at mid-bit and a '0' high-to-low, the idle line is low,
// a frame is one '1' start bit followed by FRAME_BITS data bits, most significant
// first, and it ends when the line has been quiet for 1.5 bit times.
//
// Decoding: after every mid-bit transition, transitions during the next 3/4 bit
// are bit-boundary transitions and are ignored; the first transition after that
// is the next mid-bit and its new level is the bit value. The line passes through
// a two-flop synchronizer first.
//
// Output: frame_valid pulses for one cycle with `frame` when exactly FRAME_BITS
// bits were received; shorter or longer bursts are dropped. Frame layout used by
// the register bank: {op[7:0], addr[7:0], data[15:0]}.
module deserializer #(
  parameter int unsigned CLKS_PER_BIT = 8,
  parameter int unsigned FRAME_BITS   = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  din,
  output logic                  frame_valid,
  output logic [FRAME_BITS-1:0] frame
);
  localparam int unsigned IGNORE  = (3 * CLKS_PER_BIT) / 4;
  localparam int unsigned TIMEOUT = (3 * CLKS_PER_BIT) / 2;
  localparam int unsigned CW      = $clog2(TIMEOUT + 1);

  logic [1:0]            sync;
  logic                  line_q;
  logic                  edge_det;
  logic                  busy;
  logic [CW-1:0]         since;          // cycles since the last mid-bit transition
  logic [FRAME_BITS-1:0] shreg;
  logic [$clog2(FRAME_BITS+2)-1:0] nbits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync   <= '0;
      line_q <= 1'b0;
    end else begin
      sync   <= {sync[0], din};
      line_q <= sync[1];
    end
  end

  assign edge_det = (sync[1] != line_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      since       <= '0;
      shreg       <= '0;
      nbits       <= '0;
      frame_valid <= 1'b0;
      frame       <= '0;
    end else begin
      frame_valid <= 1'b0;
      if (!busy) begin
        // Start bit: first transition must be low-to-high ('1').
        if (edge_det && sync[1]) begin
          busy  <= 1'b1;
          since <= '0;
          nbits <= '0;
        end
      end else if (edge_det && 32'(since) >= IGNORE) begin
        since <= '0;
        shreg <= {shreg[FRAME_BITS-2:0], sync[1]};
        if (32'(nbits) <= FRAME_BITS) nbits <= nbits + 1'b1;
      end else if (32'(since) >= TIMEOUT) begin
        busy <= 1'b0;
        if (32'(nbits) == FRAME_BITS) begin
          frame_valid <= 1'b1;
          frame       <= shreg;
        end
      end else begin
        since <= since + 1'b1;
      end
    end
  end
endmodule
