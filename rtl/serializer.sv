// Outbound serializer: one bit per clock, 16 Mbit/s at the 16 MHz system clock.
//
// Takes bytes from the packet builder through a valid/ready handshake and shifts
// them out most significant bit first, back to back, with no gap between bytes
// of a packet. The line is low when there is nothing to send. The paper gives
// the 16 Mbit/s rate; bit order and NRZ signalling are this design's choices.
//
// Timing: a byte accepted at cycle t is on dout during cycles t+1 .. t+8;
// byte_ready is high when idle and in the last bit of a byte.
module serializer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  output logic       byte_ready,
  output logic       dout
);
  logic [7:0] shreg;
  logic [2:0] bitcnt;
  logic       busy;

  assign byte_ready = !busy || (bitcnt == 3'd7);
  assign dout       = busy && shreg[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      bitcnt <= '0;
      busy   <= 1'b0;
    end else if (byte_valid && byte_ready) begin
      shreg  <= byte_data;
      bitcnt <= '0;
      busy   <= 1'b1;
    end else if (busy) begin
      shreg  <= {shreg[6:0], 1'b0};
      bitcnt <= bitcnt + 1'b1;
      if (bitcnt == 3'd7) busy <= 1'b0;
    end
  end
endmodule
