// Comparator synchronizer of one pixel ("Synchro").
//
// The in-pixel comparator trips whenever the shared ramp passes the held
// amplifier output, with no relation to the clock. This block passes that level
// through STAGES flip-flops before the pixel state machine uses it. The paper
// names the block; the two-flop chain is this design's choice.
//
// Interface: d (asynchronous) in, q out. Timing: q(t) = d(t - STAGES cycles).
module synchro #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic [STAGES-1:0] chain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain <= '0;
    else        chain <= {chain[STAGES-2:0], d};
  end

  assign q = chain[STAGES-1];
endmodule
