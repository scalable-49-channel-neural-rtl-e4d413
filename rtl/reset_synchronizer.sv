// Reset synchronizer of the central controller.
//
// The reset pad is asserted asynchronously and released synchronously, after
// STAGES rising clock edges, so that no flip-flop of the chip leaves reset on a
// different clock edge from the others. The paper only names this block; the
// two-flop structure is this design's choice.
//
// Interface: rst_n_async (pad, active low) in, rst_n (active low) out.
// Timing: rst_n falls with rst_n_async, rises on the STAGES-th clock edge after
// rst_n_async rises.
module reset_synchronizer #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n_async,
  output logic rst_n
);
  logic [STAGES-1:0] chain;

  always_ff @(posedge clk or negedge rst_n_async) begin
    if (!rst_n_async) chain <= '0;
    else              chain <= {chain[STAGES-2:0], 1'b1};
  end

  assign rst_n = chain[STAGES-1];
endmodule
