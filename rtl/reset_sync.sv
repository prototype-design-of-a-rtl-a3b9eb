// reset_sync: the "System reset" generator of one clock domain.
//
// The board reset arrives asynchronously (active low). It clears the
// STAGES-deep shift register at once, so the domain enters reset without
// waiting for a clock edge, and is released only after STAGES rising edges
// of clk, so every flip-flop of the domain leaves reset on the same edge.
// Interface: clk, arst_n (asynchronous, active low) -> rst_n (active low,
// deasserted synchronously). Timing: rst_n rises on the STAGES-th clk edge
// after arst_n rises.
// The firmware diagram shows a system reset fed from the global clock
// buffer; the two-stage synchroniser is this design's own choice.
module reset_sync #(
  parameter int STAGES = 2
) (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) sr <= '0;
    else         sr <= {sr[STAGES-2:0], 1'b1};
  end

  assign rst_n = sr[STAGES-1];

  initial assert (STAGES >= 2) else $error("reset_sync: STAGES must be at least 2");
endmodule
