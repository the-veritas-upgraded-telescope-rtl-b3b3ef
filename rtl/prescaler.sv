// prescaler: passes one trigger out of every N.
//
// The telescope trigger can be pre-scaled, for instance to take single-
// telescope runs for cosmic-ray muons without flooding the data acquisition.
// Each one-cycle pulse on evt is counted; the N-th pulse is passed to pass and
// the count restarts. N = 0 or 1 passes every pulse.
// Timing: combinational, pass is high in the same cycle as the accepted evt.
// The existence of a programmable pre-scaling factor follows the published
// description; where it sits (on the L2 output) and its counting rule are this
// design's choice.
module prescaler #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] factor,
  input  logic         evt,
  output logic         pass
);
  logic [W-1:0] cnt;  // events seen since the last one passed

  assign pass = evt && (factor <= W'(1) || cnt == factor - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cnt <= '0;
    else if (evt)  cnt <= pass ? '0 : cnt + 1'b1;
  end
endmodule
