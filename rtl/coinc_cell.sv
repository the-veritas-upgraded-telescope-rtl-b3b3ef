// coinc_cell: 3-fold neighbour coincidence of one trigger cell, with the
// programmable minimum overlap ("detune").
//
// A cell is one pixel (the centre) and its up to six neighbours. The cell
// fires when the centre and at least two of its neighbours carry an L1 signal
// at the same time, and that 3-fold overlap has lasted at least detune+1 ticks.
// detune is the extra overlap demanded beyond the smallest possible one; with
// L1 pulses of fixed width W, raising detune narrows the widest accepted time
// difference between the pulses (the coincidence gate) to about W - detune - 1
// ticks. Missing neighbours (camera edge, other board) are tied to 0.
//
// Timing: trig is registered; it rises detune+1 ticks after the 3-fold overlap
// begins and falls one tick after the overlap ends.
// The centre + two neighbours rule and detune follow the published
// description; the overlap counter that measures the overlap is this design's
// choice (the real logic is asynchronous).
module coinc_cell #(
  parameter int DETUNE_W = l2trig_pkg::DETUNE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                center,
  input  logic [5:0]          nbr,
  input  logic [DETUNE_W-1:0] detune,
  output logic                trig
);
  logic                coinc;
  logic [DETUNE_W-1:0] run;   // ticks for which the overlap has already lasted
  logic [2:0]          nhit;

  always_comb begin
    nhit = '0;
    for (int i = 0; i < 6; i++) nhit += {2'b0, nbr[i]};
    coinc = center && (nhit >= 3'd2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= '0;
      trig <= 1'b0;
    end else begin
      if (!coinc)       run <= '0;
      else if (~&run)   run <= run + 1'b1;
      trig <= coinc && (run >= detune);
    end
  end
endmodule
