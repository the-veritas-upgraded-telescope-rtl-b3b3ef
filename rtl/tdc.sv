// tdc: time-to-digital converter measuring the time between two edges.
//
// The L2 board carries two TDCs used by the pixel timing alignment: the
// arrival of a 3-fold coincidence set containing the pixel under test is timed
// against fixed reference coincidence sets in the other two camera regions.
// After arm, the converter time-stamps the first rising edge of start and the
// first rising edge of stop with a free-running tick counter, and reports
// stop - start as a signed number of ticks, so the stop signal may come first.
// If both edges have not been seen within 2**(W-1)-1 ticks of arming, it
// reports overflow instead.
//
// Interface: arm (one-cycle pulse) clears and starts a measurement; busy is high
// while waiting; valid rises when a result is ready and stays until the next
// arm; value is signed ticks; overflow marks a timed-out measurement.
// Timing: valid rises one tick after the later of the two edges is seen.
// Resolution is one tick (72 ps) where the real TDCs reach about 50 ps with a
// fine interpolator, which a clocked model cannot reproduce. The edge-to-edge
// measurement is this design's choice; two TDCs and their use for alignment
// follow the published description.
module tdc #(
  parameter int W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                arm,
  input  logic                start,
  input  logic                stop,
  output logic                busy,
  output logic                valid,
  output logic                overflow,
  output logic signed [W-1:0] value
);
  logic [W-1:0] now, t_start, t_stop;
  logic         seen_start, seen_stop, start_q, stop_q;
  logic         start_rise, stop_rise;

  assign start_rise = start & ~start_q;
  assign stop_rise  = stop & ~stop_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0; t_start <= '0; t_stop <= '0;
      seen_start <= 1'b0; seen_stop <= 1'b0; start_q <= 1'b0; stop_q <= 1'b0;
      busy <= 1'b0; valid <= 1'b0; overflow <= 1'b0; value <= '0;
    end else begin
      start_q <= start;
      stop_q  <= stop;
      if (arm) begin
        now <= '0;
        seen_start <= 1'b0; seen_stop <= 1'b0;
        busy <= 1'b1; valid <= 1'b0; overflow <= 1'b0;
      end else if (busy) begin
        now <= now + 1'b1;
        if (start_rise && !seen_start) begin seen_start <= 1'b1; t_start <= now; end
        if (stop_rise  && !seen_stop)  begin seen_stop  <= 1'b1; t_stop  <= now; end
        if ((seen_start || start_rise) && (seen_stop || stop_rise)) begin
          busy  <= 1'b0;
          valid <= 1'b1;
          value <= $signed((seen_stop  ? t_stop  : now)) - $signed((seen_start ? t_start : now));
        end else if (now == {1'b0, {(W-1){1'b1}}}) begin
          busy <= 1'b0; valid <= 1'b1; overflow <= 1'b1; value <= '0;
        end
      end
    end
  end
endmodule
