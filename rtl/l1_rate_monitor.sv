// l1_rate_monitor: per-pixel L1 rate counters.
//
// Counts the rising edges of every enabled pixel's L1 signal over a gate of
// gate_len ticks. At the end of each gate the counts are copied to rate and
// the counters restart (an edge on the last tick of a gate counts in the next), so rate always holds the last complete gate; gate_done
// pulses for one cycle when it is updated. Counters saturate.
// Timing: an edge on l1 at tick t is counted at t+1; rate updates on the tick
// where the gate counter reaches gate_len - 1.
// Rate monitors for the L1 signals follow the published description; gating,
// widths and where the counters sit are this design's choice.
module l1_rate_monitor #(
  parameter int NPIX  = l2trig_pkg::NPIX_CAMERA,
  parameter int CW    = 24,
  parameter int GW    = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NPIX-1:0] l1,
  input  logic [NPIX-1:0] en,
  input  logic [GW-1:0]   gate_len,
  output logic [CW-1:0]   rate [NPIX],
  output logic            gate_done
);
  logic [NPIX-1:0] l1_q;
  logic [GW-1:0]   gcnt;
  logic [CW-1:0]   cnt [NPIX];
  logic            gate_end;

  assign gate_end = (gcnt >= gate_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_q <= '0; gcnt <= '0; gate_done <= 1'b0;
      for (int p = 0; p < NPIX; p++) begin cnt[p] <= '0; rate[p] <= '0; end
    end else begin
      l1_q      <= l1;
      gate_done <= gate_end;
      gcnt      <= gate_end ? '0 : gcnt + 1'b1;
      for (int p = 0; p < NPIX; p++) begin
        if (gate_end) begin
          rate[p] <= cnt[p];
          cnt[p]  <= CW'(l1[p] && !l1_q[p] && en[p]);
        end else if (l1[p] && !l1_q[p] && en[p] && ~&cnt[p]) begin
          cnt[p]  <= cnt[p] + 1'b1;
        end
      end
    end
  end
endmodule
