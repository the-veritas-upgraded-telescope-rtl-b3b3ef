// image_moments: image moments of the camera hit pattern for a topological
// trigger.
//
// On start, the L1 hit pattern is captured and the unit sums, over all hit
// pixels, n (the count), sum x, sum y, sum x*x, sum y*y and sum x*y, with the
// pixel coordinates of l2trig_pkg (x in half pixel pitches, y in rows). It
// walks the pixels one per clock, reading the coordinates from a table that is
// computed at elaboration from the camera geometry.
//
// Interface: start (one-cycle) is ignored while busy; done pulses for one cycle
// when the sums are final and they hold until the next start.
// Timing: done comes NPIX+1 cycles after start.
// The list of moments follows the published description; the serial walk, the
// coordinate units and the output widths are this design's choice.
module image_moments #(
  parameter int NPIX = l2trig_pkg::NPIX_CAMERA,
  parameter int W    = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [NPIX-1:0]     hits,
  output logic                busy,
  output logic                done,
  output logic [W-1:0]        n,
  output logic signed [W-1:0] sx,
  output logic signed [W-1:0] sy,
  output logic signed [W-1:0] sxx,
  output logic signed [W-1:0] syy,
  output logic signed [W-1:0] sxy
);
  import l2trig_pkg::*;
  localparam int IW = $clog2(NPIX + 1);

  logic signed [7:0] xt [NPIX];
  logic signed [7:0] yt [NPIX];
  for (genvar p = 0; p < NPIX; p++) begin : g_xy
    assign xt[p] = 8'(pix_x(p, NPIX));
    assign yt[p] = 8'(pix_y(p, NPIX));
  end

  logic [NPIX-1:0]   pat;
  logic [IW-1:0]     idx;
  logic signed [7:0] cx, cy;

  assign cx = xt[idx];
  assign cy = yt[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pat <= '0; idx <= '0; busy <= 1'b0; done <= 1'b0;
      n <= '0; sx <= '0; sy <= '0; sxx <= '0; syy <= '0; sxy <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          pat <= hits; idx <= '0; busy <= 1'b1;
          n <= '0; sx <= '0; sy <= '0; sxx <= '0; syy <= '0; sxy <= '0;
        end
      end else begin
        if (pat[idx]) begin
          n   <= n + 1'b1;
          sx  <= sx  + W'(cx);
          sy  <= sy  + W'(cy);
          sxx <= sxx + W'(cx * cx);
          syy <= syy + W'(cy * cy);
          sxy <= sxy + W'(cx * cy);
        end
        if (int'(idx) == NPIX - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
