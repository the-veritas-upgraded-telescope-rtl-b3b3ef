// l15_region_processor: one L1.5 board, the neighbour-coincidence processor of
// one third of the camera.
//
// The board takes the L1 signals of the pixels in its region (its 120-degree
// sector plus the overlap band, see l2trig_pkg; the pixel distribution
// backplane delivers exactly these, and the other bits of l1_in are not used).
// Every received pixel passes through its own pixel_delay (enable + delay).
// Every received pixel is the centre of one coinc_cell, whose neighbours are
// the received pixels adjacent to it; a pixel in the overlap band is therefore
// a cell centre on two boards, the centre pixel on all three. The OR of all
// cells is the board's trigger bit to the L2 board.
//
// Two more outputs serve the L2 board. hit is the aligned (delayed, enabled) L1
// pattern of the pixels this board owns (its sector), zero elsewhere, so that
// the three boards' patterns OR together into the camera image. mon is a timing
// monitor: the coincidence of pixel mon_pix and the neighbours selected by
// mon_mask (no detune), used with the TDCs for the timing alignment, where fixed
// 3-fold sets are timed against each other.
//
// Timing: trig(t) reflects cell triggers of t-1; with detune = 0 an overlap
// starting at the delay outputs at tick t gives trig at t+2. mon is registered
// (one tick after the delay outputs). The board, cell rule, per-pixel delays and
// monitor use for timing follow the published description; the hit and mon
// outputs and their encoding are this design's choice.
module l15_region_processor #(
  parameter int NPIX     = l2trig_pkg::NPIX_CAMERA,
  parameter int REGION   = 0,
  parameter int TAPS     = l2trig_pkg::DELAY_TAPS,
  parameter int DELAY_W  = l2trig_pkg::DELAY_W,
  parameter int DETUNE_W = l2trig_pkg::DETUNE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NPIX-1:0]     l1_in,
  input  logic [NPIX-1:0]     pix_en,
  input  logic [DELAY_W-1:0]  pix_delay [NPIX],
  input  logic [DETUNE_W-1:0] detune,
  input  logic [8:0]          mon_pix,
  input  logic [5:0]          mon_mask,
  output logic                trig,
  output logic                mon,
  output logic [NPIX-1:0]     hit
);
  import l2trig_pkg::*;

  logic [NPIX-1:0] d;         // aligned L1 of received pixels
  logic [NPIX-1:0] cell_trig;
  logic [NPIX-1:0] mon_coinc;

  for (genvar p = 0; p < NPIX; p++) begin : g_pix
    localparam bit RX  = in_region(p, REGION, NPIX);
    localparam bit OWN = (pix_sector(p, NPIX) == REGION);
    if (RX) begin : g_rx
      logic [5:0] nb;
      for (genvar k = 0; k < 6; k++) begin : g_nb
        localparam int N = nbr_index(p, k, NPIX);
        if (N >= 0 && in_region(N, REGION, NPIX)) begin : g_on
          assign nb[k] = d[N];
        end else begin : g_off
          assign nb[k] = 1'b0;
        end
      end
      pixel_delay #(.TAPS(TAPS), .DELAY_W(DELAY_W)) u_dly (
        .clk, .rst_n, .din(l1_in[p]), .en(pix_en[p]), .delay(pix_delay[p]), .dout(d[p])
      );
      coinc_cell #(.DETUNE_W(DETUNE_W)) u_cell (
        .clk, .rst_n, .center(d[p]), .nbr(nb), .detune, .trig(cell_trig[p])
      );
      assign mon_coinc[p] = d[p] & (&(nb | ~mon_mask));
    end else begin : g_norx
      assign d[p]         = 1'b0;
      assign cell_trig[p] = 1'b0;
      assign mon_coinc[p] = 1'b0;
    end
    assign hit[p] = OWN ? d[p] : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig <= 1'b0;
      mon  <= 1'b0;
    end else begin
      trig <= |cell_trig;
      mon  <= (int'(mon_pix) < NPIX) ? mon_coinc[mon_pix] : 1'b0;
    end
  end
endmodule
