// l2_trigger_top: the telescope-level (L2) pattern trigger crate of one
// imaging Cherenkov telescope.
//
// The 499 discriminator (L1) outputs of the camera enter on l1_in. Three
// l15_region_processor boards each take one third of the camera plus an
// overlap band, align every pixel with its programmable delay, and look for a
// pixel with L1 in itself and at least two of its neighbours, overlapping for
// at least detune+1 ticks. The l2_telescope_processor ORs the three boards into
// the telescope trigger for the array trigger (l3_trig), prescales it, times
// the boards' monitor coincidences with two TDCs for the timing alignment, and
// computes image moments of the hit pattern (mom_*), which would go to a
// topological trigger over the unused fibre link. l1_rate_monitor counts each
// pixel's L1 rate. ctrl_regs holds all settings and read-back values behind a
// simple register bus standing for the VME interface.
//
// Clocking: one clock, one tick = 72 ps, the delay step of the alignment (see
// l2trig_pkg). Reset is asynchronous, active low.
// Latency with zero delays and detune 0: a 3-fold overlap that begins at l1_in
// in cycle t shows as l3_trig high in cycle t+4 (delay line, cell, board OR and
// L2 output register, one tick each).
// Structure follows the published block diagram (discriminators -> I/O cards
// -> pixel distribution backplane -> three L1.5 region processors -> L2
// telescope processor -> L3, with VME control); the discriminators, I/O cards,
// backplane, clock source and fibre link are outside this RTL.
module l2_trigger_top #(
  parameter int NPIX      = l2trig_pkg::NPIX_CAMERA,
  parameter int TAPS      = l2trig_pkg::DELAY_TAPS,
  parameter int OUT_TICKS = 139,
  parameter logic [31:0] GATE_RESET = 32'd13_888_889
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NPIX-1:0] l1_in,
  // register bus
  input  logic            bus_wr,
  input  logic            bus_rd,
  input  logic [11:0]     bus_addr,
  input  logic [31:0]     bus_wdata,
  output logic [31:0]     bus_rdata,
  output logic            bus_rvalid,
  // telescope trigger to the array trigger
  output logic            l3_trig,
  // image moments (towards the topological-trigger link)
  output logic            mom_valid,
  output logic [23:0]     mom_n,
  output logic [23:0]     mom_sx,
  output logic [23:0]     mom_sy,
  output logic [23:0]     mom_sxx,
  output logic [23:0]     mom_syy,
  output logic [23:0]     mom_sxy
);
  import l2trig_pkg::*;
  localparam int CW = 24;

  bus_req_t req;
  bus_rsp_t rsp;
  assign req = '{wr: bus_wr, rd: bus_rd, addr: bus_addr, wdata: bus_wdata};
  assign bus_rdata  = rsp.rdata;
  assign bus_rvalid = rsp.rvalid;

  logic [NPIX-1:0] pix_en;
  logic [7:0]      pix_delay [NPIX];
  logic [7:0]      detune;
  logic [15:0]     prescale;
  logic [7:0]      tdc_sel [NTDC];
  logic            tdc_arm;
  logic [31:0]     gate_len;
  logic [8:0]      mon_pix [NREGIONS];
  logic [5:0]      mon_mask [NREGIONS];
  logic [CW-1:0]   rate [NPIX];
  logic            gate_done;
  logic [NTDC-1:0] tdc_valid, tdc_ovf;
  logic [15:0]     tdc_value [NTDC];
  logic [15:0]     l2_count;
  logic            mom_busy;
  logic [23:0]     mom [6];

  logic [NREGIONS-1:0] l15_trig, l15_mon;
  logic [NPIX-1:0]     l15_hit [NREGIONS];

  ctrl_regs #(.NPIX(NPIX), .NREG(NREGIONS), .NTDC(NTDC), .CW(CW), .GATE_RESET(GATE_RESET)) u_ctrl (
    .clk, .rst_n, .req, .rsp, .pix_en, .pix_delay, .detune, .prescale, .tdc_sel, .tdc_arm,
    .gate_len, .mon_pix, .mon_mask, .rate, .tdc_valid, .tdc_ovf, .tdc_value, .l2_count,
    .mom_busy, .mom
  );

  l1_rate_monitor #(.NPIX(NPIX), .CW(CW)) u_rate (
    .clk, .rst_n, .l1(l1_in), .en(pix_en), .gate_len, .rate, .gate_done
  );

  for (genvar g = 0; g < NREGIONS; g++) begin : g_l15
    l15_region_processor #(.NPIX(NPIX), .REGION(g), .TAPS(TAPS)) u_l15 (
      .clk, .rst_n, .l1_in, .pix_en, .pix_delay, .detune,
      .mon_pix(mon_pix[g]), .mon_mask(mon_mask[g]),
      .trig(l15_trig[g]), .mon(l15_mon[g]), .hit(l15_hit[g])
    );
  end

  l2_telescope_processor #(.NPIX(NPIX), .NREG(NREGIONS), .NTDC(NTDC), .OUT_TICKS(OUT_TICKS)) u_l2 (
    .clk, .rst_n, .l15_trig, .l15_mon, .l15_hit, .prescale, .tdc_sel, .tdc_arm,
    .tdc_valid, .tdc_ovf, .tdc_value, .l3_trig, .l2_count, .mom_busy, .mom_done(mom_valid), .mom
  );

  assign mom_n   = mom[0];
  assign mom_sx  = mom[1];
  assign mom_sy  = mom[2];
  assign mom_sxx = mom[3];
  assign mom_syy = mom[4];
  assign mom_sxy = mom[5];
endmodule
