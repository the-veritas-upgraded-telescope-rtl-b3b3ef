// ctrl_regs: the control and monitoring registers of the trigger crate, as
// seen over the VME control interface.
//
// Through these registers the operators' software switches every pixel
// (discriminator) on or off, sets every pixel's alignment delay, the detune
// (coincidence gate width), the prescaling factor and the TDC inputs, arms
// the TDCs, and reads back the L1 rate counters, the TDC results, the telescope
// trigger count and the image moments. The register map is in l2trig_pkg.
//
// Bus: a simple synchronous register bus (bus_req_t / bus_rsp_t) stands for the
// VME slave logic, whose protocol is not modelled. A write takes effect at the
// clock edge where wr is high; read data is returned with rvalid one cycle
// after rd. Writing bit 0 of the command register gives a one-cycle tdc_arm.
// Reset values: all pixels on, zero delay, detune 0, prescale 1 (every
// trigger), a rate gate of 13 888 889 ticks (1 ms), monitors on pixel 0 with
// no neighbours. The set of controls follows the published description; the
// register map, bus and reset values are this design's choice.
module ctrl_regs #(
  parameter int NPIX = l2trig_pkg::NPIX_CAMERA,
  parameter int NREG = l2trig_pkg::NREGIONS,
  parameter int NTDC = l2trig_pkg::NTDC,
  parameter int CW   = 24,
  parameter int TDC_W = 16,
  parameter int MW   = 24,
  parameter logic [31:0] GATE_RESET = 32'd13_888_889
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  l2trig_pkg::bus_req_t req,
  output l2trig_pkg::bus_rsp_t rsp,
  // configuration
  output logic [NPIX-1:0]      pix_en,
  output logic [7:0]           pix_delay [NPIX],
  output logic [7:0]           detune,
  output logic [15:0]          prescale,
  output logic [7:0]           tdc_sel [NTDC],
  output logic                 tdc_arm,
  output logic [31:0]          gate_len,
  output logic [8:0]           mon_pix [NREG],
  output logic [5:0]           mon_mask [NREG],
  // monitoring
  input  logic [CW-1:0]        rate [NPIX],
  input  logic [NTDC-1:0]      tdc_valid,
  input  logic [NTDC-1:0]      tdc_ovf,
  input  logic [TDC_W-1:0]     tdc_value [NTDC],
  input  logic [15:0]          l2_count,
  input  logic                 mom_busy,
  input  logic [MW-1:0]        mom [6]
);
  import l2trig_pkg::*;

  logic [BUS_AW-1:0] a;
  assign a = req.addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_en <= '1; detune <= '0; prescale <= 16'd1; tdc_arm <= 1'b0; gate_len <= GATE_RESET;
      for (int p = 0; p < NPIX; p++) pix_delay[p] <= '0;
      for (int k = 0; k < NTDC; k++) tdc_sel[k] <= '0;
      for (int g = 0; g < NREG; g++) begin mon_pix[g] <= '0; mon_mask[g] <= '0; end
    end else begin
      tdc_arm <= 1'b0;
      if (req.wr) begin
        if (a < A_PIXEL + BUS_AW'(NPIX)) begin
          pix_en[a[8:0]]    <= req.wdata[0];
          pix_delay[a[8:0]] <= req.wdata[15:8];
        end
        if (a == A_DETUNE)   detune   <= req.wdata[7:0];
        if (a == A_PRESCALE) prescale <= req.wdata[15:0];
        if (a == A_TDCSEL)
          for (int k = 0; k < NTDC; k++) tdc_sel[k] <= req.wdata[8*k +: 8];
        if (a == A_CMD)      tdc_arm  <= req.wdata[0];
        if (a == A_GATE)     gate_len <= req.wdata;
        for (int g = 0; g < NREG; g++)
          if (a == A_MONSEL + BUS_AW'(g)) begin
            mon_pix[g]  <= req.wdata[8:0];
            mon_mask[g] <= req.wdata[21:16];
          end
      end
    end
  end

  // read path
  logic [BUS_DW-1:0] rd_mux;
  always_comb begin
    rd_mux = '0;
    if (a < A_PIXEL + BUS_AW'(NPIX))
      rd_mux = {16'b0, pix_delay[a[8:0]], 7'b0, pix_en[a[8:0]]};
    else if (a >= A_RATE && a < A_RATE + BUS_AW'(NPIX))
      rd_mux = BUS_DW'(rate[a[8:0]]);
    else if (a == A_DETUNE)   rd_mux = BUS_DW'(detune);
    else if (a == A_PRESCALE) rd_mux = BUS_DW'(prescale);
    else if (a == A_GATE)     rd_mux = gate_len;
    else if (a == A_STATUS)   rd_mux = {15'b0, mom_busy, l2_count};
    else if (a == A_TDCSEL) begin
      for (int k = 0; k < NTDC; k++) rd_mux[8*k +: 8] = tdc_sel[k];
    end
    for (int k = 0; k < NTDC; k++)
      if (a == A_TDC + BUS_AW'(k))
        rd_mux = {tdc_valid[k], tdc_ovf[k], 14'b0, 16'(signed'(tdc_value[k]))};
    for (int g = 0; g < NREG; g++)
      if (a == A_MONSEL + BUS_AW'(g))
        rd_mux = {10'b0, mon_mask[g], 7'b0, mon_pix[g]};
    for (int i = 0; i < 6; i++)
      if (a == A_MOMENT + BUS_AW'(i))
        rd_mux = BUS_DW'(signed'(mom[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp <= '0;
    else begin
      rsp.rvalid <= req.rd;
      if (req.rd) rsp.rdata <= rd_mux;
    end
  end

  // a bus cycle is either a read or a write
  assert property (@(posedge clk) disable iff (!rst_n) !(req.wr && req.rd))
    else $error("ctrl_regs: read and write in the same cycle");
endmodule
