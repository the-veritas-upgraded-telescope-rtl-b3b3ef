// l2_telescope_processor: the L2 board, which combines the three L1.5 boards
// into the telescope trigger sent to the array (L3) trigger.
//
// The trigger bits of the L1.5 boards are ORed; each rising edge of the OR is
// one telescope trigger. A prescaler passes one of every `prescale` triggers;
// each passed trigger produces an output pulse OUT_TICKS long on l3_trig
// (further triggers during the pulse are ignored) and starts the image-moment
// unit on the camera hit pattern, the OR of the boards' owned-pixel patterns.
// Two TDCs time the boards' monitor outputs against each other for the pixel
// timing alignment. Each TDC's start and stop are chosen by tdc_sel: bits [1:0]
// pick the start, bits [5:4] the stop, codes 0..2 the monitor of board 0..2 and
// code 3 the ORed trigger.
//
// Timing: l3_trig rises one tick after the first board trigger bit rises
// (edge detect and prescaler are combinational, the output is registered). l2_count counts passed triggers.
// The OR of the boards, the two TDCs, the moments and the prescaling follow the
// published description; the output pulse width, the TDC input selection and
// the trigger counter are this design's choice.
module l2_telescope_processor #(
  parameter int NPIX      = l2trig_pkg::NPIX_CAMERA,
  parameter int NREG      = l2trig_pkg::NREGIONS,
  parameter int NTDC      = l2trig_pkg::NTDC,
  parameter int OUT_TICKS = 139,
  parameter int TDC_W     = 16,
  parameter int MW        = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NREG-1:0]      l15_trig,
  input  logic [NREG-1:0]      l15_mon,
  input  logic [NPIX-1:0]      l15_hit [NREG],
  input  logic [15:0]          prescale,
  input  logic [7:0]           tdc_sel [NTDC],
  input  logic                 tdc_arm,
  output logic [NTDC-1:0]      tdc_valid,
  output logic [NTDC-1:0]      tdc_ovf,
  output logic [TDC_W-1:0]     tdc_value [NTDC],
  output logic                 l3_trig,
  output logic [15:0]          l2_count,
  output logic                 mom_busy,
  output logic                 mom_done,
  output logic [MW-1:0]        mom [6]
);
  logic            any, any_q, evt, pass;
  logic [NPIX-1:0] camera_hit;
  logic [$clog2(OUT_TICKS+1)-1:0] out_cnt;
  logic [3:0]      tsrc;

  assign any  = |l15_trig;
  assign evt  = any & ~any_q;
  assign tsrc = {any, l15_mon};

  always_comb begin
    camera_hit = '0;
    for (int g = 0; g < NREG; g++) camera_hit |= l15_hit[g];
  end

  prescaler #(.W(16)) u_pre (.clk, .rst_n, .factor(prescale), .evt, .pass);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      any_q <= 1'b0; out_cnt <= '0; l3_trig <= 1'b0; l2_count <= '0;
    end else begin
      any_q <= any;
      if (pass) l2_count <= l2_count + 1'b1;
      if (out_cnt != 0) begin
        out_cnt <= out_cnt - 1'b1;
        l3_trig <= (out_cnt != 1);
      end else if (pass) begin
        out_cnt <= ($bits(out_cnt))'(OUT_TICKS);
        l3_trig <= 1'b1;
      end
    end
  end

  for (genvar k = 0; k < NTDC; k++) begin : g_tdc
    logic busy_unused;
    tdc #(.W(TDC_W)) u_tdc (
      .clk, .rst_n, .arm(tdc_arm),
      .start(tsrc[tdc_sel[k][1:0]]), .stop(tsrc[tdc_sel[k][5:4]]),
      .busy(busy_unused), .valid(tdc_valid[k]), .overflow(tdc_ovf[k]), .value(tdc_value[k])
    );
  end

  image_moments #(.NPIX(NPIX), .W(MW)) u_mom (
    .clk, .rst_n, .start(pass), .hits(camera_hit), .busy(mom_busy), .done(mom_done),
    .n(mom[0]), .sx(mom[1]), .sy(mom[2]), .sxx(mom[3]), .syy(mom[4]), .sxy(mom[5])
  );
endmodule
