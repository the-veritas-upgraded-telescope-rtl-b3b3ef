// pixel_delay: programmable delay and enable for one L1 (discriminator) signal.
//
// Each pixel's L1 pulse can be delayed in steps of 72 ps up to about 10 ns
// before it enters the coincidence logic, so that all pixels of the camera
// arrive time-aligned; each pixel can also be switched off. In the L1.5 FPGA
// this is done by delay elements on the asynchronous signal. Here, with one
// clock tick per 72 ps step (see l2trig_pkg), it is a shift register with a
// tap multiplexer.
//
// Interface: din is the L1 level, en switches the pixel on, delay selects the
// extra delay in ticks (values above TAPS-1 are clamped to TAPS-1).
// Timing: dout(t) = en(t-1-delay) & din(t-1-delay); the fixed part is one tick.
// The step and range follow the published description; the shift-register
// structure, the clamping and gating before the delay are this design's choice.
module pixel_delay #(
  parameter int TAPS    = l2trig_pkg::DELAY_TAPS,
  parameter int DELAY_W = l2trig_pkg::DELAY_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               din,
  input  logic               en,
  input  logic [DELAY_W-1:0] delay,
  output logic               dout
);
  logic [TAPS-1:0] sr;
  logic [DELAY_W-1:0] tap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[TAPS-2:0], din & en};
  end

  always_comb begin
    tap  = (int'(delay) > TAPS - 1) ? DELAY_W'(TAPS - 1) : delay;
    dout = sr[tap];
  end
endmodule
