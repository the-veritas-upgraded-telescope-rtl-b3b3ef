// tb_l2_telescope_processor: the L2 board with a 37-pixel camera and a 5-tick
// output pulse. Checks: each board's trigger bit alone produces an l3_trig
// pulse one tick after it rises, exactly OUT_TICKS long; a bit held high gives
// one pulse; with prescale 3 only every third trigger is sent and counted;
// the two TDCs time board monitors against each other (positive and negative);
// each sent trigger starts the moments on the OR of the boards' hit patterns.
module tb_l2_telescope_processor;
  import l2trig_pkg::*;
  localparam int NPIX = 37, OUT = 5;
  logic clk = 0, rst_n = 0;
  logic [2:0] l15_trig = 0, l15_mon = 0;
  logic [NPIX-1:0] l15_hit [3];
  logic [15:0] prescale = 1;
  logic [7:0] tdc_sel [2];
  logic tdc_arm = 0;
  logic [1:0] tdc_valid, tdc_ovf;
  logic [15:0] tdc_value [2];
  logic l3_trig, mom_busy, mom_done;
  logic [15:0] l2_count;
  logic [23:0] mom [6];
  int checks = 0, failures = 0;

  l2_telescope_processor #(.NPIX(NPIX), .OUT_TICKS(OUT)) dut (
    .clk, .rst_n, .l15_trig, .l15_mon, .l15_hit, .prescale, .tdc_sel, .tdc_arm,
    .tdc_valid, .tdc_ovf, .tdc_value, .l3_trig, .l2_count, .mom_busy, .mom_done, .mom);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // raise board bits for `len` ticks and measure the output pulse
  task automatic pulse(logic [2:0] bits, int len, output int rise, output int width, output int npulses);
    logic prev = 0;
    rise = -1; width = 0; npulses = 0;
    for (int c = 0; c < len + OUT + 10; c++) begin
      @(negedge clk);
      if (l3_trig) begin width++; if (rise < 0) rise = c; end
      if (l3_trig && !prev) npulses++;
      prev = l3_trig;
      l15_trig = (c < len) ? bits : 3'b0;
    end
  endtask

  initial begin
    int rise, width, np, x, y, ex[6];
    for (int g = 0; g < 3; g++) l15_hit[g] = '0;
    tdc_sel[0] = 8'h10; tdc_sel[1] = 8'h20;  // tdc0: board0 -> board1, tdc1: board0 -> board2
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      pulse(3'(1 << g), 3, rise, width, np);
      chk(rise == 1 && width == OUT && np == 1, $sformatf("board %0d: rise %0d width %0d", g, rise, width));
    end
    pulse(3'b111, 40, rise, width, np);
    chk(np == 1 && width == OUT, "held trigger gives one pulse");
    chk(l2_count == 4, $sformatf("count %0d", l2_count));
    // prescale 3: 9 triggers -> 3 sent
    prescale = 3;
    np = 0;
    for (int i = 0; i < 9; i++) begin pulse(3'b010, 2, rise, width, x); np += x; end
    chk(np == 3 && l2_count == 7, $sformatf("prescale: %0d sent, count %0d", np, l2_count));
    prescale = 1;
    // TDCs: board0 monitor at 0, board1 at +12, board2 at -7
    @(negedge clk); tdc_arm = 1; @(negedge clk); tdc_arm = 0;
    for (int c = 0; c < 60; c++) begin
      l15_mon[0] = (c >= 20 && c < 30);
      l15_mon[1] = (c >= 32 && c < 42);
      l15_mon[2] = (c >= 13 && c < 23);
      @(negedge clk);
    end
    chk(tdc_valid == 2'b11 && tdc_ovf == 0, "TDCs valid");
    chk($signed(tdc_value[0]) == 12, $sformatf("tdc0 %0d", $signed(tdc_value[0])));
    chk($signed(tdc_value[1]) == -7, $sformatf("tdc1 %0d", $signed(tdc_value[1])));
    // moments of the ORed hit patterns
    ex = '{0, 0, 0, 0, 0, 0};
    for (int p = 0; p < NPIX; p++) begin
      logic h;
      h = ($urandom % 3) == 0;
      l15_hit[pix_sector(p, NPIX)][p] = h;
      if (h) begin
        x = 2 * pix_q(p, NPIX) + pix_r(p, NPIX); y = pix_r(p, NPIX);
        ex[0]++; ex[1] += x; ex[2] += y; ex[3] += x*x; ex[4] += y*y; ex[5] += x*y;
      end
    end
    pulse(3'b100, 2, rise, width, np);
    for (int g = 0; g < 3; g++) l15_hit[g] = '0;
    np = 0;
    while (!mom_done && np < 200) begin @(negedge clk); np++; end
    @(negedge clk);
    for (int i = 0; i < 6; i++) chk(int'($signed(mom[i])) == ex[i], $sformatf("moment %0d = %0d exp %0d", i, $signed(mom[i]), ex[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
