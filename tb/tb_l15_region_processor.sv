// tb_l15_region_processor: one L1.5 board (region 1 of a 37-pixel camera,
// 16 delay taps). For every pixel the board owns, directed events check:
// a 3-fold (centre + two neighbours) fires the board trigger exactly 3 ticks
// after the pulses start; centre + one neighbour does not; a disabled centre
// does not; a 5-tick misalignment with a large detune does not fire until the
// early pixels are delayed by 5 ticks, and then fires 3+5+detune ticks after the
// late pulse starts; the monitor output follows the selected 3-fold set; the
// hit output shows owned pixels only. Pixels of another sector must not fire.
module tb_l15_region_processor;
  import l2trig_pkg::*;
  localparam int NPIX = 37, REGION = 1, TAPS = 16;
  logic clk = 0, rst_n = 0;
  logic [NPIX-1:0] l1_in = '0, pix_en = '1, hit;
  logic [7:0] pix_delay [NPIX];
  logic [7:0] detune = 0;
  logic [8:0] mon_pix = 0;
  logic [5:0] mon_mask = 0;
  logic trig, mon;
  int checks = 0, failures = 0;
  int dq[6] = '{1, 1, 0, -1, -1, 0};
  int dr[6] = '{0, -1, -1, 0, 1, 1};

  l15_region_processor #(.NPIX(NPIX), .REGION(REGION), .TAPS(TAPS)) dut (
    .clk, .rst_n, .l1_in, .pix_en, .pix_delay, .detune, .mon_pix, .mon_mask, .trig, .mon, .hit);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // drive pulses of width w on the pixels in set a (start 0) and set b (start off);
  // return the first tick (counted from the start of set a) where trig is high, or -1
  task automatic event_run(logic [NPIX-1:0] a, logic [NPIX-1:0] b, int off, int w,
                           output int first_trig, output int first_mon, output logic [NPIX-1:0] hit_seen);
    first_trig = -1; first_mon = -1; hit_seen = '0;
    for (int c = 0; c < w + off + TAPS + 40; c++) begin
      @(negedge clk);
      if (trig && first_trig < 0) first_trig = c;
      if (mon && first_mon < 0) first_mon = c;
      hit_seen |= hit;
      l1_in = ((c < w) ? a : '0) | ((c >= off && c < off + w) ? b : '0);
    end
    l1_in = '0;
    repeat (TAPS + 4) @(negedge clk);
  endtask

  initial begin
    int q, r, nb[6], nn, ft, fm, nown;
    logic [NPIX-1:0] a, b, hs;
    for (int p = 0; p < NPIX; p++) pix_delay[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    nown = 0;
    for (int p = 0; p < NPIX; p++) begin
      if (pix_sector(p, NPIX) != REGION) continue;
      q = pix_q(p, NPIX); r = pix_r(p, NPIX);
      nn = 0;
      for (int d = 0; d < 6; d++) begin
        nb[d] = pix_index(q + dq[d], r + dr[d], NPIX);
        if (nb[d] >= 0) nn++;
      end
      if (nn < 2) continue;
      nown++;
      // pick the first two neighbours
      a = '0; a[p] = 1;
      for (int d = 0, k = 0; d < 6 && k < 2; d++) if (nb[d] >= 0) begin a[nb[d]] = 1; k++; end
      // aligned 3-fold, zero detune
      detune = 0;
      mon_pix = 9'(p);
      mon_mask = '0;
      for (int d = 0, k = 0; d < 6 && k < 2; d++) if (nb[d] >= 0) begin mon_mask[d] = 1; k++; end
      event_run(a, '0, 0, 20, ft, fm, hs);
      chk(ft == 3, $sformatf("pixel %0d 3-fold latency %0d", p, ft));
      chk(fm == 2, $sformatf("pixel %0d monitor latency %0d", p, fm));
      chk(hs[p] == 1, "owned pixel in hit");
      for (int i = 0; i < NPIX; i++)
        if (hs[i] && pix_sector(i, NPIX) != REGION) chk(0, $sformatf("non-owned pixel %0d in hit", i));
      // two-fold only
      b = '0; b[p] = 1;
      for (int d = 0; d < 6; d++) if (nb[d] >= 0) begin b[nb[d]] = 1; break; end
      event_run(b, '0, 0, 20, ft, fm, hs);
      chk(ft < 0, $sformatf("pixel %0d 2-fold must not fire", p));
      // disabled centre
      pix_en[p] = 0;
      event_run(a, '0, 0, 20, ft, fm, hs);
      // neighbours may still form a 3-fold with another centre only if they have
      // two common neighbours active, which this set never has
      chk(ft < 0, $sformatf("pixel %0d disabled must not fire", p));
      pix_en[p] = 1;
      // misalignment: centre and first neighbour early, second neighbour 5 late
      detune = 16;
      b = '0;
      for (int d = 0, k = 0; d < 6; d++) if (nb[d] >= 0) begin if (k == 1) b[nb[d]] = 1; k++; end
      event_run(a & ~b, b, 5, 20, ft, fm, hs);
      chk(ft < 0, $sformatf("pixel %0d misaligned must not fire with detune 16", p));
      for (int i = 0; i < NPIX; i++) if ((a & ~b) >> i & 1) pix_delay[i] = 5;
      event_run(a & ~b, b, 5, 20, ft, fm, hs);
      chk(ft == 5 + 3 + 16, $sformatf("pixel %0d aligned by delay latency %0d", p, ft));
      for (int i = 0; i < NPIX; i++) pix_delay[i] = 0;
    end
    chk(nown >= 8, $sformatf("owned pixels tested %0d", nown));
    // a 3-fold entirely in another sector, away from this board's band
    a = '0;
    a[pix_index(3, -3, NPIX)] = 1; a[pix_index(2, -2, NPIX)] = 1; a[pix_index(3, -2, NPIX)] = 1;
    detune = 0;
    event_run(a, '0, 0, 20, ft, fm, hs);
    chk(ft < 0, "foreign 3-fold must not fire");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
