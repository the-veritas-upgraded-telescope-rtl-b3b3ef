// tb_l2_trigger_top_full: end-to-end test of the whole trigger crate at its default
// size (499 pixels, 139 delay taps, 10 ns output pulse). L1 pulses are 13 ns
// (180 ticks) long, as the discriminators give them. Everything is set up
// through the register bus. Each mechanism is made to happen and counted:
//   3-fold trigger with its latency and output pulse width,
//   rejection of a 2-fold,
//   detune: a 6.5 ns misalignment passes an 8 ns gate and fails a 5 ns gate,
//   delay alignment: a 100-tick misalignment is removed by pixel delays,
//   a disabled pixel,
//   an overlap-band event seen by more than one L1.5 board,
//   prescaling, TDC timing of two boards' monitor sets, image moments, and
//   L1 rate read-back.
module tb_l2_trigger_top_full;
  import l2trig_pkg::*;
  localparam int NPIX = NPIX_CAMERA, W = L1_WIDTH_TICKS, OUT = 139;
  logic clk = 0, rst_n = 0;
  logic [NPIX-1:0] l1_in = '0;
  logic bus_wr = 0, bus_rd = 0, bus_rvalid, l3_trig, mom_valid;
  logic [11:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic [23:0] mom_n, mom_sx, mom_sy, mom_sxx, mom_syy, mom_sxy;
  int checks = 0, failures = 0;
  int n_trig = 0, n_reject2 = 0, n_detune_pass = 0, n_detune_block = 0, n_align = 0,
      n_disabled = 0, n_overlap = 0, n_prescaled = 0, n_tdc = 0, n_moments = 0, n_rate = 0;
  int dq[6] = '{1, 1, 0, -1, -1, 0};
  int dr[6] = '{0, -1, -1, 0, 1, 1};

  l2_trigger_top dut (.clk, .rst_n, .l1_in, .bus_wr, .bus_rd, .bus_addr, .bus_wdata, .bus_rdata,
    .bus_rvalid, .l3_trig, .mom_valid, .mom_n, .mom_sx, .mom_sy, .mom_sxx, .mom_syy, .mom_sxy);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); bus_wr = 1; bus_addr = a; bus_wdata = d; @(negedge clk); bus_wr = 0;
  endtask

  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); bus_rd = 1; bus_addr = a; @(negedge clk); bus_rd = 0;
    d = bus_rdata;
  endtask

  // pulses of W ticks: set a starts at tick 0, set b at tick off. Returns the
  // first tick with l3_trig high (-1 if none), the number of output pulses,
  // the width of the first pulse and the OR of the boards' trigger bits.
  task automatic shoot(logic [NPIX-1:0] a, logic [NPIX-1:0] b, int off,
                       output int rise, output int npulse, output int width, output logic [2:0] boards);
    logic prev = 0;
    rise = -1; npulse = 0; width = 0; boards = 0;
    for (int c = 0; c < W + off + 139 + 260 + OUT; c++) begin
      @(negedge clk);
      if (l3_trig && !prev) npulse++;
      if (l3_trig && npulse == 1) width++;
      if (l3_trig && rise < 0) rise = c;
      prev = l3_trig;
      boards |= dut.l15_trig;
      l1_in = ((c < W) ? a : '0) | ((c >= off && c < off + W) ? b : '0);
    end
    l1_in = '0;
    repeat (20) @(negedge clk);
  endtask

  function automatic int nbr(int p, int d);
    return pix_index(pix_q(p, NPIX) + dq[d], pix_r(p, NPIX) + dr[d], NPIX);
  endfunction

  function automatic logic [NPIX-1:0] onehot(int p);
    logic [NPIX-1:0] v;
    v = '0; v[p] = 1'b1;
    return v;
  endfunction

  initial begin
    int p, n0, n1, p1, m0, m1, rise, np, wd, ex[6], x, y;
    logic [2:0] bd;
    logic [31:0] d;
    logic [NPIX-1:0] tri3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    p  = pix_index(1, 1, NPIX);  // sector 0
    n0 = nbr(p, 0); n1 = nbr(p, 5);
    tri3 = onehot(p) | onehot(n0) | onehot(n1);
    // 1. aligned 3-fold
    shoot(tri3, '0, 0, rise, np, wd, bd);
    chk(rise == 4 && np == 1 && wd == OUT, $sformatf("3-fold: rise %0d pulses %0d width %0d", rise, np, wd));
    if (rise >= 0) n_trig++;
    // moments of that event
    ex = '{0, 0, 0, 0, 0, 0};
    foreach (tri3[i]) if (tri3[i]) begin
      x = 2 * pix_q(i, NPIX) + pix_r(i, NPIX); y = pix_r(i, NPIX);
      ex[0]++; ex[1] += x; ex[2] += y; ex[3] += x*x; ex[4] += y*y; ex[5] += x*y;
    end
    chk(int'(mom_n) == ex[0] && int'($signed(mom_sx)) == ex[1] && int'($signed(mom_sy)) == ex[2] &&
        int'($signed(mom_sxx)) == ex[3] && int'($signed(mom_syy)) == ex[4] && int'($signed(mom_sxy)) == ex[5],
        $sformatf("moments %0d %0d %0d %0d %0d %0d", mom_n, $signed(mom_sx), $signed(mom_sy), mom_sxx, mom_syy, $signed(mom_sxy)));
    rd(A_MOMENT + 1, d);
    chk(int'($signed(d)) == ex[1], "moment sx over the bus");
    if (int'(mom_n) == 3) n_moments++;
    // 2. two-fold
    shoot(onehot(p) | onehot(n0), '0, 0, rise, np, wd, bd);
    chk(rise < 0, "2-fold must not trigger");
    if (rise < 0) n_reject2++;
    // 3. detune: n1 late by 90 ticks (6.5 ns)
    wr(A_DETUNE, 68);   // gate ~ 180-68-1 = 111 ticks = 8 ns
    shoot(onehot(p) | onehot(n0), onehot(n1), 90, rise, np, wd, bd);
    chk(rise == 90 + 4 + 68, $sformatf("8 ns gate passes 6.5 ns: rise %0d", rise));
    if (rise >= 0) n_detune_pass++;
    wr(A_DETUNE, 110);  // gate ~ 69 ticks = 5 ns
    shoot(onehot(p) | onehot(n0), onehot(n1), 90, rise, np, wd, bd);
    chk(rise < 0, "5 ns gate blocks 6.5 ns");
    if (rise < 0) n_detune_block++;
    // 4. delay alignment: n1 late by 100 ticks; delay p and n0 by 100
    wr(A_PIXEL + 12'(p), 32'h6401);
    wr(A_PIXEL + 12'(n0), 32'h6401);
    shoot(onehot(p) | onehot(n0), onehot(n1), 100, rise, np, wd, bd);
    chk(rise == 100 + 4 + 110, $sformatf("aligned by delays: rise %0d", rise));
    if (rise >= 0) n_align++;
    wr(A_PIXEL + 12'(p), 32'h0001);
    wr(A_PIXEL + 12'(n0), 32'h0001);
    wr(A_DETUNE, 0);
    // 5. disabled centre pixel, and a set whose every 3-fold needs it
    wr(A_PIXEL + 12'(p), 32'h0000);
    shoot(tri3, '0, 0, rise, np, wd, bd);
    chk(rise < 0, "disabled pixel must not trigger");
    if (rise < 0) n_disabled++;
    wr(A_PIXEL + 12'(p), 32'h0001);
    // 6. overlap: the centre pixel and two of its neighbours reach all boards
    shoot(onehot(0) | onehot(nbr(0, 4)) | onehot(nbr(0, 5)), '0, 0, rise, np, wd, bd);
    chk(rise >= 0 && $countones(bd) >= 2, $sformatf("overlap event boards %b", bd));
    if ($countones(bd) >= 2) n_overlap++;
    // 7. prescale 2: four events, two sent
    rd(A_STATUS, d);
    m0 = int'(d[15:0]);
    wr(A_PRESCALE, 2);
    x = 0;
    for (int i = 0; i < 4; i++) begin shoot(tri3, '0, 0, rise, np, wd, bd); x += np; end
    rd(A_STATUS, d);
    chk(x == 2 && int'(d[15:0]) == m0 + 2, $sformatf("prescale: %0d sent, count %0d -> %0d", x, m0, d[15:0]));
    if (x == 2) n_prescaled++;
    wr(A_PRESCALE, 1);
    // 8. TDC: monitor set of board 1 is the reference, board 0's set comes 37 ticks later
    p1 = pix_index(-2, 1, NPIX);  // sector 1
    m0 = nbr(p1, 0); m1 = nbr(p1, 3);
    wr(A_MONSEL + 0, {10'b0, 6'b100001, 7'b0, 9'(p)});   // p with n0 (d=0) and n1 (d=5)
    wr(A_MONSEL + 1, {10'b0, 6'b001001, 7'b0, 9'(p1)});  // p1 with d=0 and d=3
    wr(A_TDCSEL, 32'h0001);                               // tdc0: start board1, stop board0
    wr(A_CMD, 1);
    shoot(onehot(p1) | onehot(m0) | onehot(m1), tri3, 37, rise, np, wd, bd);
    rd(A_TDC, d);
    chk(d[31] && !d[30] && $signed(d[15:0]) == 37, $sformatf("TDC %h", d));
    if (d[31] && $signed(d[15:0]) == 37) n_tdc++;
    // 9. rate: three pulses on one pixel inside one gate of 1000 ticks
    wr(A_GATE, 1000);
    @(posedge dut.gate_done);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); l1_in[n1] = 1; repeat (50) @(negedge clk); l1_in[n1] = 0; repeat (50) @(negedge clk);
    end
    @(posedge dut.gate_done);
    repeat (2) @(negedge clk);
    rd(A_RATE + 12'(n1), d);
    chk(d == 3, $sformatf("rate %0d", d));
    rd(A_RATE + 12'(n0), d);
    chk(d == 0, "quiet pixel rate 0");
    if (d == 0) n_rate++;
    // every mechanism happened
    chk(n_trig > 0, "mechanism: trigger");
    chk(n_reject2 > 0, "mechanism: 2-fold rejection");
    chk(n_detune_pass > 0 && n_detune_block > 0, "mechanism: detune gate");
    chk(n_align > 0, "mechanism: delay alignment");
    chk(n_disabled > 0, "mechanism: pixel disable");
    chk(n_overlap > 0, "mechanism: overlap region");
    chk(n_prescaled > 0, "mechanism: prescale");
    chk(n_tdc > 0, "mechanism: TDC");
    chk(n_moments > 0, "mechanism: moments");
    chk(n_rate > 0, "mechanism: rate monitor");
    $display("mechanisms: trig %0d reject2 %0d detune %0d/%0d align %0d disable %0d overlap %0d prescale %0d tdc %0d moments %0d rate %0d",
             n_trig, n_reject2, n_detune_pass, n_detune_block, n_align, n_disabled, n_overlap, n_prescaled, n_tdc, n_moments, n_rate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
