// tb_gate_width_sweep: the coincidence gate widths used in operation (about
// 9 ns, 8 ns, 5 ns and the narrowest, 3 ns), run through the whole crate on a
// 7-pixel camera. For each gate the matching detune (180 - gate - 1 ticks) is
// written over the register bus, and a 3-fold of 13 ns pulses is fired with the
// third pulse late by dt = 0, 1, 2, ... ticks. The largest dt that still
// triggers must be the gate width in ticks, and every dt up to it must trigger.
module tb_gate_width_sweep;
  import l2trig_pkg::*;
  localparam int NPIX = 7, W = L1_WIDTH_TICKS;
  logic clk = 0, rst_n = 0;
  logic [NPIX-1:0] l1_in = '0;
  logic bus_wr = 0, bus_rd = 0, bus_rvalid, l3_trig, mom_valid;
  logic [11:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic [23:0] mom_n, mom_sx, mom_sy, mom_sxx, mom_syy, mom_sxy;
  int checks = 0, failures = 0;

  l2_trigger_top #(.NPIX(NPIX)) dut (.clk, .rst_n, .l1_in, .bus_wr, .bus_rd, .bus_addr, .bus_wdata,
    .bus_rdata, .bus_rvalid, .l3_trig, .mom_valid, .mom_n, .mom_sx, .mom_sy, .mom_sxx, .mom_syy, .mom_sxy);
  always #5 clk = ~clk;

  task automatic fire(int dt, output bit fired);
    fired = 0;
    for (int c = 0; c < W + dt + 300; c++) begin
      @(negedge clk);
      if (l3_trig) fired = 1;
      l1_in[0] = (c < W);
      l1_in[1] = (c < W);
      l1_in[2] = (c >= dt && c < W + dt);
    end
    l1_in = '0;
    repeat (150) @(negedge clk);
  endtask

  initial begin
    // gate widths in ps: ~9 ns, 8 ns, 5 ns, 3 ns
    int gate_ps[4] = '{9000, 8000, 5000, 3000};
    int gate, det, last;
    bit fired, gap;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (gate_ps[i]) begin
      gate = gate_ps[i] / TICK_PS;
      det  = W - gate - 1;
      @(negedge clk); bus_wr = 1; bus_addr = A_DETUNE; bus_wdata = det; @(negedge clk); bus_wr = 0;
      last = -1; gap = 0;
      for (int dt = gate - 3; dt <= gate + 3; dt++) begin
        fire(dt, fired);
        if (fired) begin if (last != dt - 1 && last >= 0) gap = 1; last = dt; end
      end
      fire(0, fired);
      checks++;
      if (!fired) begin failures++; $display("FAIL gate %0d ps: aligned pulses do not trigger", gate_ps[i]); end
      checks++;
      if (last != gate || gap) begin
        failures++; $display("FAIL gate %0d ps (detune %0d): widest dt %0d, expected %0d", gate_ps[i], det, last, gate);
      end else
        $display("gate %0d ps: detune %0d accepts up to %0d ticks = %0d ps", gate_ps[i], det, last, last * TICK_PS);
    end
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
