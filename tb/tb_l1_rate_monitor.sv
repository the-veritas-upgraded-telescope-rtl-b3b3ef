// tb_l1_rate_monitor: random pulses on 12 channels, some disabled, over six
// gates. A cycle model kept here (edge = rising L1 on an enabled channel; at the
// end of each gate the count is latched and restarts) predicts rate and
// gate_done every cycle; at least six gates must have completed with non-zero
// counts on the enabled channels only.
module tb_l1_rate_monitor;
  localparam int NPIX = 12, GATE = 97;
  logic clk = 0, rst_n = 0, gate_done;
  logic [NPIX-1:0] l1 = '0, en = 12'b1110_1111_0111;
  logic [31:0] gate_len = GATE;
  logic [23:0] rate [NPIX];
  int checks = 0, failures = 0;

  l1_rate_monitor #(.NPIX(NPIX), .CW(24), .GW(32)) dut (.clk, .rst_n, .l1, .en, .gate_len, .rate, .gate_done);
  always #5 clk = ~clk;

  initial begin
    int cnt[NPIX], rate_m[NPIX], gcnt, ngates, nonzero;
    logic [NPIX-1:0] l1_q;
    bit gend, done_m;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    foreach (cnt[p]) begin cnt[p] = 0; rate_m[p] = 0; end
    gcnt = 0; l1_q = '0; ngates = 0; nonzero = 0;
    for (int c = 0; c < 6 * GATE + 3; c++) begin
      for (int p = 0; p < NPIX; p++) l1[p] = ($urandom % 5) == 0 ? ~l1[p] : l1[p];
      // model of the next clock edge
      gend = (gcnt >= GATE - 1);
      for (int p = 0; p < NPIX; p++) begin
        if (gend) begin rate_m[p] = cnt[p]; cnt[p] = int'(l1[p] && !l1_q[p] && en[p]); end
        else if (l1[p] && !l1_q[p] && en[p]) cnt[p]++;
      end
      done_m = gend;
      gcnt = gend ? 0 : gcnt + 1;
      l1_q = l1;
      @(negedge clk);
      checks++;
      if (gate_done !== done_m) begin failures++; $display("FAIL gate_done c=%0d", c); end
      for (int p = 0; p < NPIX; p++) begin
        checks++;
        if (int'(rate[p]) != rate_m[p]) begin failures++; $display("FAIL rate[%0d]=%0d exp %0d", p, rate[p], rate_m[p]); end
      end
      if (gate_done) begin
        ngates++;
        for (int p = 0; p < NPIX; p++) begin
          if (!en[p]) begin checks++; if (rate[p] != 0) begin failures++; $display("FAIL disabled %0d counted", p); end end
          else if (rate[p] != 0) nonzero++;
        end
      end
    end
    checks++;
    if (ngates < 6 || nonzero < 6 * 8) begin failures++; $display("FAIL gates=%0d nonzero=%0d", ngates, nonzero); end
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
