// tb_image_moments: random hit patterns on the full 499-pixel camera (and an
// empty one and a single pixel); the sums must equal those computed here from
// the pixel coordinates, and done must come NPIX+1 cycles after start.
module tb_image_moments;
  import l2trig_pkg::*;
  localparam int NPIX = NPIX_CAMERA;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NPIX-1:0] hits = '0;
  logic [23:0] n;
  logic signed [23:0] sx, sy, sxx, syy, sxy;
  int checks = 0, failures = 0;

  image_moments #(.NPIX(NPIX), .W(24)) dut (.clk, .rst_n, .start, .hits, .busy, .done, .n, .sx, .sy, .sxx, .syy, .sxy);
  always #5 clk = ~clk;

  task automatic run(logic [NPIX-1:0] pat);
    int e[6], x, y, lat;
    e = '{0, 0, 0, 0, 0, 0};
    for (int p = 0; p < NPIX; p++) if (pat[p]) begin
      x = 2 * pix_q(p, NPIX) + pix_r(p, NPIX);
      y = pix_r(p, NPIX);
      e[0]++; e[1] += x; e[2] += y; e[3] += x*x; e[4] += y*y; e[5] += x*y;
    end
    @(negedge clk); hits = pat; start = 1; @(negedge clk); start = 0; hits = '0;
    lat = 1;
    while (!done && lat < 2000) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NPIX + 1) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (int'(n) != e[0] || int'(sx) != e[1] || int'(sy) != e[2] || int'(sxx) != e[3] || int'(syy) != e[4] || int'(sxy) != e[5]) begin
      failures++;
      $display("FAIL moments got %0d %0d %0d %0d %0d %0d exp %0d %0d %0d %0d %0d %0d",
               n, sx, sy, sxx, syy, sxy, e[0], e[1], e[2], e[3], e[4], e[5]);
    end
  endtask

  initial begin
    logic [NPIX-1:0] pat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run('0);
    pat = '0; pat[pix_index(3, -1, NPIX)] = 1; run(pat);
    for (int i = 0; i < 8; i++) begin
      for (int p = 0; p < NPIX; p++) pat[p] = ($urandom % (2 + i * 4)) == 0;
      run(pat);
    end
    run('1);
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
