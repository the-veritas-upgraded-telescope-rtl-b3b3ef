// tb_l2trig_pkg: checks the camera geometry of l2trig_pkg.
// Checks: the first ring's coordinates against hand-worked values; that pixel
// numbering and coordinates invert each other for every pixel; that every grid
// position within the camera radius either is a pixel or is one of the unused
// outer-ring positions; neighbour symmetry; that every pixel is owned by exactly
// one region, is received by that region's board, and that every neighbour of
// an owned pixel is received too; pixel counts of the three boards.
module tb_l2trig_pkg;
  import l2trig_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int q, r, n, own, cnt[3], npos;
    int exp_q[7] = '{0, -1, 0, 1, 1, 0, -1};
    int exp_r[7] = '{0, 1, 1, 0, -1, -1, 0};
    for (int p = 0; p < 7; p++) begin
      check(pix_q(p, NPIX_CAMERA) == exp_q[p] && pix_r(p, NPIX_CAMERA) == exp_r[p], $sformatf("ring 1 pixel %0d", p));
    end
    check(full_rings(NPIX_CAMERA) == 12, "12 full rings");
    check(part_per_side(NPIX_CAMERA) == 5, "5 per side on ring 13");
    cnt = '{0, 0, 0};
    for (int p = 0; p < NPIX_CAMERA; p++) begin
      q = pix_q(p, NPIX_CAMERA); r = pix_r(p, NPIX_CAMERA);
      check(pix_index(q, r, NPIX_CAMERA) == p, $sformatf("round trip %0d", p));
      check(max3(abs_i(q), abs_i(r), abs_i(q + r)) <= 12 || q*q + q*r + r*r <= 133, $sformatf("pixel %0d inside camera", p));
      own = 0;
      for (int g = 0; g < 3; g++) begin
        if (pix_sector(p, NPIX_CAMERA) == g) begin
          own++;
          check(in_region(p, g, NPIX_CAMERA), "owner receives pixel");
          for (int d = 0; d < 6; d++) begin
            n = nbr_index(p, d, NPIX_CAMERA);
            if (n >= 0) check(in_region(n, g, NPIX_CAMERA), "neighbour of owned pixel received");
          end
        end
        if (in_region(p, g, NPIX_CAMERA)) cnt[g]++;
      end
      check(own == 1, "one owner");
      for (int d = 0; d < 6; d++) begin
        n = nbr_index(p, d, NPIX_CAMERA);
        if (n >= 0) check(nbr_index(n, (d + 3) % 6, NPIX_CAMERA) == p, "neighbour symmetry");
      end
    end
    // rings 0..12 and ring-13 positions with q^2+qr+r^2 <= 129 are all pixels: 469 + 24
    npos = 0;
    for (int qq = -14; qq <= 14; qq++)
      for (int rr = -14; rr <= 14; rr++)
        if (max3(abs_i(qq), abs_i(rr), abs_i(qq + rr)) <= 12 || qq*qq + qq*rr + rr*rr <= 129) begin
          npos++;
          check(pix_index(qq, rr, NPIX_CAMERA) >= 0, "inner position is a pixel");
        end
    check(npos == 493, $sformatf("493 positions within rings<=12 or d2<=129 (%0d)", npos));
    check(pix_index(14, 0, NPIX_CAMERA) == -1, "outside camera");
    check(pix_index(13, 0, NPIX_CAMERA) == -1, "ring 13 corner unused");
    check(pix_sector(0, NPIX_CAMERA) == 0 && in_region(0, 1, NPIX_CAMERA) && in_region(0, 2, NPIX_CAMERA), "centre on all boards");
    check(pix_sector(pix_index(3, 0, NPIX_CAMERA), NPIX_CAMERA) == 0, "0 deg ray in sector 0");
    check(pix_sector(pix_index(-3, 3, NPIX_CAMERA), NPIX_CAMERA) == 1, "120 deg ray in sector 1");
    check(pix_sector(pix_index(0, -3, NPIX_CAMERA), NPIX_CAMERA) == 2, "240 deg ray in sector 2");
    check(cnt[0] + cnt[1] + cnt[2] > NPIX_CAMERA, "overlap copies exist");
    $display("boards receive %0d %0d %0d pixels", cnt[0], cnt[1], cnt[2]);
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
