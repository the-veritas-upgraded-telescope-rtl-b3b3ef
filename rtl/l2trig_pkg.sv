// l2trig_pkg: constants, types and camera-geometry functions shared by the
// telescope-level (L2) pattern trigger.
//
// Time base. The real coincidence logic is clockless: L1 pulses travel through
// programmable delay elements and logic gates and are never sampled. This RTL
// is a discrete-time equivalent in which one clock cycle ("tick") stands for one
// delay step of the L1.5 FPGA, 72 ps. A 13 ns L1 pulse is then 180 ticks long and
// the ~10 ns delay range is 0..138 ticks. The 72 ps step, the ~10 ns range and
// the 13 ns pulse width are from the published description; the mapping of one
// delay step to one clock cycle is this design's choice.
//
// Camera geometry. The camera has 499 pixels on a hexagonal grid. The exact
// pixel map of the camera is not published, so this package builds one: pixel 0
// is the centre, rings 1..K around it are complete (1+3K(K+1) pixels) and the
// remaining pixels are spread over the next ring, the same number per side,
// centred on each side (the positions closest to the centre). For 499 pixels
// that is 12 full rings (469 pixels) plus 5 pixels on each side of ring 13.
// Coordinates are axial (q, r); neighbour directions d = 0..5 are
// (+1,0) (+1,-1) (0,-1) (-1,0) (-1,+1) (0,+1). Pixel numbers run ring by ring,
// and within a ring side by side starting at corner (-k,+k).
//
// Regions. The camera is split into three 120-degree sectors, one per L1.5
// board. A board receives the pixels of its sector plus every pixel adjacent to
// one of them (the overlap band, copied to both boards), so every cell whose
// centre lies in its sector is complete on that board. Sector boundaries lie
// along grid axes at 0, 120 and 240 degrees; the centre pixel counts as
// sector 0. Three regions with copied overlap pixels follow the published
// description; the sector angles and the one-pixel overlap band are this
// design's choice.
//
// Image coordinates used for moments: x = 2q + r (units of half the pixel
// pitch), y = r (units of one row, sqrt(3)/2 of the pixel pitch).
package l2trig_pkg;

  localparam int NPIX_CAMERA = 499;  // pixels in the camera
  localparam int NREGIONS    = 3;    // L1.5 boards
  localparam int TICK_PS     = 72;   // one delay step = one clock tick
  localparam int DELAY_TAPS  = 139;  // delay settings 0..138 ticks (0 .. 9.94 ns)
  localparam int DELAY_W     = 8;    // width of a delay setting
  localparam int DETUNE_W    = 8;    // width of the detune (extra overlap) setting
  localparam int L1_WIDTH_TICKS = 180; // 13 ns L1 pulse / 72 ps
  localparam int NTDC        = 2;    // TDCs on the L2 board

  // Register bus (the register file behind the VME interface).
  localparam int BUS_AW = 12;
  localparam int BUS_DW = 32;

  typedef struct packed {
    logic              wr;     // write strobe, one cycle
    logic              rd;     // read strobe, one cycle
    logic [BUS_AW-1:0] addr;
    logic [BUS_DW-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic              rvalid; // one cycle after rd
    logic [BUS_DW-1:0] rdata;
  } bus_rsp_t;

  // Register map (word addresses).
  localparam logic [BUS_AW-1:0] A_PIXEL   = 12'h000; // +p: [0] enable, [15:8] delay
  localparam logic [BUS_AW-1:0] A_RATE    = 12'h200; // +p: L1 count of pixel p, last gate
  localparam logic [BUS_AW-1:0] A_DETUNE  = 12'h400;
  localparam logic [BUS_AW-1:0] A_PRESCALE= 12'h401;
  localparam logic [BUS_AW-1:0] A_TDCSEL  = 12'h402; // tdc k: start [8k+1:8k], stop [8k+5:8k+4]
  localparam logic [BUS_AW-1:0] A_CMD     = 12'h403; // write [0]=1: arm both TDCs
  localparam logic [BUS_AW-1:0] A_GATE    = 12'h404; // rate gate length in ticks
  localparam logic [BUS_AW-1:0] A_STATUS  = 12'h405; // [15:0] L2 trigger count, [16] moments busy
  localparam logic [BUS_AW-1:0] A_TDC     = 12'h408; // +k: [31] valid [30] overflow [15:0] signed ticks
  localparam logic [BUS_AW-1:0] A_MONSEL  = 12'h410; // +board: [8:0] pixel, [21:16] neighbour mask
  localparam logic [BUS_AW-1:0] A_MOMENT  = 12'h420; // +0..5: n, sx, sy, sxx, syy, sxy

  // ---------------------------------------------------------------- geometry
  function automatic int abs_i(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int max3(int a, int b, int c);
    int m;
    m = (a > b) ? a : b;
    return (m > c) ? m : c;
  endfunction

  // number of complete rings around the centre for a camera of npix pixels
  function automatic int full_rings(int npix);
    int k;
    k = 0;
    while (1 + 3 * (k + 1) * (k + 2) <= npix) k++;
    return k;
  endfunction

  // pixels per side on the partial outer ring
  function automatic int part_per_side(int npix);
    int k;
    k = full_rings(npix);
    return (npix - (1 + 3 * k * (k + 1))) / 6;
  endfunction

  function automatic int dir_q(int d);
    case (d)
      0: return 1;  1: return 1;  2: return 0;
      3: return -1; 4: return -1; default: return 0;
    endcase
  endfunction

  function automatic int dir_r(int d);
    case (d)
      0: return 0;  1: return -1; 2: return -1;
      3: return 0;  4: return 1;  default: return 1;
    endcase
  endfunction

  // corner of ring k where side s starts
  function automatic int corner_q(int s, int k);
    case (s)
      0: return -k; 1: return 0;  2: return k;
      3: return k;  4: return 0;  default: return -k;
    endcase
  endfunction

  function automatic int corner_r(int s, int k);
    case (s)
      0: return k;  1: return k;  2: return 0;
      3: return -k; 4: return -k; default: return 0;
    endcase
  endfunction

  // axial q (sel=0) or r (sel=1) of pixel p
  function automatic int pix_coord(int p, int npix, bit sel);
    int kf, m, k, off, side, j, q, r;
    kf = full_rings(npix);
    m  = part_per_side(npix);
    if (p == 0) return 0;
    if (p < 1 + 3 * kf * (kf + 1)) begin
      k = 1;
      while (p >= 1 + 3 * k * (k + 1)) k++;
      off  = p - (1 + 3 * k * (k - 1));
      side = off / k;
      j    = off % k;
    end else begin
      k    = kf + 1;
      off  = p - (1 + 3 * kf * (kf + 1));
      side = off / m;
      j    = (k - m) / 2 + off % m;
    end
    q = corner_q(side, k) + j * dir_q(side);
    r = corner_r(side, k) + j * dir_r(side);
    return sel ? r : q;
  endfunction

  function automatic int pix_q(int p, int npix);
    return pix_coord(p, npix, 1'b0);
  endfunction

  function automatic int pix_r(int p, int npix);
    return pix_coord(p, npix, 1'b1);
  endfunction

  // pixel number at axial (q, r), or -1 if there is no pixel there
  function automatic int pix_index(int q, int r, int npix);
    int kf, m, k, side, j, j0;
    kf = full_rings(npix);
    m  = part_per_side(npix);
    k  = max3(abs_i(q), abs_i(r), abs_i(q + r));
    if (k == 0) return 0;
    if (r == k && q < 0)                             begin side = 0; j = q + k; end
    else if (q >= 0 && q < k && r > 0 && q + r == k) begin side = 1; j = q;     end
    else if (q == k && r <= 0 && r > -k)             begin side = 2; j = -r;    end
    else if (r == -k && q > 0)                       begin side = 3; j = k - q; end
    else if (q <= 0 && q > -k && q + r == -k)        begin side = 4; j = -q;    end
    else                                             begin side = 5; j = r;     end
    if (k <= kf) return 1 + 3 * k * (k - 1) + side * k + j;
    if (k > kf + 1 || m == 0) return -1;
    j0 = (k - m) / 2;
    if (j < j0 || j >= j0 + m) return -1;
    return 1 + 3 * kf * (kf + 1) + side * m + (j - j0);
  endfunction

  // neighbour of pixel p in direction d, or -1
  function automatic int nbr_index(int p, int d, int npix);
    return pix_index(pix_q(p, npix) + dir_q(d), pix_r(p, npix) + dir_r(d), npix);
  endfunction

  // true if (q, r) lies in the 120-degree sector [0, 120) degrees
  function automatic bit in_sector0(int q, int r);
    return (r >= 0 && q > 0) || (q <= 0 && q + r > 0);
  endfunction

  // sector (0..2) that owns pixel p
  function automatic int pix_sector(int p, int npix);
    int q, r;
    q = pix_q(p, npix);
    r = pix_r(p, npix);
    if (q == 0 && r == 0) return 0;
    if (in_sector0(q, r)) return 0;
    if (in_sector0(r, -q - r)) return 1;  // rotated by -120 degrees
    return 2;
  endfunction

  // true if pixel p is wired to the L1.5 board of region g
  function automatic bit in_region(int p, int g, int npix);
    int n;
    if (pix_sector(p, npix) == g) return 1'b1;
    for (int d = 0; d < 6; d++) begin
      n = nbr_index(p, d, npix);
      if (n >= 0 && pix_sector(n, npix) == g) return 1'b1;
    end
    return 1'b0;
  endfunction

  function automatic int pix_x(int p, int npix);
    return 2 * pix_q(p, npix) + pix_r(p, npix);
  endfunction

  function automatic int pix_y(int p, int npix);
    return pix_r(p, npix);
  endfunction

endpackage
