// tts_pkg: shared constants, record types and geometry functions of the
// Tiny Triplet Finder track segment seeding engine.
//
// The engine serves one 10-degree x 240 cm sector of a three-layer barrel
// detector (radii 250, 375 and 525 mm) in a 4 T field, for tracks above
// 2 GeV/c from a +-10 cm collision region with up to +-2 mm vertex
// displacement.  Those geometry numbers, the bin counts (240 z bins of 1 cm,
// 10 z0 bins of 2 cm, 128 phi bins of 0.125 degree over 16 degrees) and the
// limit of 112 hits per layer per event follow the paper.
//
// In the original firmware the Hough lookup table and the coincidence road
// map were files produced by simulation software.  Here they are computed by
// the constant functions below from the same geometry:
//   * hough_z375_range: the z375 bins (at r = 375 mm) reached by r-z
//     straight lines from anywhere in a z0 bin through anywhere in a hit's
//     z bin at radius r.  Covering the whole cell rather than only the
//     line through the bin centres keeps real tracks from being lost to
//     bin quantisation: up to 3 bins at the default binning.
//   * phi_offset_floor: phi bin offset, relative to the layer 2 hit, of the
//     hit at radius r on a helix of curvature kappa from a vertex displaced
//     by d (small-angle form phi(r) = phi0 + kappa*r/2 + d/r).  The road map
//     scans kappa and d over their ranges in steps finer than one bin.
// Both formulas, the scan steps and the fixed field widths are this design's
// own choices.
package tts_pkg;

  // ---------------- geometry (paper, barrel configuration) ----------------
  localparam int unsigned NZ          = 240;   // z bins of z1, z3, z375
  localparam int unsigned Z_BIN_MM    = 10;    // 1 cm
  localparam int          Z_HALF_MM   = 1200;  // +-120 cm
  localparam int unsigned NZ0         = 10;    // z0 bins
  localparam int unsigned Z0_BIN_MM   = 20;    // 2 cm
  localparam int          Z0_HALF_MM  = 100;   // +-10 cm
  localparam int unsigned R1_MM       = 250;
  localparam int unsigned R2_MM       = 375;
  localparam int unsigned R3_MM       = 525;
  localparam int unsigned PHI_SPAN_MDEG = 16000; // phi window of layers 1..3
  localparam int unsigned PHI_BIN_MDEG  = 125;   // 0.125 degree
  localparam int unsigned NPHI        = PHI_SPAN_MDEG / PHI_BIN_MDEG; // 128
  localparam int unsigned MAX_HITS    = 112;   // hits per layer per event

  // Curvature scan: kappa = KI * 0.02 /m, |kappa| <= 0.3*B/pT = 0.6 /m.
  localparam int          KAPPA_STEPS = 30;
  // Displacement scan: d = DI * 0.5 mm, |d| <= 2 mm.
  localparam int          D_STEPS     = 4;

  // ---------------- field widths ----------------
  localparam int unsigned ZW   = 8;   // up to 256 z bins
  localparam int unsigned PW   = 7;   // up to 128 phi bins
  localparam int unsigned HW   = 7;   // hit index, up to 128 hits
  localparam int unsigned EW   = 8;   // event number
  localparam int unsigned CW   = 12;  // coincidence count (saturating)
  localparam int unsigned SPW  = 3;   // Hough span length, 0..7 bins
  // Column banks of a storage row: at least the widest Hough band (3 bins
  // at the default binning); 4 keeps the bank select a plain bit field and
  // leaves room for coarser z0 binning.
  localparam int unsigned NBANK = 4;

  typedef logic [ZW-1:0] zbin_t;
  typedef logic [PW-1:0] phibin_t;

  // One hit as the engine sees it: z bin and phi bin on the layer's grid.
  // Layer 2 phi uses the same 16-degree grid as layers 1 and 3.
  typedef struct packed {
    zbin_t   nz;
    phibin_t nphi;
  } hit_t;

  typedef enum logic [1:0] {
    LAYER1 = 2'd0,
    LAYER2 = 2'd1,
    LAYER3 = 2'd2
  } layer_e;

  // Hit counts of one event held in the input buffer.
  typedef struct packed {
    logic [HW:0] n1;
    logic [HW:0] n2;
    logic [HW:0] n3;
  } ev_counts_t;

  // Engine phase as issued by the sequencer.
  typedef enum logic [1:0] {
    PH_IDLE    = 2'd0,
    PH_FILL    = 2'd1,  // layer 1 and 3 hits into the storage blocks
    PH_SEARCH  = 2'd2,  // layer 2 hits drive the coincidence search
    PH_REFRESH = 2'd3   // one-cycle clear of the storage blocks
  } phase_e;

  // One coincidence-search result, one per layer 2 hit.
  typedef struct packed {
    logic [EW-1:0]  event_id;
    logic [HW-1:0]  hit_idx;
    hit_t           hit;
    logic [NZ0-1:0] z0_mask;   // z0 rows that had at least one coincidence
    logic [CW-1:0]  count;     // number of road coincidences, all rows
  } result_t;

  // ---------------- constant functions ----------------

  function automatic longint floor_div(input longint a, input longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  // z375 bins reached by the r-z lines through any point of z bin kz at
  // radius r_mm and any point of z0 bin k0: z375 = z0 + (z - z0) * R2 / r is
  // linear in z and z0, so the extremes are at the corners of the two bins.
  // Returns {lo, hi} packed as lo * 65536 + hi, clamped to [0, nz-1], or -1
  // when the whole range falls outside the NZ bins.
  function automatic int hough_z375_range(input int kz, input int k0, input int r_mm,
                                          input int nz, input int z_bin_mm,
                                          input int z0_bin_mm);
    longint zc [2], z0c [2], num, lo_num, hi_num, lo, hi, den;
    int zi, z0i;
    zi     = kz * z_bin_mm - Z_HALF_MM;
    z0i    = k0 * z0_bin_mm - Z0_HALF_MM;
    zc[0]  = longint'(zi);
    zc[1]  = zc[0] + longint'(z_bin_mm);
    z0c[0] = longint'(z0i);
    z0c[1] = z0c[0] + longint'(z0_bin_mm);
    lo_num = 64'sh7fffffffffffffff;
    hi_num = -64'sh7fffffffffffffff;
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        // (z375 + Z_HALF) * r
        num = z0c[b] * r_mm + (zc[a] - z0c[b]) * longint'(R2_MM) + longint'(Z_HALF_MM) * r_mm;
        if (num < lo_num) lo_num = num;
        if (num > hi_num) hi_num = num;
      end
    den = longint'(z_bin_mm) * r_mm;
    lo  = floor_div(lo_num, den);
    hi  = floor_div(hi_num - 1, den);    // bins are half-open
    if (hi < 0 || lo >= longint'(nz)) return -1;
    if (lo < 0) lo = 0;
    if (hi >= longint'(nz)) hi = longint'(nz) - 1;
    return int'(lo) * 65536 + int'(hi);
  endfunction

  // Largest number of z375 bins one (z bin, z0 bin) pair can reach.
  function automatic int hough_max_span(input int r_mm, input int nz, input int z_bin_mm,
                                        input int z0_bin_mm, input int nz0);
    int m, v;
    m = 1;
    for (int kz = 0; kz < nz; kz++)
      for (int k0 = 0; k0 < nz0; k0++) begin
        v = hough_z375_range(kz, k0, r_mm, nz, z_bin_mm, z0_bin_mm);
        if (v >= 0 && (v % 65536) - (v / 65536) + 1 > m) m = (v % 65536) - (v / 65536) + 1;
      end
    return m;
  endfunction

  // Phi bin offset (floor) of a hit at radius r_mm relative to the layer 2
  // hit, for curvature step ki and displacement step di.
  function automatic int phi_offset_floor(input int r_mm, input int ki, input int di,
                                          input int phi_bin_mdeg);
    longint dk, dd, bin_nrad;
    // kappa*(r - r2)/2 with kappa = ki*0.02/m, in nrad
    dk = longint'(ki) * (longint'(r_mm) - longint'(R2_MM)) * 64'sd10000;
    // d*(1/r - 1/r2) with d = di*0.5 mm, in nrad
    dd = (longint'(di) * 64'sd500000000 * (longint'(R2_MM) - longint'(r_mm)))
         / (longint'(r_mm) * longint'(R2_MM));
    bin_nrad = longint'(phi_bin_mdeg) * 64'sd17453;  // 1 mdeg = 17453 nrad
    return int'(floor_div(dk + dd, bin_nrad));
  endfunction

  // Half width W of the window of phi offsets [-W, W] that holds every road
  // for the layer at radius r_mm.
  function automatic int road_halfwidth(input int r_mm, input int phi_bin_mdeg);
    int w, o;
    w = 0;
    for (int ki = -KAPPA_STEPS; ki <= KAPPA_STEPS; ki++) begin
      for (int di = -D_STEPS; di <= D_STEPS; di++) begin
        o = phi_offset_floor(r_mm, ki, di, phi_bin_mdeg);
        if (o < 0 && -o > w) w = -o;
        if (o + 1 > w) w = o + 1;
      end
    end
    return w;
  endfunction

endpackage
