// tts_ref_pkg: reference model used by the testbenches of the seeding
// engine.  It recomputes the Hough table and the road map with real
// arithmetic straight from the geometry, independently of the integer
// constant functions in the RTL package, and supplies a track generator.
//
// Hough: z375 = z0 + (z - z0) * 375 / r over the corners of the (z bin,
//   z0 bin) cell; the band is every z375 bin the cell's lines reach.
// Roads: phi offset of a hit at radius r relative to layer 2 for curvature
//   kappa = ki * 0.02 /m and displacement d = di * 0.5 mm:
//   kappa*(r - 375 mm)/2 + d*(1/r - 1/375 mm); a road (o1, o3) exists if
//   some (ki, di) gives floor bins f1, f3 with o1 - f1 and o3 - f3 in {0, 1}.
//   The bin width in radians is taken as phi_bin_mdeg * 17453e-9, the same
//   rounded constant the RTL documents.
package tts_ref_pkg;

  localparam int RMAX = 64;   // road offsets handled: -RMAX..RMAX

  // z375 bins [lo, hi] reached from the cell (z bin kz, z0 bin k0);
  // returns 0 and leaves lo > hi when none is inside the nz bins
  function automatic bit ref_hough(input int kz, input int k0, input real r_mm,
                                   input int nz, input int zb, input int z0b,
                                   output int lo, output int hi);
    real z, z0, z375, mn, mx;
    mn = 1.0e9; mx = -1.0e9;
    for (int a = 0; a <= 1; a++)
      for (int b = 0; b <= 1; b++) begin
        z    = real'(kz + a) * real'(zb) - 1200.0;
        z0   = real'(k0 + b) * real'(z0b) - 100.0;
        z375 = z0 + (z - z0) * 375.0 / r_mm;
        if (z375 < mn) mn = z375;
        if (z375 > mx) mx = z375;
      end
    lo = int'($floor((mn + 1200.0) / real'(zb) + 1.0e-9));
    hi = int'($floor((mx + 1200.0) / real'(zb) - 1.0e-9));
    if (lo < 0) lo = 0;
    if (hi > nz - 1) hi = nz - 1;
    return (lo <= hi);
  endfunction

  function automatic real ref_dphi(input real r_mm, input real kappa_per_m, input real d_mm);
    return kappa_per_m * (r_mm - 375.0) / 2000.0 + d_mm * (1.0 / r_mm - 1.0 / 375.0);
  endfunction

  function automatic int ref_floor_bin(input real dphi, input int phi_bin_mdeg);
    return int'($floor(dphi / (real'(phi_bin_mdeg) * 17453.0e-9) + 1.0e-9));
  endfunction

  // road map as an associative set keyed by (o1 + RMAX) * 1024 + (o3 + RMAX)
  typedef bit road_set_t [int];

  function automatic road_set_t ref_roads(input int phi_bin_mdeg);
    road_set_t s;
    int f1, f3;
    for (int ki = -30; ki <= 30; ki++)
      for (int di = -4; di <= 4; di++) begin
        f1 = ref_floor_bin(ref_dphi(250.0, real'(ki) * 0.02, real'(di) * 0.5), phi_bin_mdeg);
        f3 = ref_floor_bin(ref_dphi(525.0, real'(ki) * 0.02, real'(di) * 0.5), phi_bin_mdeg);
        for (int a = 0; a <= 1; a++)
          for (int b = 0; b <= 1; b++)
            s[(f1 + a + RMAX) * 1024 + (f3 + b + RMAX)] = 1'b1;
      end
    return s;
  endfunction

  function automatic int road_o1(input int key);
    return key / 1024 - RMAX;
  endfunction

  function automatic int road_o3(input int key);
    return key % 1024 - RMAX;
  endfunction

endpackage
