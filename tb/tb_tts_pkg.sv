// tb_tts_pkg: checks the constant functions of the shared package against
// the real-arithmetic reference model.
//   * hough_z375_range for every (z bin, z0 bin) cell of layer 1 and layer 3
//     must give the same z375 band as the corner-line reference;
//   * hough_max_span must be the widest of those bands (3 bins at the
//     default binning);
//   * phi_offset_floor for every scanned (curvature, displacement) step and
//     layer must equal the floor of the reference phi offset, for 0.125,
//     0.5 and 2 degree bins;
//   * road_halfwidth must be the largest |offset| of the reference road set;
//   * floor_div must round towards minus infinity for all sign cases.
module tb_tts_pkg;
  import tts_pkg::*;
  import tts_ref_pkg::*;

  int checks = 0, failures = 0;
  int v, lo, hi, mx, w, o, want;
  bit ok;
  int radii [2] = '{250, 525};
  int phibins [3] = '{125, 500, 2000};
  road_set_t roads;

  initial begin
    // Hough bands
    foreach (radii[ri]) begin
      mx = 0;
      for (int kz = 0; kz < int'(NZ); kz++)
        for (int k0 = 0; k0 < int'(NZ0); k0++) begin
          v  = hough_z375_range(kz, k0, radii[ri], int'(NZ), int'(Z_BIN_MM), int'(Z0_BIN_MM));
          ok = ref_hough(kz, k0, real'(radii[ri]), int'(NZ), int'(Z_BIN_MM), int'(Z0_BIN_MM), lo, hi);
          checks++;
          if (ok ? (v != lo * 65536 + hi) : (v != -1)) begin
            failures++;
            if (failures < 10) $display("FAIL hough r=%0d kz=%0d k0=%0d got %0d exp %0d..%0d", radii[ri], kz, k0, v, lo, hi);
          end
          if (ok && hi - lo + 1 > mx) mx = hi - lo + 1;
        end
      checks++;
      if (hough_max_span(radii[ri], int'(NZ), int'(Z_BIN_MM), int'(Z0_BIN_MM), int'(NZ0)) != mx || mx != 3) begin
        failures++;
        $display("FAIL max span r=%0d exp %0d", radii[ri], mx);
      end
    end
    // phi offsets and road half widths
    foreach (phibins[bi]) begin
      foreach (radii[ri]) begin
        for (int ki = -KAPPA_STEPS; ki <= KAPPA_STEPS; ki++)
          for (int di = -D_STEPS; di <= D_STEPS; di++) begin
            o    = phi_offset_floor(radii[ri], ki, di, phibins[bi]);
            want = ref_floor_bin(ref_dphi(real'(radii[ri]), real'(ki) * 0.02, real'(di) * 0.5), phibins[bi]);
            checks++;
            if (o != want) begin
              failures++;
              if (failures < 10) $display("FAIL offset bin=%0d r=%0d ki=%0d di=%0d got %0d exp %0d", phibins[bi], radii[ri], ki, di, o, want);
            end
          end
      end
      roads = ref_roads(phibins[bi]);
      foreach (radii[ri]) begin
        w = 0;
        foreach (roads[key]) begin
          o = (ri == 0) ? road_o1(key) : road_o3(key);
          if (o > w) w = o;
          if (-o > w) w = -o;
        end
        checks++;
        if (road_halfwidth(radii[ri], phibins[bi]) != w) begin
          failures++;
          $display("FAIL halfwidth bin=%0d r=%0d got %0d exp %0d", phibins[bi], radii[ri], road_halfwidth(radii[ri], phibins[bi]), w);
        end
      end
    end
    // floor division
    for (int a = -7; a <= 7; a++)
      for (int b = -3; b <= 3; b++)
        if (b != 0) begin
          checks++;
          if (floor_div(longint'(a), longint'(b)) != longint'($floor(real'(a) / real'(b)))) begin
            failures++;
            $display("FAIL floor_div %0d/%0d", a, b);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
