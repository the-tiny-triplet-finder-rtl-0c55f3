// tb_phi_binning: the coarser phi binnings of the barrel workload, 0.5 and
// 2 degree bins (32 and 8 bins over the 16 degree window), each with 10
// tracks plus 102 random hits per layer per event.  The engine is rebuilt
// with PHI_BIN = 500 and 2000; the Hough table is unchanged and the road map
// and shifter windows follow from the bin size.  Every result record is
// checked against the reference model, and the share of layer 2 hits with
// no coincidence is printed for each binning.
module tb_phi_binning;
  bit done_a, done_b;
  int ca, fa, za, ha, gta, gfa;
  int cb, fb, zb, hb, gtb, gfb;
  int checks, failures;

  tb_phi_binning_run #(.PB(500))  u_a (.done(done_a), .checks(ca), .failures(fa),
    .n_zero(za), .n_hit(ha), .good_total(gta), .good_found(gfa));
  tb_phi_binning_run #(.PB(2000)) u_b (.done(done_b), .checks(cb), .failures(fb),
    .n_zero(zb), .n_hit(hb), .good_total(gtb), .good_found(gfb));

  initial begin
    wait (done_a && done_b);
    checks = ca + cb;
    failures = fa + fb;
    $display("0.5 deg: results %0d, no coincidence %0d, good tracks found %0d of %0d", za + ha, za, gfa, gta);
    $display("2 deg:   results %0d, no coincidence %0d, good tracks found %0d of %0d", zb + hb, zb, gfb, gtb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end
endmodule
