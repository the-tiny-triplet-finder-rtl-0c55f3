// tb_seeding_engine: end-to-end test of the seeding engine at its default
// (full) size: 240 z bins, 10 z0 bins, 128 phi bins of 0.125 degree,
// 112 hits per layer per event.
//
// Events are generated here: helical tracks above 2 GeV/c (curvature up to
// 0.6 /m in 4 T) from a vertex within +-10 cm in z and +-2 mm transverse,
// plus uniformly random hits.  The main workload is 10 tracks + 102 random
// hits per layer (112 per layer).  A reference model rebuilds both storage
// bitmaps from the hits with real-arithmetic Hough lines and evaluates the
// road set for every layer 2 hit; every result record read from the engine
// (event, hit index, hit, z0 mask, count) must match it.
//
// Mechanisms that must occur at least once (counted, a failure if never):
// back-to-back events (fill starting right after a refresh), the one-cycle
// refresh, the result-credit stall, input-buffer backpressure (wr_ready
// low), hits dropped above 112 per layer, hits with and without
// coincidences, and an event with an empty layer.  The refresh-to-refresh
// distance of back-to-back full events must be 112 + 112 + 1 cycles.
module tb_seeding_engine;
  import tts_pkg::*;
  import tts_ref_pkg::*;

  localparam int NEV = 16;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n, wr_valid, wr_ready, wr_eoe, res_rd_en, res_valid, refresh;
  layer_e wr_layer;
  hit_t wr_hit;
  result_t res_data;
  phase_e phase;
  logic [8:0] res_wr_addr;
  logic [15:0] hits_dropped, stall_res;
  logic [9:0] res_level;

  seeding_engine dut (.*);

  int checks = 0, failures = 0;

  // ---------------- event generation ----------------
  hit_t evh [NEV][3][$];       // hits as written (may exceed 112)
  int   ngood [NEV];
  bit   b1 [NZ0][NZ][NPHI];
  bit   b3 [NZ0][NZ][NPHI];
  road_set_t roads;
  typedef struct { int ev, idx, cnt; hit_t h; logic [NZ0-1:0] mask; bit good; } exp_t;
  exp_t expq [$];

  function automatic hit_t make_hit(input real z_mm, input real phi_deg);
    hit_t h;
    int iz, ip;
    iz = int'($floor((z_mm + 1200.0) / 10.0));
    ip = int'($floor(phi_deg / 0.125));
    if (iz < 0) iz = 0;
    if (iz > int'(NZ) - 1) iz = int'(NZ) - 1;
    if (ip < 0) ip = 0;
    if (ip > int'(NPHI) - 1) ip = int'(NPHI) - 1;
    h.nz = zbin_t'(iz);
    h.nphi = phibin_t'(ip);
    return h;
  endfunction

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  task automatic gen_event(input int e, input int ntrk, input int nrnd [3]);
    real z0, z375, slope, phi2, kap, d, r, dphi;
    real radii [3];
    radii = '{250.0, 375.0, 525.0};
    for (int l = 0; l < 3; l++) evh[e][l].delete();
    ngood[e] = ntrk;
    for (int t = 0; t < ntrk; t++) begin
      z0    = urand(-95.0, 95.0);
      z375  = urand(-820.0, 820.0);   // keeps |z| < 1195 mm on layer 3
      slope = (z375 - z0) / 375.0;
      phi2  = urand(4.0, 12.0);
      kap   = urand(-0.6, 0.6);
      d     = urand(-2.0, 2.0);
      for (int l = 0; l < 3; l++) begin
        r = radii[l];
        dphi = ref_dphi(r, kap, d) * 180.0 / 3.14159265358979;
        evh[e][l].push_back(make_hit(z0 + slope * r, phi2 + dphi));
      end
    end
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < nrnd[l]; i++)
        evh[e][l].push_back(make_hit(urand(-1195.0, 1195.0),
                                     l == 1 ? urand(3.0, 12.99) : urand(0.9, 15.1)));
  endtask

  // reference: results of event e, from the first MAX_HITS hits of each layer
  task automatic reference(input int e);
    int lo, hi, n, c, i1, i3;
    exp_t x;
    for (int k = 0; k < int'(NZ0); k++)
      for (int z = 0; z < int'(NZ); z++)
        for (int p = 0; p < int'(NPHI); p++) begin b1[k][z][p] = 0; b3[k][z][p] = 0; end
    n = evh[e][0].size() < int'(MAX_HITS) ? evh[e][0].size() : int'(MAX_HITS);
    for (int i = 0; i < n; i++)
      for (int k = 0; k < int'(NZ0); k++) begin
        if (ref_hough(int'(evh[e][0][i].nz), k, 250.0, NZ, 10, 20, lo, hi))
          for (int a = lo; a <= hi; a++) b1[k][a][evh[e][0][i].nphi] = 1;
      end
    n = evh[e][2].size() < int'(MAX_HITS) ? evh[e][2].size() : int'(MAX_HITS);
    for (int i = 0; i < n; i++)
      for (int k = 0; k < int'(NZ0); k++) begin
        if (ref_hough(int'(evh[e][2][i].nz), k, 525.0, NZ, 10, 20, lo, hi))
          for (int a = lo; a <= hi; a++) b3[k][a][evh[e][2][i].nphi] = 1;
      end
    n = evh[e][1].size() < int'(MAX_HITS) ? evh[e][1].size() : int'(MAX_HITS);
    for (int i = 0; i < n; i++) begin
      x.ev = e; x.idx = i; x.h = evh[e][1][i]; x.cnt = 0; x.mask = '0;
      x.good = (i < ngood[e]);
      for (int k = 0; k < int'(NZ0); k++) begin
        c = 0;
        foreach (roads[key]) begin
          i1 = int'(x.h.nphi) + road_o1(key);
          i3 = int'(x.h.nphi) + road_o3(key);
          if (i1 >= 0 && i1 < int'(NPHI) && i3 >= 0 && i3 < int'(NPHI))
            if (b1[k][x.h.nz][i1] && b3[k][x.h.nz][i3]) c++;
        end
        x.cnt += c;
        if (c > 0) x.mask[k] = 1'b1;
      end
      expq.push_back(x);
    end
  endtask

  // ---------------- host writer ----------------
  int bp_cycles = 0;
  int n_dropped_exp = 0;

  task automatic put(input logic eoe, input int l, input hit_t h);
    wr_valid = 1'b1; wr_eoe = eoe; wr_layer = layer_e'(l); wr_hit = h;
    #1;
    while (!wr_ready) begin
      bp_cycles++;
      @(negedge clk);
      #1;
    end
    @(negedge clk);
  endtask

  // ---------------- host reader ----------------
  bit read_on = 0;
  int nres = 0, n_zero = 0, n_hit = 0, good_total = 0, good_found = 0;
  exp_t x;

  always @(negedge clk) res_rd_en <= read_on && ($urandom_range(7) != 0);

  always @(posedge clk) begin
    if (rst_n && res_rd_en && res_valid) begin
      checks++;
      nres++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        x = expq.pop_front();
        if (int'(res_data.event_id) != x.ev || int'(res_data.hit_idx) != x.idx ||
            res_data.hit != x.h || int'(res_data.count) != x.cnt || res_data.z0_mask != x.mask) begin
          failures++;
          if (failures < 10)
            $display("FAIL ev %0d/%0d idx %0d/%0d count %0d exp %0d mask %b exp %b",
                     res_data.event_id, x.ev, res_data.hit_idx, x.idx, res_data.count, x.cnt,
                     res_data.z0_mask, x.mask);
        end
        if (x.cnt == 0) n_zero++; else n_hit++;
        if (x.good) begin good_total++; if (x.cnt > 0) good_found++; end
      end
    end
  end

  // ---------------- phase monitor ----------------
  // Every event must take max(n1, n3) + n2 + 1 cycles from its first fill
  // or search cycle to its refresh cycle; 225 for a full event.
  int cyc = 0, n_refresh = 0, b2b = 0, full_ok = 0, start_cyc = 0, ev_seen = 0;
  int ev_len [NEV];
  bit ev_full [NEV];
  phase_e prev_phase = PH_IDLE;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if ((prev_phase == PH_IDLE || prev_phase == PH_REFRESH) && phase != PH_IDLE) begin
        start_cyc = cyc;
        if (prev_phase == PH_REFRESH) b2b++;
      end
      if (phase == PH_REFRESH && ev_seen < NEV) begin
        checks++;
        if (cyc - start_cyc + 1 != ev_len[ev_seen]) begin
          failures++;
          $display("FAIL event %0d took %0d cycles, expected %0d", ev_seen, cyc - start_cyc + 1, ev_len[ev_seen]);
        end else if (ev_full[ev_seen]) full_ok++;
        ev_seen++;
      end
      prev_phase = phase;
    end
  end

  // refresh is a single-cycle pulse
  int refresh_len = 0;
  always @(posedge clk) begin
    if (rst_n && refresh) begin
      refresh_len++;
      if (refresh_len > 1) begin failures++; $display("FAIL refresh longer than a cycle"); end
      n_refresh++;
    end else refresh_len = 0;
  end

  int nr [3];
  int empty_layer_events = 0;

  initial begin
    roads = ref_roads(int'(PHI_BIN_MDEG));
    rst_n = 1'b0; wr_valid = 1'b0; wr_eoe = 1'b0; wr_layer = LAYER1; wr_hit = '0;
    // events: 0..12 full 10+102, 13 overfull layer 1 (dropped hits),
    // 14 empty layer 3, 15 small
    for (int e = 0; e < NEV; e++) begin
      nr = '{102, 102, 102};
      if (e == 13) nr = '{120, 102, 102};
      if (e == 14) nr = '{20, 30, 0};
      if (e == 15) nr = '{5, 8, 3};
      gen_event(e, (e == 14) ? 0 : (e == 15 ? 2 : 10), nr);
      if (e == 14) begin
        evh[e][2].delete();
        empty_layer_events++;
      end
      ev_full[e] = (evh[e][0].size() == 112 && evh[e][1].size() == 112 && evh[e][2].size() == 112);
      begin
        int c1, c2, c3;
        c1 = evh[e][0].size() < 112 ? evh[e][0].size() : 112;
        c2 = evh[e][1].size() < 112 ? evh[e][1].size() : 112;
        c3 = evh[e][2].size() < 112 ? evh[e][2].size() : 112;
        ev_len[e] = ((c1 > c3) ? c1 : c3) + c2 + 1;
      end
      if (evh[e][0].size() > int'(MAX_HITS)) n_dropped_exp += evh[e][0].size() - int'(MAX_HITS);
      reference(e);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    fork
      begin
        // the reader starts only once the host has been pushed back: the
        // result buffer (512) fills after 4 events, the engine then waits
        // for credits and the input buffer (1024 hits per layer) fills
        wait (bp_cycles > 50);
        read_on = 1;
      end
    join_none
    for (int e = 0; e < NEV; e++) begin
      for (int l = 0; l < 3; l++)
        for (int i = 0; i < evh[e][l].size(); i++) put(1'b0, l, evh[e][l][i]);
      put(1'b1, 0, '0);
    end
    wr_valid = 1'b0;
    while (expq.size() > 0) @(posedge clk);
    repeat (10) @(posedge clk);
    // mechanisms
    checks++;
    if (b2b == 0)           begin failures++; $display("FAIL no back-to-back event"); end
    checks++;
    if (n_refresh != NEV)   begin failures++; $display("FAIL %0d refreshes for %0d events", n_refresh, NEV); end
    checks++;
    if (stall_res == 0)     begin failures++; $display("FAIL result-credit stall never happened"); end
    checks++;
    if (bp_cycles == 0)     begin failures++; $display("FAIL input backpressure never happened"); end
    checks++;
    if (int'(hits_dropped) != n_dropped_exp || n_dropped_exp == 0)
                            begin failures++; $display("FAIL dropped %0d exp %0d", hits_dropped, n_dropped_exp); end
    checks++;
    if (n_zero == 0 || n_hit == 0) begin failures++; $display("FAIL coincidence outcomes %0d/%0d", n_zero, n_hit); end
    checks++;
    if (full_ok == 0)       begin failures++; $display("FAIL no full event timed"); end
    checks++;
    if (empty_layer_events == 0) begin failures++; $display("FAIL no empty-layer event"); end
    // the original design accepts more than 99% of good tracks
    checks++;
    if (good_found * 100 < good_total * 99)
                            begin failures++; $display("FAIL good-track efficiency %0d of %0d", good_found, good_total); end
    $display("results=%0d with coincidences=%0d without=%0d", nres, n_hit, n_zero);
    $display("good tracks found %0d of %0d", good_found, good_total);
    $display("back-to-back=%0d refreshes=%0d full events in 225 cycles=%0d credit-stall cycles=%0d backpressure cycles=%0d dropped=%0d",
             b2b, n_refresh, full_ok, stall_res, bp_cycles, hits_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
