// tb_phi_binning_run: drives one seeding engine built with a coarser phi bin
// (PB millidegree) through NEV events of 10 generated tracks plus 102
// random hits per layer and checks every result record against the
// real-arithmetic reference (Hough bands and a road map rebuilt for PB).
// It also times every event (112 + 112 + 1 cycles each) and counts
// the layer 2 hits with and without coincidences, and how many of the
// generated tracks were found.  Used by tb_phi_binning, which runs it for
// the 0.5 degree and the 2 degree binning; done rises when it has finished.
module tb_phi_binning_run
  import tts_pkg::*;
  import tts_ref_pkg::*;
#(
  parameter int PB  = 500,   // phi bin, millidegree
  parameter int NEV = 6
) (
  output bit done,
  output int checks,
  output int failures,
  output int n_zero,
  output int n_hit,
  output int good_total,
  output int good_found
);
  localparam int NP = int'(PHI_SPAN_MDEG) / PB;

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

  seeding_engine #(.PHI_BIN(PB)) dut (.*);

  hit_t evh [NEV][3][$];
  bit   b1 [NZ0][NZ][NP];
  bit   b3 [NZ0][NZ][NP];
  road_set_t roads;
  typedef struct { int ev, idx, cnt; hit_t h; logic [NZ0-1:0] mask; bit good; } exp_t;
  exp_t expq [$];
  exp_t x;

  function automatic hit_t make_hit(input real z_mm, input real phi_deg);
    hit_t h;
    int iz, ip;
    iz = int'($floor((z_mm + 1200.0) / 10.0));
    ip = int'($floor(phi_deg * 1000.0 / real'(PB)));
    if (iz < 0) iz = 0;
    if (iz > int'(NZ) - 1) iz = int'(NZ) - 1;
    if (ip < 0) ip = 0;
    if (ip > NP - 1) ip = NP - 1;
    h.nz = zbin_t'(iz);
    h.nphi = phibin_t'(ip);
    return h;
  endfunction

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  task automatic gen_event(input int e);
    real z0, z375, slope, phi2, kap, d, dphi;
    real radii [3];
    radii = '{250.0, 375.0, 525.0};
    for (int t = 0; t < 10; t++) begin
      z0    = urand(-95.0, 95.0);
      z375  = urand(-820.0, 820.0);   // keeps |z| < 1195 mm on layer 3
      slope = (z375 - z0) / 375.0;
      phi2  = urand(4.0, 12.0);
      kap   = urand(-0.6, 0.6);
      d     = urand(-2.0, 2.0);
      for (int l = 0; l < 3; l++) begin
        dphi = ref_dphi(radii[l], kap, d) * 180.0 / 3.14159265358979;
        evh[e][l].push_back(make_hit(z0 + slope * radii[l], phi2 + dphi));
      end
    end
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < 102; i++)
        evh[e][l].push_back(make_hit(urand(-1195.0, 1195.0),
                                     l == 1 ? urand(3.0, 12.99) : urand(0.9, 15.1)));
  endtask

  task automatic reference(input int e);
    int lo, hi, c, i1, i3;
    for (int k = 0; k < int'(NZ0); k++)
      for (int z = 0; z < int'(NZ); z++)
        for (int p = 0; p < NP; p++) begin b1[k][z][p] = 0; b3[k][z][p] = 0; end
    for (int i = 0; i < 112; i++)
      for (int k = 0; k < int'(NZ0); k++) begin
        if (ref_hough(int'(evh[e][0][i].nz), k, 250.0, NZ, 10, 20, lo, hi))
          for (int a = lo; a <= hi; a++) b1[k][a][int'(evh[e][0][i].nphi)] = 1;
        if (ref_hough(int'(evh[e][2][i].nz), k, 525.0, NZ, 10, 20, lo, hi))
          for (int a = lo; a <= hi; a++) b3[k][a][int'(evh[e][2][i].nphi)] = 1;
      end
    for (int i = 0; i < 112; i++) begin
      x.ev = e; x.idx = i; x.h = evh[e][1][i]; x.cnt = 0; x.mask = '0;
      x.good = (i < 10);
      for (int k = 0; k < int'(NZ0); k++) begin
        c = 0;
        foreach (roads[key]) begin
          i1 = int'(x.h.nphi) + road_o1(key);
          i3 = int'(x.h.nphi) + road_o3(key);
          if (i1 >= 0 && i1 < NP && i3 >= 0 && i3 < NP)
            if (b1[k][x.h.nz][i1] && b3[k][x.h.nz][i3]) c++;
        end
        x.cnt += c;
        if (c > 0) x.mask[k] = 1'b1;
      end
      expq.push_back(x);
    end
  endtask

  task automatic put(input logic eoe, input int l, input hit_t h);
    wr_valid = 1'b1; wr_eoe = eoe; wr_layer = layer_e'(l); wr_hit = h;
    #1;
    while (!wr_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
  endtask

  // host reader: always reading
  always @(negedge clk) res_rd_en <= 1'b1;

  always @(posedge clk) begin
    if (rst_n && res_rd_en && res_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL PB=%0d unexpected result", PB);
      end else begin
        x = expq.pop_front();
        if (int'(res_data.event_id) != x.ev || int'(res_data.hit_idx) != x.idx ||
            res_data.hit != x.h || int'(res_data.count) != x.cnt || res_data.z0_mask != x.mask) begin
          failures++;
          if (failures < 10)
            $display("FAIL PB=%0d ev %0d idx %0d count %0d exp %0d mask %b exp %b", PB,
                     x.ev, x.idx, res_data.count, x.cnt, res_data.z0_mask, x.mask);
        end
        if (x.cnt == 0) n_zero++; else n_hit++;
        if (x.good) begin good_total++; if (x.cnt > 0) good_found++; end
      end
    end
  end

  // every full event takes 112 + 112 + 1 cycles from its first fill cycle
  // to its refresh cycle
  int cyc = 0, start_cyc = 0, n_timed = 0;
  phase_e prev_phase = PH_IDLE;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if ((prev_phase == PH_IDLE || prev_phase == PH_REFRESH) && phase != PH_IDLE)
        start_cyc = cyc;
      if (phase == PH_REFRESH) begin
        checks++;
        n_timed++;
        if (cyc - start_cyc + 1 != 225) begin
          failures++;
          $display("FAIL PB=%0d event took %0d cycles", PB, cyc - start_cyc + 1);
        end
      end
      prev_phase = phase;
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0; n_zero = 0; n_hit = 0;
    good_total = 0; good_found = 0;
    roads = ref_roads(PB);
    rst_n = 1'b0; wr_valid = 1'b0; wr_eoe = 1'b0; wr_layer = LAYER1; wr_hit = '0;
    for (int e = 0; e < NEV; e++) begin
      gen_event(e);
      reference(e);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int e = 0; e < NEV; e++) begin
      for (int l = 0; l < 3; l++)
        for (int i = 0; i < 112; i++) put(1'b0, l, evh[e][l][i]);
      put(1'b1, 0, '0);
    end
    wr_valid = 1'b0;
    while (expq.size() > 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (n_timed == 0) begin failures++; $display("FAIL PB=%0d no event timed", PB); end
    checks++;
    if (n_zero == 0 || n_hit == 0) begin failures++; $display("FAIL PB=%0d outcomes %0d/%0d", PB, n_zero, n_hit); end
    checks++;
    if (good_found * 100 < good_total * 99) begin
      failures++;
      $display("FAIL PB=%0d good tracks found %0d of %0d", PB, good_found, good_total);
    end
    done = 1;
  end
endmodule
