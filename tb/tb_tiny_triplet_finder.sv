// tb_tiny_triplet_finder: streams one random layer 2 hit per clock (random
// sparse layer 1 / layer 3 columns for all z0 rows) through the finder and
// compares count and z0 mask with a direct evaluation of the road set on
// the unshifted bitmaps.  Checks the 3-cycle latency and that a new hit is
// accepted every clock.
module tb_tiny_triplet_finder;
  import tts_pkg::*;
  import tts_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, out_valid;
  logic [NPHI-1:0] p1 [NZ0];
  logic [NPHI-1:0] p3 [NZ0];
  phibin_t phi2;
  logic [7:0] tag, out_tag;
  logic [CW-1:0] count;
  logic [NZ0-1:0] z0_mask;

  tiny_triplet_finder dut (.*);

  int checks = 0, failures = 0;
  road_set_t roads;
  typedef struct { int cnt; logic [NZ0-1:0] mask; int issued; } exp_t;
  exp_t expq [$];
  int cycle = 0;
  int nonzero = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t reference(input int ph);
    exp_t e;
    int c, i1, i3;
    e.cnt = 0; e.mask = '0;
    for (int k = 0; k < int'(NZ0); k++) begin
      c = 0;
      foreach (roads[key]) begin
        i1 = ph + road_o1(key);
        i3 = ph + road_o3(key);
        if (i1 >= 0 && i1 < int'(NPHI) && i3 >= 0 && i3 < int'(NPHI))
          if (p1[k][i1] && p3[k][i3]) c++;
      end
      e.cnt += c;
      if (c > 0) e.mask[k] = 1'b1;
    end
    return e;
  endfunction

  exp_t ex;

  initial begin
    roads = ref_roads(int'(PHI_BIN_MDEG));
    rst_n = 1'b0; in_valid = 1'b0; phi2 = '0; tag = '0;
    for (int k = 0; k < int'(NZ0); k++) begin p1[k] = '0; p3[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      tag = 8'(t);
      phi2 = phibin_t'($urandom_range(NPHI - 1));
      for (int k = 0; k < int'(NZ0); k++) begin
        p1[k] = '0; p3[k] = '0;
        for (int h = 0; h < int'($urandom_range(t % 9)); h++) begin
          p1[k][$urandom_range(NPHI - 1)] = 1'b1;
          p3[k][$urandom_range(NPHI - 1)] = 1'b1;
        end
        // plant hits near the layer 2 phi to make coincidences likely
        if ($urandom_range(3) == 0) begin
          if (int'(phi2) >= 5) p1[k][int'(phi2) - 5] = 1'b1;
          if (int'(phi2) + 6 < int'(NPHI)) p3[k][int'(phi2) + 6] = 1'b1;
        end
      end
      ex = reference(int'(phi2));
      ex.issued = cycle;
      expq.push_back(ex);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    $display("hits with coincidences: %0d of 400", nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tag_exp = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        ex = expq.pop_front();
        if (ex.cnt > 0) nonzero++;
        if (int'(count) != ex.cnt || z0_mask != ex.mask || int'(out_tag) != (tag_exp % 256)
            || cycle - ex.issued != 3) begin
          failures++;
          if (failures < 10)
            $display("FAIL tag=%0d count=%0d exp %0d mask=%b exp %b latency=%0d",
                     out_tag, count, ex.cnt, z0_mask, ex.mask, cycle - ex.issued);
        end
      end
      tag_exp++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
