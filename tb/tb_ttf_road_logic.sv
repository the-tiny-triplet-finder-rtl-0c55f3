// tb_ttf_road_logic: drives sparse random shifted windows into the road
// logic and compares the number of fired roads with a count over the road
// set that the reference package derives with real arithmetic.  Also checks
// single-hit pairs on and off a road.
module tb_ttf_road_logic;
  import tts_pkg::*;
  import tts_ref_pkg::*;

  localparam int unsigned W1 = road_halfwidth(int'(R1_MM), int'(PHI_BIN_MDEG));
  localparam int unsigned W3 = road_halfwidth(int'(R3_MM), int'(PHI_BIN_MDEG));
  localparam int unsigned NW = $clog2((2*W1+1)*(2*W3+1)+1);

  logic [2*W1:0] s1;
  logic [2*W3:0] s3;
  logic [NW-1:0] n_fired;
  int checks = 0, failures = 0;
  road_set_t roads;
  int exp_n, o1, o3;

  ttf_road_logic dut (.*);

  function automatic int ref_count(input logic [2*W1:0] a, input logic [2*W3:0] b);
    int n = 0;
    foreach (roads[key]) begin
      o1 = road_o1(key);
      o3 = road_o3(key);
      if (o1 >= -int'(W1) && o1 <= int'(W1) && o3 >= -int'(W3) && o3 <= int'(W3))
        if (a[o1 + int'(W1)] && b[o3 + int'(W3)]) n++;
    end
    return n;
  endfunction

  initial begin
    roads = ref_roads(int'(PHI_BIN_MDEG));
    // every road must fit the window the RTL derived
    foreach (roads[key]) begin
      checks++;
      if (road_o1(key) < -int'(W1) || road_o1(key) > int'(W1) ||
          road_o3(key) < -int'(W3) || road_o3(key) > int'(W3)) begin
        failures++;
        $display("FAIL road (%0d,%0d) outside window W1=%0d W3=%0d", road_o1(key), road_o3(key), W1, W3);
      end
    end
    $display("roads=%0d W1=%0d W3=%0d", roads.num(), W1, W3);
    // single bit pairs: exhaustive
    for (int i1 = 0; i1 <= 2 * int'(W1); i1++)
      for (int i3 = 0; i3 <= 2 * int'(W3); i3++) begin
        s1 = '0; s3 = '0; s1[i1] = 1'b1; s3[i3] = 1'b1;
        #1;
        exp_n = roads.exists((i1 - int'(W1) + RMAX) * 1024 + (i3 - int'(W3) + RMAX)) ? 1 : 0;
        checks++;
        if (int'(n_fired) != exp_n) begin
          failures++;
          if (failures < 10) $display("FAIL pair o1=%0d o3=%0d got %0d exp %0d", i1 - int'(W1), i3 - int'(W3), n_fired, exp_n);
        end
      end
    // random sparse and dense windows
    for (int t = 0; t < 500; t++) begin
      s1 = '0; s3 = '0;
      for (int h = 0; h < 1 + (t % 12); h++) begin
        s1[$urandom_range(2 * W1)] = 1'b1;
        s3[$urandom_range(2 * W3)] = 1'b1;
      end
      #1;
      exp_n = ref_count(s1, s3);
      checks++;
      if (int'(n_fired) != exp_n) begin
        failures++;
        if (failures < 10) $display("FAIL random t=%0d got %0d exp %0d", t, n_fired, exp_n);
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
