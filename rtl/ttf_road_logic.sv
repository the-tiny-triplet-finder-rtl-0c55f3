// ttf_road_logic: the single set of coincidence roads of the Tiny Triplet
// Finder, for one z0 row.
//
// Inputs are the layer 1 and layer 3 phi windows after the shifters, centred
// on the layer 2 hit (index W1 of s1 and W3 of s3 is the layer 2 phi bin).
// A road is a pair of offsets (o1, o3); it fires when s1[W1+o1] and
// s3[W3+o3] are both set.  The road map is the set of offset pairs a track
// above the minimum transverse momentum, from a vertex displaced by up to
// the maximum, can produce: it is computed at elaboration by scanning
// curvature and displacement (tts_pkg::phi_offset_floor) and taking for
// each layer the floor bin and the next one, which covers the bin
// quantisation of the two hits.  The paper generates this map with its
// simulation software; the scan is this design's stand-in.
//
// Output: the number of roads that fired (combinational).
module ttf_road_logic
  import tts_pkg::*;
#(
  parameter int unsigned PHI_BIN = PHI_BIN_MDEG,
  parameter int unsigned W1      = road_halfwidth(int'(R1_MM), int'(PHI_BIN)),
  parameter int unsigned W3      = road_halfwidth(int'(R3_MM), int'(PHI_BIN)),
  parameter int unsigned NW      = $clog2((2*W1+1)*(2*W3+1)+1)
) (
  input  logic [2*W1:0]  s1,
  input  logic [2*W3:0]  s3,
  output logic [NW-1:0]  n_fired
);

  localparam int unsigned N1 = 2 * W1 + 1;
  localparam int unsigned N3 = 2 * W3 + 1;

  typedef logic [N1*N3-1:0] map_t;

  function automatic map_t build_map();
    map_t m;
    int o1, o3;
    m = '0;
    for (int ki = -KAPPA_STEPS; ki <= KAPPA_STEPS; ki++) begin
      for (int di = -D_STEPS; di <= D_STEPS; di++) begin
        o1 = phi_offset_floor(int'(R1_MM), ki, di, int'(PHI_BIN));
        o3 = phi_offset_floor(int'(R3_MM), ki, di, int'(PHI_BIN));
        for (int a = 0; a <= 1; a++) begin
          for (int b = 0; b <= 1; b++) begin
            if (o1 + a >= -int'(W1) && o1 + a <= int'(W1) &&
                o3 + b >= -int'(W3) && o3 + b <= int'(W3))
              m[(o1 + a + int'(W1)) * N3 + (o3 + b + int'(W3))] = 1'b1;
          end
        end
      end
    end
    return m;
  endfunction

  localparam map_t ROAD_MAP = build_map();

  logic [N1*N3-1:0] fired;

  for (genvar i1 = 0; i1 < int'(N1); i1++) begin : g_o1
    for (genvar i3 = 0; i3 < int'(N3); i3++) begin : g_o3
      if (ROAD_MAP[i1*N3 + i3]) begin : g_road
        assign fired[i1*N3 + i3] = s1[i1] & s3[i3];
      end else begin : g_none
        assign fired[i1*N3 + i3] = 1'b0;
      end
    end
  end

  always_comb begin
    n_fired = '0;
    for (int i = 0; i < int'(N1 * N3); i++) n_fired += NW'(fired[i]);
  end

endmodule
