// tiny_triplet_finder: r-phi coincidence search for one layer 2 hit per
// clock, over all z0 rows at once.
//
// For every z0 row the hit storage blocks deliver the layer 1 and layer 3
// phi bitmaps of the column at the layer 2 hit's z375 bin (so the r-z
// constraint has already been applied by the Hough addressing).  The finder
// shifts both bitmaps by the layer 2 phi bin (ttf_shifter), applies the one
// fixed set of roads (ttf_road_logic) and counts the roads that fired.
// Instead of one set of roads per phi position, as a plain road search would
// need, only one set exists and the hit patterns are moved to it; this is
// the Tiny Triplet Finder scheme of the paper.
//
// Pipeline (this design's choice, one hit accepted every clock):
//   stage 1  shift both patterns of every row        (registered)
//   stage 2  road coincidences, count per row         (registered)
//   stage 3  sum over rows, saturate to CW bits       (registered)
// in_valid/tag in cycle t give out_valid/out_tag, count and z0_mask in
// cycle t+3.  z0_mask bit k is set when row k had at least one coincidence.
module tiny_triplet_finder
  import tts_pkg::*;
#(
  parameter int unsigned N_Z0    = NZ0,
  parameter int unsigned N_PHI   = NPHI,
  parameter int unsigned PHI_BIN = PHI_BIN_MDEG,
  parameter int unsigned TAG_W   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N_PHI-1:0]  p1 [N_Z0],
  input  logic [N_PHI-1:0]  p3 [N_Z0],
  input  phibin_t           phi2,
  input  logic [TAG_W-1:0]  tag,
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output logic [CW-1:0]     count,
  output logic [N_Z0-1:0]   z0_mask
);

  localparam int unsigned W1 = road_halfwidth(int'(R1_MM), int'(PHI_BIN));
  localparam int unsigned W3 = road_halfwidth(int'(R3_MM), int'(PHI_BIN));
  localparam int unsigned NW = $clog2((2*W1+1)*(2*W3+1)+1);
  localparam int unsigned SW = NW + $clog2(N_Z0 + 1);

  // ---------------- stage 1: shifters ----------------
  logic [2*W1:0] s1_c [N_Z0];
  logic [2*W3:0] s3_c [N_Z0];
  logic [2*W1:0] s1_q [N_Z0];
  logic [2*W3:0] s3_q [N_Z0];
  logic          v1;
  logic [TAG_W-1:0] tag1;

  for (genvar k = 0; k < int'(N_Z0); k++) begin : g_shift
    ttf_shifter #(.N_PHI(N_PHI), .W(W1)) u_sh1 (.pattern(p1[k]), .shift(phi2), .out(s1_c[k]));
    ttf_shifter #(.N_PHI(N_PHI), .W(W3)) u_sh3 (.pattern(p3[k]), .shift(phi2), .out(s3_c[k]));
  end

  always_ff @(posedge clk) begin
    s1_q <= s1_c;
    s3_q <= s3_c;
    tag1 <= tag;
  end

  // ---------------- stage 2: roads ----------------
  logic [NW-1:0] n_c [N_Z0];
  logic [NW-1:0] n_q [N_Z0];
  logic          v2;
  logic [TAG_W-1:0] tag2;

  for (genvar k = 0; k < int'(N_Z0); k++) begin : g_road
    ttf_road_logic #(.PHI_BIN(PHI_BIN), .W1(W1), .W3(W3), .NW(NW)) u_roads (
      .s1(s1_q[k]), .s3(s3_q[k]), .n_fired(n_c[k]));
  end

  always_ff @(posedge clk) begin
    n_q  <= n_c;
    tag2 <= tag1;
  end

  // ---------------- stage 3: sum over z0 rows ----------------
  logic [SW-1:0]   sum_c;
  logic [N_Z0-1:0] mask_c;

  always_comb begin
    sum_c = '0;
    for (int k = 0; k < int'(N_Z0); k++) begin
      sum_c     += SW'(n_q[k]);
      mask_c[k]  = (n_q[k] != '0);
    end
  end

  always_ff @(posedge clk) begin
    z0_mask <= mask_c;
    if (SW > CW && (sum_c >> CW) != '0) count <= '1;
    else                                count <= CW'(sum_c);
    out_tag <= tag2;
  end

  // valid pipeline
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end

endmodule
