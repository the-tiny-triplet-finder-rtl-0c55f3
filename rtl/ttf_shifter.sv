// ttf_shifter: the shifter of the Tiny Triplet Finder.
//
// Rotates one layer's phi hit pattern so that the bin of the layer 2 hit
// lands in the middle of a window of 2*W+1 bins: out[j] = pattern[shift+j-W],
// zero where that index lies outside the pattern.  After the shift, every
// layer 2 hit sees its neighbourhood at the same positions, so one fixed set
// of coincidence roads serves all phi positions; this is the central idea of
// the Tiny Triplet Finder as the paper describes it.  The window half width W
// comes from the road map (tts_pkg::road_halfwidth).
//
// Purely combinational: a barrel shifter of N_PHI inputs to 2*W+1 outputs.
module ttf_shifter
  import tts_pkg::*;
#(
  parameter int unsigned N_PHI = NPHI,
  parameter int unsigned W     = road_halfwidth(int'(R1_MM), int'(PHI_BIN_MDEG))
) (
  input  logic [N_PHI-1:0] pattern,
  input  phibin_t          shift,
  output logic [2*W:0]     out
);

  always_comb begin
    for (int j = 0; j <= 2 * int'(W); j++) begin
      int src;
      src = int'(shift) + j - int'(W);
      out[j] = (src >= 0 && src < int'(N_PHI)) ? pattern[src] : 1'b0;
    end
  end

endmodule
