// z_hough_rom: r-z Hough transform lookup table for one outer layer.
//
// A hit on layer 1 (R_MM = 250) or layer 3 (R_MM = 525) with z bin nZ lies,
// for every z0 bin of the collision region, on a band of straight r-z
// lines; the ROM returns, for each of the NZ0 z0 rows, the first z375 bin
// of that band at r = 375 mm (the layer 2 radius) and the number of bins it
// covers (0 when it falls outside the NZ bins).  This is the "ROM" box in
// front of each hit storage block: one input bin, one output per z0 row.
//
// The table (NZ x NZ0 entries) is computed at elaboration time by
// tts_pkg::hough_z375_range from the corners of the (z bin, z0 bin) cell.
// In the original firmware the contents came from a file made by
// simulation software and are not published, so the band rule is this
// design's; with 1 cm z bins and 2 cm z0 bins it spans up to 3 bins for
// either layer, which keeps real tracks from being lost to bin
// quantisation.
//
// Interface and timing: the lookup is registered like a block-RAM ROM.
// en/nz presented in cycle t give addr/span in cycle t+1; with en low the
// outputs hold.
module z_hough_rom
  import tts_pkg::*;
#(
  parameter int unsigned R_MM      = R1_MM,
  parameter int unsigned N_Z       = NZ,
  parameter int unsigned N_Z0      = NZ0,
  parameter int unsigned ZBIN_MM   = Z_BIN_MM,
  parameter int unsigned Z0BIN_MM  = Z0_BIN_MM
) (
  input  logic                 clk,
  input  logic                 en,
  input  zbin_t                nz,
  output zbin_t                addr [N_Z0],   // first z375 bin of the band
  output logic [SPW-1:0]       span [N_Z0]    // bins in the band, 0 = none
);

  localparam int unsigned EWID = ZW + SPW;  // {span, first bin}

  typedef logic [N_Z*N_Z0*EWID-1:0] table_t;

  function automatic table_t build_table();
    table_t t;
    int v, lo, hi;
    t = table_t'(0);
    for (int kz = 0; kz < int'(N_Z); kz++) begin
      for (int k0 = 0; k0 < int'(N_Z0); k0++) begin
        v = hough_z375_range(kz, k0, int'(R_MM), int'(N_Z), int'(ZBIN_MM), int'(Z0BIN_MM));
        if (v >= 0) begin
          lo = v / 65536;
          hi = v % 65536;
          t[(kz*N_Z0 + k0)*EWID +: EWID] = {SPW'(hi - lo + 1), ZW'(lo)};
        end
      end
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_ff @(posedge clk) begin
    if (en) begin
      for (int k0 = 0; k0 < int'(N_Z0); k0++) begin
        if (32'(nz) < N_Z) begin
          {span[k0], addr[k0]} <= TABLE[(32'(nz)*N_Z0 + k0)*EWID +: EWID];
        end else begin
          span[k0] <= '0;
          addr[k0] <= '0;
        end
      end
    end
  end

endmodule
