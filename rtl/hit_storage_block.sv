// hit_storage_block: register-like storage block holding one outer layer's
// hits of the current event as a bitmap over (z375 bin, z0 bin, phi bin).
//
// For each of the N_Z0 z0 rows there is one memory of N_Z words (one word
// per z375 bin) of N_PHI bits (one bit per phi bin).  A hit is written into
// all rows in one cycle: in row k it sets bit wr_phi in the span[k]
// consecutive words starting at wr_addr[k], the band the Hough ROM gave for
// that row.  So that a band of up to NBANK words can be written in one
// clock, each row memory is split into NBANK banks by word address modulo
// NBANK; a band of at most NBANK consecutive words touches each bank at
// most once.  A layer 2 hit reads one word per row at its own z375 bin,
// which is the column the Tiny Triplet Finder needs.
//
// The register-like part: beside every word sits a flip-flop flag that
// says whether the word holds data of the current event.  refresh clears all
// flags in one clock, which empties the whole block without touching the
// memories.  A write to a word whose flag is low stores the one-hot pattern
// (discarding the stale word) and raises the flag; a write to a flagged word
// sets one more bit; a read of an unflagged word returns zero.  The bitmap
// layout and the one-cycle refresh follow the paper; the flag-per-word
// mechanism, the bit-masked write and the banking are this design's choice
// of how to get them.
//
// Timing: writes take effect at the clock edge; reads are registered
// (rd_addr in cycle t, rd_data in cycle t+1) and see writes of earlier
// cycles.  refresh in cycle t clears the block for cycle t+1 onward; it must
// not coincide with a write.  The synchronous reset clears the flags too.
// span[k] must not exceed NBANK.
module hit_storage_block
  import tts_pkg::*;
#(
  parameter int unsigned N_Z   = NZ,
  parameter int unsigned N_Z0  = NZ0,
  parameter int unsigned N_PHI = NPHI,
  parameter int unsigned NB    = NBANK
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              refresh,
  // write port: one hit, all z0 rows at once
  input  logic              wr_en,
  input  zbin_t             wr_addr [N_Z0],
  input  logic [SPW-1:0]    wr_span [N_Z0],
  input  phibin_t           wr_phi,
  // read port: one z375 column, all z0 rows at once
  input  logic              rd_en,
  input  zbin_t             rd_addr,
  output logic [N_PHI-1:0]  rd_data [N_Z0]
);

  localparam int unsigned BD = (N_Z + NB - 1) / NB;   // words per bank

  logic [N_PHI-1:0] wbit;
  assign wbit = N_PHI'(1) << wr_phi;

  for (genvar k = 0; k < int'(N_Z0); k++) begin : g_row
    logic [N_Z-1:0] vld;
    logic [NB-1:0]  bw_en;            // bank j is written this cycle
    int unsigned    bw_col [NB];      // word (z375 bin) written in bank j
    logic [N_PHI-1:0] brd [NB];       // registered bank read data
    logic           rd_vld;
    logic [$clog2(NB > 1 ? NB : 2)-1:0] rd_bank;

    // which word of the band falls into each bank
    always_comb begin
      for (int j = 0; j < int'(NB); j++) begin
        bw_col[j] = 32'(wr_addr[k]) + ((32'(j) + NB - (32'(wr_addr[k]) % NB)) % NB);
        bw_en[j]  = wr_en && (bw_col[j] - 32'(wr_addr[k]) < 32'(wr_span[k])) && (bw_col[j] < N_Z);
      end
    end

    // current-event flags: cleared by reset or refresh in a single cycle
    always_ff @(posedge clk) begin
      if (!rst_n || refresh) begin
        vld <= '0;
      end else begin
        for (int j = 0; j < int'(NB); j++)
          if (bw_en[j]) vld[bw_col[j]] <= 1'b1;
      end
    end

    for (genvar j = 0; j < int'(NB); j++) begin : g_bank
      logic [N_PHI-1:0] mem [BD];
      logic [N_PHI-1:0] wmask;

      // per-bit enables: only the hit's bit in a live word, every bit
      // (hit's bit set, rest cleared) in a stale word
      assign wmask = vld[bw_col[j]] ? wbit : '1;

      always_ff @(posedge clk) begin
        if (bw_en[j]) begin
          for (int i = 0; i < int'(N_PHI); i++)
            if (wmask[i]) mem[bw_col[j] / NB][i] <= wbit[i];
        end
      end

      always_ff @(posedge clk) begin
        if (rd_en) brd[j] <= mem[(32'(rd_addr) / NB) % BD];
      end
    end

    always_ff @(posedge clk) begin
      if (rd_en) begin
        rd_vld  <= (32'(rd_addr) < N_Z) && vld[rd_addr];
        rd_bank <= $bits(rd_bank)'(32'(rd_addr) % NB);
      end
    end

    assign rd_data[k] = rd_vld ? brd[rd_bank] : '0;
  end

  // refresh and write are issued in different pipeline slots
  a_no_refresh_during_write: assert property (@(posedge clk) disable iff (!rst_n)
    !(refresh && wr_en));

endmodule
