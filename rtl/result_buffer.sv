// result_buffer: buffer memory that collects the engine's coincidence
// results for the host.
//
// Every layer 2 hit produces one result record (tts_pkg::result_t: event
// number, hit index, the hit, the mask of z0 rows with coincidences and the
// coincidence count), written at an incrementing write address during the
// search phase; the paper observes one bit of that address on its scope.
// Results with count 0 are kept too, so the host sees every hit and can
// histogram the number of coincidences per hit; a later stage would forward
// only the records with count > 0.
//
// The storage is a circular FIFO of DEPTH records with a show-ahead read
// port: rd_valid/rd_data present the oldest record, rd_en removes it.  The
// sequencer's credit scheme guarantees that a write never finds the buffer
// full; an assertion checks it, and such a write would be dropped.  The FIFO
// organisation and DEPTH are this design's choices.
module result_buffer
  import tts_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  result_t                   wr_data,
  output logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic                      rd_en,
  output logic                      rd_valid,
  output result_t                   rd_data,
  output logic [$clog2(DEPTH):0]    level
);

  localparam int unsigned AW = $clog2(DEPTH);

  result_t     mem [DEPTH];
  logic [AW:0] wp, rp;
  logic        full;

  assign level    = wp - rp;
  assign full     = level == (AW+1)'(DEPTH);
  assign rd_valid = (wp != rp);
  assign rd_data  = mem[rp[AW-1:0]];
  assign wr_addr  = wp[AW-1:0];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full)    wp <= wp + 1'b1;
      if (rd_en && rd_valid) rp <= rp + 1'b1;
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> !full);

endmodule
