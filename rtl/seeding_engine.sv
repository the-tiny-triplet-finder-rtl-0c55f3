// seeding_engine: 3D track segment seeding engine built around the Tiny
// Triplet Finder, for one 10-degree x 240 cm sector of a three-layer barrel.
//
// An event is processed in two passes over its hits and one refresh cycle:
//   * fill: each layer 1 hit and each layer 3 hit (one of each per clock)
//     goes through its r-z Hough ROM, which gives for every z0 row the band
//     of z375 columns consistent with the hit, and sets the hit's phi bit in
//     those columns of its layer's hit storage block;
//   * search: each layer 2 hit (one per clock) reads the column at its own
//     z375 bin from both storage blocks, so only outer-layer hits that lie
//     on a common r-z line with it through some z0 bin are left; the Tiny
//     Triplet Finder then checks the r-phi curvature constraint with one
//     shared set of roads and counts the coincidences;
//   * refresh: both storage blocks are cleared in a single clock.
// The result of each layer 2 hit is written to the result buffer.  Combining
// the r-z Hough space with the r-phi Tiny Triplet Finder is what makes the
// search 3D; all of this structure follows the paper.
//
// Pipeline (slot issued by the sequencer in cycle t):
//   t    sequencer strobe, input buffer read
//   t+1  hit data; Hough ROM lookup
//   t+2  storage block write (fill) or read (search); refresh applied
//   t+3  column data into the Tiny Triplet Finder
//   t+6  result written into the result buffer
// Fill, search and refresh all reach the storage blocks two cycles after
// issue, so back-to-back phases and events never overlap there.  The
// latencies are this design's own; the paper gives only the per-phase cycle
// counts (112 + 112 + 1 for 112 hits per layer), which the sequencer keeps.
// The slot record is delayed as a whole; at its last stage only the search
// flag, hit index and event number are used, so a lint tool reports the
// fill and refresh flags there as unused bits.  They are left in to keep
// one record type for every stage.
//
// Host side (stands in for the paper's USB link, which is not part of this
// RTL): hits and end-of-event words are written with a valid/ready
// handshake; results are read from a show-ahead FIFO.  phase, refresh and
// res_wr_addr are brought out for observation, like the scope probes of the
// paper's test stand.
module seeding_engine
  import tts_pkg::*;
#(
  parameter int unsigned PHI_BIN   = PHI_BIN_MDEG,   // phi bin, millidegree
  parameter int unsigned N_Z       = NZ,
  parameter int unsigned N_Z0      = NZ0,
  parameter int unsigned IN_DEPTH  = 1024,
  parameter int unsigned EV_DEPTH  = 8,
  parameter int unsigned RES_DEPTH = 512,
  parameter int unsigned N_PHI     = PHI_SPAN_MDEG / PHI_BIN
) (
  input  logic        clk,
  input  logic        rst_n,
  // host write port
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic        wr_eoe,
  input  layer_e      wr_layer,
  input  hit_t        wr_hit,
  // host result port
  input  logic        res_rd_en,
  output logic        res_valid,
  output result_t     res_data,
  // status and observation
  output phase_e      phase,
  output logic        refresh,
  output logic [$clog2(RES_DEPTH)-1:0] res_wr_addr,
  output logic [15:0] hits_dropped,
  output logic [15:0] stall_res,
  output logic [$clog2(RES_DEPTH):0]   res_level
);

  localparam int unsigned TAG_W = EW + HW + $bits(hit_t);

  // ---------------- input buffer and sequencer ----------------
  logic       ev_valid, ev_pop;
  ev_counts_t ev_counts;
  logic       pop1, pop2, pop3, seq_refresh;
  logic [HW-1:0] seq_idx;
  logic [EW-1:0] seq_event;
  hit_t       hit1, hit2, hit3;
  logic       res_pop;

  hit_input_buffer #(.DEPTH(IN_DEPTH), .EV_DEPTH(EV_DEPTH)) u_in (
    .clk, .rst_n,
    .wr_valid, .wr_ready, .wr_eoe, .wr_layer, .wr_hit, .hits_dropped,
    .ev_valid, .ev_counts, .ev_pop,
    .pop1, .pop2, .pop3, .hit1, .hit2, .hit3);

  assign res_pop = res_rd_en && res_valid;

  seeding_sequencer #(.RES_DEPTH(RES_DEPTH)) u_seq (
    .clk, .rst_n,
    .ev_valid, .ev_counts, .ev_pop, .res_rd(res_pop),
    .pop1, .pop2, .pop3, .refresh(seq_refresh),
    .hit_idx(seq_idx), .event_id(seq_event), .phase, .stall_res);

  // ---------------- slot sideband pipeline ----------------
  typedef struct packed {
    logic          v1, v2, v3, refresh;
    logic [HW-1:0] idx;
    logic [EW-1:0] event_id;
  } slot_t;

  slot_t   sl1, sl2, sl3;
  phibin_t phi1_q, phi3_q;   // t+2
  hit_t    hit2_q, hit2_qq;  // t+2, t+3

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sl1 <= '0; sl2 <= '0; sl3 <= '0;
    end else begin
      sl1 <= '{v1: pop1, v2: pop2, v3: pop3, refresh: seq_refresh,
               idx: seq_idx, event_id: seq_event};
      sl2 <= sl1;
      sl3 <= sl2;
    end
  end

  always_ff @(posedge clk) begin
    phi1_q  <= hit1.nphi;
    phi3_q  <= hit3.nphi;
    hit2_q  <= hit2;
    hit2_qq <= hit2_q;
  end

  // ---------------- Hough ROMs (t+1 -> t+2) ----------------
  zbin_t          a1 [N_Z0];
  zbin_t          a3 [N_Z0];
  logic [SPW-1:0] sp1 [N_Z0];
  logic [SPW-1:0] sp3 [N_Z0];

  z_hough_rom #(.R_MM(R1_MM), .N_Z(N_Z), .N_Z0(N_Z0)) u_rom1 (
    .clk, .en(sl1.v1), .nz(hit1.nz), .addr(a1), .span(sp1));
  z_hough_rom #(.R_MM(R3_MM), .N_Z(N_Z), .N_Z0(N_Z0)) u_rom3 (
    .clk, .en(sl1.v3), .nz(hit3.nz), .addr(a3), .span(sp3));

  // a Hough band must fit the storage block's banks
  if (hough_max_span(int'(R1_MM), int'(N_Z), int'(Z_BIN_MM), int'(Z0_BIN_MM), int'(N_Z0)) > int'(NBANK) ||
      hough_max_span(int'(R3_MM), int'(N_Z), int'(Z_BIN_MM), int'(Z0_BIN_MM), int'(N_Z0)) > int'(NBANK))
    begin : g_span_check
      $error("Hough band wider than NBANK");
    end

  // ---------------- hit storage blocks (t+2 -> t+3) ----------------
  logic [N_PHI-1:0] col1 [N_Z0];
  logic [N_PHI-1:0] col3 [N_Z0];

  hit_storage_block #(.N_Z(N_Z), .N_Z0(N_Z0), .N_PHI(N_PHI)) u_store1 (
    .clk, .rst_n, .refresh(sl2.refresh),
    .wr_en(sl2.v1), .wr_addr(a1), .wr_span(sp1), .wr_phi(phi1_q),
    .rd_en(sl2.v2), .rd_addr(hit2_q.nz), .rd_data(col1));

  hit_storage_block #(.N_Z(N_Z), .N_Z0(N_Z0), .N_PHI(N_PHI)) u_store3 (
    .clk, .rst_n, .refresh(sl2.refresh),
    .wr_en(sl2.v3), .wr_addr(a3), .wr_span(sp3), .wr_phi(phi3_q),
    .rd_en(sl2.v2), .rd_addr(hit2_q.nz), .rd_data(col3));

  assign refresh = sl2.refresh;

  // ---------------- Tiny Triplet Finder (t+3 -> t+6) ----------------
  logic              ttf_valid;
  logic [TAG_W-1:0]  ttf_tag;
  logic [CW-1:0]     ttf_count;
  logic [N_Z0-1:0]   ttf_mask;

  tiny_triplet_finder #(.N_Z0(N_Z0), .N_PHI(N_PHI), .PHI_BIN(PHI_BIN), .TAG_W(TAG_W)) u_ttf (
    .clk, .rst_n,
    .in_valid(sl3.v2), .p1(col1), .p3(col3), .phi2(hit2_qq.nphi),
    .tag({sl3.event_id, sl3.idx, hit2_qq}),
    .out_valid(ttf_valid), .out_tag(ttf_tag), .count(ttf_count), .z0_mask(ttf_mask));

  // ---------------- result buffer ----------------
  result_t res_w;

  always_comb begin
    res_w          = '0;
    {res_w.event_id, res_w.hit_idx, res_w.hit} = ttf_tag;
    res_w.z0_mask  = NZ0'(ttf_mask);
    res_w.count    = ttf_count;
  end

  result_buffer #(.DEPTH(RES_DEPTH)) u_res (
    .clk, .rst_n,
    .wr_en(ttf_valid), .wr_data(res_w), .wr_addr(res_wr_addr),
    .rd_en(res_rd_en), .rd_valid(res_valid), .rd_data(res_data), .level(res_level));

endmodule
