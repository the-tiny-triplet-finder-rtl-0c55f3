// hit_input_buffer: event buffer between the host link and the engine.
//
// The host writes the hits of an event one at a time, each tagged with its
// layer, and closes the event with an end-of-event word.  Hits go into one
// circular RAM per layer; the end-of-event word pushes the event's three hit
// counts into a small event FIFO.  Several complete events can wait here, so
// the engine can run them in a burst with no gaps, as in the paper's test
// stand where events were first loaded into a memory buffer in the FPGA.
// Layers 1 and 3 are read in parallel during the fill phase and layer 2 in
// the search phase, one hit per layer per clock.
//
// The paper gives only the buffer's role.  Everything else is this design's
// choice: the per-layer RAMs, the count FIFO, DEPTH and EV_DEPTH, and the
// rule that hits beyond MAX_H in one layer of one event are dropped (and
// counted in hits_dropped) so that an event never exceeds what the engine
// was sized for.
//
// Write port: wr_valid/wr_ready handshake.  wr_eoe=1 is an end-of-event
// word (wr_layer/wr_hit ignored) and waits for room in the event FIFO; a hit
// waits for room in its layer RAM.
// Read port: ev_valid/ev_counts show the oldest complete event, ev_pop
// removes it.  popN reads the next hit of layer N; the hit appears on hitN
// in the next cycle (registered RAM read).
module hit_input_buffer
  import tts_pkg::*;
#(
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned EV_DEPTH = 8,
  parameter int unsigned MAX_H    = MAX_HITS
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic        wr_eoe,
  input  layer_e      wr_layer,
  input  hit_t        wr_hit,
  output logic [15:0] hits_dropped,
  // engine side
  output logic        ev_valid,
  output ev_counts_t  ev_counts,
  input  logic        ev_pop,
  input  logic        pop1,
  input  logic        pop2,
  input  logic        pop3,
  output hit_t        hit1,
  output hit_t        hit2,
  output hit_t        hit3
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned EAW = $clog2(EV_DEPTH);

  // ---------------- per-layer hit RAMs ----------------
  hit_t        ram [3][DEPTH];
  logic [AW:0] wp [3];
  logic [AW:0] rp [3];
  logic [HW:0] cur_n [3];     // hits of the open event, per layer
  logic [2:0]  layer_full;
  logic [2:0]  pop;

  assign pop = {pop3, pop2, pop1};

  for (genvar l = 0; l < 3; l++) begin : g_full
    assign layer_full[l] = (wp[l] - rp[l]) == (AW+1)'(DEPTH);
  end

  // ---------------- event count FIFO ----------------
  ev_counts_t   ev_mem [EV_DEPTH];
  logic [EAW:0] ev_wp, ev_rp;
  logic         ev_full;

  assign ev_full   = (ev_wp - ev_rp) == (EAW+1)'(EV_DEPTH);
  assign ev_valid  = (ev_wp != ev_rp);
  assign ev_counts = ev_mem[ev_rp[EAW-1:0]];

  assign wr_ready = wr_eoe ? !ev_full : !layer_full[wr_layer];

  logic wr_hit_acc, wr_eoe_acc, hit_keep;
  assign wr_eoe_acc = wr_valid && wr_ready && wr_eoe;
  assign wr_hit_acc = wr_valid && wr_ready && !wr_eoe;
  assign hit_keep   = wr_hit_acc && (32'(cur_n[wr_layer]) < MAX_H);

  always_ff @(posedge clk) begin
    if (hit_keep) ram[wr_layer][wp[wr_layer][AW-1:0]] <= wr_hit;
    if (wr_eoe_acc) ev_mem[ev_wp[EAW-1:0]] <= '{n1: cur_n[0], n2: cur_n[1], n3: cur_n[2]};
    if (pop1) hit1 <= ram[0][rp[0][AW-1:0]];
    if (pop2) hit2 <= ram[1][rp[1][AW-1:0]];
    if (pop3) hit3 <= ram[2][rp[2][AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < 3; l++) begin
        wp[l] <= '0; rp[l] <= '0; cur_n[l] <= '0;
      end
      ev_wp        <= '0;
      ev_rp        <= '0;
      hits_dropped <= '0;
    end else begin
      if (hit_keep) begin
        wp[wr_layer]    <= wp[wr_layer] + 1'b1;
        cur_n[wr_layer] <= cur_n[wr_layer] + 1'b1;
      end
      if (wr_hit_acc && !hit_keep && hits_dropped != '1)
        hits_dropped <= hits_dropped + 1'b1;
      if (wr_eoe_acc) begin
        ev_wp <= ev_wp + 1'b1;
        for (int l = 0; l < 3; l++) cur_n[l] <= '0;
      end
      if (ev_pop && ev_valid) ev_rp <= ev_rp + 1'b1;
      for (int l = 0; l < 3; l++)
        if (pop[l]) rp[l] <= rp[l] + 1'b1;
    end
  end

  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
    !(pop1 && wp[0] == rp[0]) && !(pop2 && wp[1] == rp[1]) && !(pop3 && wp[2] == rp[2]));
  a_ev_pop_valid: assert property (@(posedge clk) disable iff (!rst_n)
    ev_pop |-> ev_valid);

endmodule
