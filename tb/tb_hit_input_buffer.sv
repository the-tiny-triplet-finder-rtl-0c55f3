// tb_hit_input_buffer: writes events of random size into a small buffer
// (DEPTH 64, EV_DEPTH 4, MAX_H 20) while a reader drains it event by event;
// checks event counts, hit order per layer, the drop of hits beyond MAX_H,
// and that wr_ready falls when a layer RAM or the event FIFO is full.
module tb_hit_input_buffer;
  import tts_pkg::*;

  localparam int DEPTH = 64, EVD = 4, MAXH = 20;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_valid, wr_ready, wr_eoe, ev_valid, ev_pop, pop1, pop2, pop3;
  layer_e wr_layer;
  hit_t wr_hit, hit1, hit2, hit3;
  logic [15:0] hits_dropped;
  ev_counts_t ev_counts;

  hit_input_buffer #(.DEPTH(DEPTH), .EV_DEPTH(EVD), .MAX_H(MAXH)) dut (.*);

  int checks = 0, failures = 0;
  hit_t exp_hits [3][$];   // kept hits, per layer, in order
  int   exp_c1 [$], exp_c2 [$], exp_c3 [$];
  int   dropped = 0, full_seen = 0, evfull_seen = 0;
  bit   writer_done = 0;
  int   n [3];

  task automatic put(input logic eoe, input int l, input hit_t h);
    // called just after a falling edge; the word is taken at the next rising
    // edge at which wr_ready is high
    wr_valid = 1'b1; wr_eoe = eoe; wr_layer = layer_e'(l); wr_hit = h;
    #1;
    while (!wr_ready) begin
      if (eoe) evfull_seen++; else full_seen++;
      @(negedge clk);
      #1;
    end
    @(negedge clk);
  endtask

  // writer: 30 events
  int   wl, wnh;
  int   wcnt [3];
  hit_t wh;

  initial begin
    rst_n = 1'b0; wr_valid = 1'b0; wr_eoe = 1'b0; wr_layer = LAYER1; wr_hit = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    for (int ev = 0; ev < 30; ev++) begin
      wcnt[0] = 0; wcnt[1] = 0; wcnt[2] = 0;
      wnh = $urandom_range(75, 10);
      for (int i = 0; i < wnh; i++) begin
        wl = $urandom_range(2);
        wh = hit_t'($urandom);
        put(1'b0, wl, wh);
        if (wcnt[wl] < MAXH) begin
          exp_hits[wl].push_back(wh);
          wcnt[wl]++;
        end else dropped++;
      end
      put(1'b1, 0, '0);
      exp_c1.push_back(wcnt[0]); exp_c2.push_back(wcnt[1]); exp_c3.push_back(wcnt[2]);
    end
    wr_valid = 1'b0;
    writer_done = 1;
  end

  // reader: slow at first so that the buffer fills up
  initial begin
    hit_t got;
    int c1, c2, c3;
    ev_pop = 1'b0; pop1 = 1'b0; pop2 = 1'b0; pop3 = 1'b0;
    repeat (400) @(posedge clk);
    for (int ev = 0; ev < 30; ev++) begin
      @(negedge clk);
      while (!ev_valid) @(negedge clk);
      c1 = exp_c1.pop_front(); c2 = exp_c2.pop_front(); c3 = exp_c3.pop_front();
      n[0] = int'(ev_counts.n1); n[1] = int'(ev_counts.n2); n[2] = int'(ev_counts.n3);
      checks++;
      if (n[0] != c1 || n[1] != c2 || n[2] != c3) begin
        failures++;
        $display("FAIL ev %0d counts %0d/%0d/%0d exp %0d/%0d/%0d", ev, n[0], n[1], n[2], c1, c2, c3);
      end
      ev_pop = 1'b1;
      @(negedge clk);
      ev_pop = 1'b0;
      for (int l = 0; l < 3; l++) begin
        for (int i = 0; i < n[l]; i++) begin
          pop1 = (l == 0); pop2 = (l == 1); pop3 = (l == 2);
          @(negedge clk);
          pop1 = 1'b0; pop2 = 1'b0; pop3 = 1'b0;
          got = (l == 0) ? hit1 : (l == 1) ? hit2 : hit3;
          checks++;
          if (exp_hits[l].size() == 0 || got != exp_hits[l][0]) begin
            failures++;
            if (failures < 10) $display("FAIL ev %0d layer %0d hit %0d got %h", ev, l + 1, i, got);
          end
          if (exp_hits[l].size() != 0) void'(exp_hits[l].pop_front());
        end
      end
    end
    @(negedge clk);
    checks++;
    if (ev_valid || int'(hits_dropped) != dropped) begin
      failures++;
      $display("FAIL end: ev_valid=%0b dropped=%0d exp %0d", ev_valid, hits_dropped, dropped);
    end
    checks++;
    if (full_seen == 0 || evfull_seen == 0 || dropped == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: full=%0d evfull=%0d dropped=%0d", full_seen, evfull_seen, dropped);
    end
    $display("layer-full stalls=%0d event-fifo-full stalls=%0d dropped=%0d", full_seen, evfull_seen, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
