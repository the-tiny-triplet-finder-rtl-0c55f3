// tb_seeding_sequencer: feeds a list of events (including empty layers and
// the full 112/112/112 case) to the sequencer and checks, cycle by cycle,
// the slot strobes of every phase: max(n1,n3) fill cycles with pop1/pop3
// for the right indices, n2 search cycles, one refresh cycle, the event
// number, back-to-back starts in the refresh cycle when an event is waiting
// and credits allow it, and that no event starts without result credits.
module tb_seeding_sequencer;
  import tts_pkg::*;

  localparam int RES = 150;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, ev_valid, ev_pop, res_rd, pop1, pop2, pop3, refresh;
  ev_counts_t ev_counts;
  logic [HW-1:0] hit_idx;
  logic [EW-1:0] event_id;
  phase_e phase;
  logic [15:0] stall_res;

  seeding_sequencer #(.RES_DEPTH(RES)) dut (.*);

  int checks = 0, failures = 0;
  int n1q [$], n2q [$], n3q [$];
  int credits = RES;
  int owed = 0;           // results the "host" may still read
  int started = 0, back_to_back = 0, stalls_seen = 0, full_len_ok = 0;
  int nev;

  // expected slot trace of the running event
  typedef struct { bit p1, p2, p3, rf; int idx; } slot_t;
  slot_t expq [$];
  slot_t s;

  task automatic push_event(input int a, input int b, input int c);
    n1q.push_back(a); n2q.push_back(b); n3q.push_back(c);
  endtask

  assign ev_valid  = (n1q.size() > 0);
  assign ev_counts = ev_valid ? '{n1: (HW+1)'(n1q[0]), n2: (HW+1)'(n2q[0]), n3: (HW+1)'(n3q[0])} : '0;

  int cyc = 0, last_refresh = -10, ev_cycles_start = 0;
  int a, b, c, m;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // check this cycle's strobes against the expected trace
      if (expq.size() > 0) begin
        s = expq.pop_front();
        checks++;
        if (pop1 != s.p1 || pop2 != s.p2 || pop3 != s.p3 || refresh != s.rf ||
            (!s.rf && int'(hit_idx) != s.idx) || int'(event_id) != (started - 1) % 256) begin
          failures++;
          if (failures < 10)
            $display("FAIL cyc %0d got p1=%0b p2=%0b p3=%0b rf=%0b idx=%0d ev=%0d exp %0b%0b%0b%0b idx=%0d",
                     cyc, pop1, pop2, pop3, refresh, hit_idx, event_id, s.p1, s.p2, s.p3, s.rf, s.idx);
        end
      end else begin
        checks++;
        if (pop1 || pop2 || pop3 || refresh) begin
          failures++;
          $display("FAIL cyc %0d strobe while idle", cyc);
        end
      end
      if (refresh) last_refresh = cyc;
      // a waiting event with enough credits must start at once
      if (ev_valid && (expq.size() == 0) && !ev_pop && credits >= n2q[0]) begin
        failures++;
        $display("FAIL cyc %0d event waiting with credits but not started", cyc);
      end
      if (ev_valid && expq.size() == 0 && credits < n2q[0]) stalls_seen++;
      if (ev_pop) begin
        checks++;
        if (!ev_valid || credits < n2q[0] || expq.size() != 0) begin
          failures++;
          $display("FAIL cyc %0d bad start", cyc);
        end
        a = n1q.pop_front(); b = n2q.pop_front(); c = n3q.pop_front();
        credits -= b;
        owed += b;
        if (last_refresh == cyc) back_to_back++;
        started++;
        m = (a > c) ? a : c;
        for (int i = 0; i < m; i++) expq.push_back('{p1: (i < a), p2: 0, p3: (i < c), rf: 0, idx: i});
        for (int i = 0; i < b; i++) expq.push_back('{p1: 0, p2: 1, p3: 0, rf: 0, idx: i});
        expq.push_back('{p1: 0, p2: 0, p3: 0, rf: 1, idx: 0});
        if (a == 112 && b == 112 && c == 112 && expq.size() == 225) full_len_ok++;
      end
      if (res_rd) begin credits++; owed--; end
    end
  end

  // host reads results only while "read_on" is set
  bit read_on = 0;
  always @(negedge clk) res_rd <= read_on && (owed > 0) && ($urandom_range(1) == 0);

  initial begin
    rst_n = 1'b0; res_rd = 1'b0;
    push_event(112, 112, 112);
    push_event(3, 5, 7);
    push_event(0, 4, 0);
    push_event(6, 0, 2);
    push_event(0, 0, 0);
    push_event(112, 112, 112);   // must wait for credits (150 - 121 left)
    for (int e = 0; e < 20; e++) push_event($urandom_range(20), $urandom_range(20), $urandom_range(20));
    nev = n1q.size();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (600) @(posedge clk);
    read_on = 1;
    while (started < nev || expq.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (back_to_back < 3 || stalls_seen == 0 || full_len_ok != 2 || stall_res == 0) begin
      failures++;
      $display("FAIL mechanisms: back_to_back=%0d stalls=%0d full_len=%0d", back_to_back, stalls_seen, full_len_ok);
    end
    $display("events=%0d back-to-back=%0d credit-stall cycles=%0d (dut %0d)", started, back_to_back, stalls_seen, stall_res);
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
