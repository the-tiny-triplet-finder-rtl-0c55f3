// seeding_sequencer: event controller of the seeding engine.
//
// Each event runs in three phases, as on the paper's oscilloscope trace:
//   FILL     one cycle per hit: layer 1 and layer 3 hits are fetched in
//            parallel into the hit storage blocks (max(n1, n3) cycles);
//   SEARCH   one cycle per layer 2 hit: the hit drives the coincidence
//            search (n2 cycles);
//   REFRESH  one cycle: the storage blocks are cleared for the next event.
// With 112 hits per layer that is 112 + 112 + 1 cycles, the figures the
// paper gives.  When the next event is already complete in the input buffer
// it starts in the cycle after REFRESH, so a burst of events runs with no
// gaps.
//
// An event is started only when the result buffer is certain to have room
// for all its results.  The sequencer keeps a credit count of free result
// entries: it starts at RES_DEPTH, drops by n2 when an event starts and rises
// by one for every result the host reads (res_rd).  This flow control, and
// the zero-length phases skipped for empty layers, are this design's own
// choices; the paper describes only the phase order.
//
// Outputs are strobes for the current cycle: pop1/pop3 (fill slot valid for
// layer 1/3), pop2 (search slot), refresh, with hit_idx and event_id of the
// slot.  stall_res counts cycles in which a complete event waited for result
// credits.
module seeding_sequencer
  import tts_pkg::*;
#(
  parameter int unsigned RES_DEPTH = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_valid,
  input  ev_counts_t    ev_counts,
  output logic          ev_pop,
  input  logic          res_rd,
  output logic          pop1,
  output logic          pop2,
  output logic          pop3,
  output logic          refresh,
  output logic [HW-1:0] hit_idx,
  output logic [EW-1:0] event_id,
  output phase_e        phase,
  output logic [15:0]   stall_res
);

  localparam int unsigned CRW = $clog2(RES_DEPTH + 1);

  phase_e      state;
  ev_counts_t  cnt;
  logic [HW:0] idx;
  logic [HW:0] fill_len;
  logic [CRW-1:0] credits;
  logic        can_start;
  logic        start;

  assign fill_len  = (cnt.n1 > cnt.n3) ? cnt.n1 : cnt.n3;
  assign can_start = ev_valid && (32'(credits) >= 32'(ev_counts.n2));
  assign start     = can_start && (state == PH_IDLE || state == PH_REFRESH);
  assign ev_pop    = start;

  // first phase of an event with counts c
  function automatic phase_e first_phase(input ev_counts_t c);
    if (c.n1 != '0 || c.n3 != '0) return PH_FILL;
    if (c.n2 != '0)               return PH_SEARCH;
    return PH_REFRESH;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= PH_IDLE;
      cnt      <= '0;
      idx      <= '0;
      event_id <= '0;
    end else begin
      unique case (state)
        PH_IDLE, PH_REFRESH: begin
          idx <= '0;
          if (start) begin
            cnt   <= ev_counts;
            state <= first_phase(ev_counts);
            if (state == PH_REFRESH) event_id <= event_id + 1'b1;
          end else begin
            state <= PH_IDLE;
            if (state == PH_REFRESH) event_id <= event_id + 1'b1;
          end
        end
        PH_FILL: begin
          if (idx + 1'b1 >= fill_len) begin
            idx   <= '0;
            state <= (cnt.n2 != '0) ? PH_SEARCH : PH_REFRESH;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        PH_SEARCH: begin
          if (idx + 1'b1 >= cnt.n2) begin
            idx   <= '0;
            state <= PH_REFRESH;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: state <= PH_IDLE;
      endcase
    end
  end

  // result-buffer credits
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      credits <= CRW'(RES_DEPTH);
    end else begin
      credits <= credits - (start ? CRW'(ev_counts.n2) : '0) + CRW'(res_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                                           stall_res <= '0;
    else if (ev_valid && !can_start && (state == PH_IDLE || state == PH_REFRESH)
             && stall_res != '1)                          stall_res <= stall_res + 1'b1;
  end

  assign phase   = state;
  assign pop1    = (state == PH_FILL)   && (idx < cnt.n1);
  assign pop3    = (state == PH_FILL)   && (idx < cnt.n3);
  assign pop2    = (state == PH_SEARCH);
  assign refresh = (state == PH_REFRESH);
  assign hit_idx = idx[HW-1:0];

  a_credit_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    32'(credits) <= RES_DEPTH);

endmodule
