// merge_sort: combines the per-source merge buffers into the one event stream to the chip.
//
// Every cycle one head of the merge buffers is selected:
//   - TEMPORAL_MERGE = 1: the head with the earliest deadline, compared modulo 256 by its
//     signed distance to the current system time 'now' (ties go to the lower stream
//     index). Because each buffer is sorted, this merges the streams into one stream of
//     ascending deadlines.
//   - TEMPORAL_MERGE = 0: the next non-empty buffer in round-robin order, without
//     comparing deadlines.
// A selected event whose deadline has already passed (negative distance to 'now') is
// removed without being sent and reported on 'expired': it could no longer reach its
// target neuron in time. Otherwise it is offered to the chip as {neuron, deadline} and
// removed when out_ready is high.
//
// Timing: combinational selection, one event per cycle towards the chip.
//
// Follows the paper: the merge stage at the destination and the loss of events whose
// timestamp has expired. The paper's first prototype does not realize temporal merging,
// so the default is TEMPORAL_MERGE = 0; the round-robin service used then, the
// earliest-deadline rule for TEMPORAL_MERGE = 1 and the drop rule are this design's
// choices.
module merge_sort
  import pulse_pkg::*;
#(
  parameter int unsigned N              = 4,
  parameter bit          TEMPORAL_MERGE = 1'b0,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  ts_t          now,
  input  logic [N-1:0] head_valid,
  input  net_event_t   head_event [N],
  output logic [N-1:0] pop,
  output logic         out_valid,
  output chip_event_t  out_event,
  input  logic         out_ready,
  output logic         expired
);

  logic [IDX_W-1:0] last_q;  // stream served last (round-robin mode)
  logic [IDX_W-1:0] sel;
  logic             any;

  always_comb begin
    int unsigned idx;
    logic signed [TS_W-1:0] best;
    idx  = 0;
    sel  = '0;
    any  = 1'b0;
    best = '0;
    if (TEMPORAL_MERGE) begin
      for (int unsigned s = 0; s < N; s++) begin
        if (head_valid[s] && (!any || slack(head_event[s].deadline, now) < best)) begin
          best = slack(head_event[s].deadline, now);
          sel  = IDX_W'(s);
          any  = 1'b1;
        end
      end
    end else begin
      for (int unsigned k = 1; k <= N; k++) begin
        idx = (int'(last_q) + k) % N;
        if (!any && head_valid[idx]) begin
          sel = IDX_W'(idx);
          any = 1'b1;
        end
      end
    end
  end

  always_comb begin
    logic late;
    late             = any && (slack(head_event[sel].deadline, now) < 0);
    expired          = late;
    out_valid        = any && !late;
    out_event.neuron = head_event[sel].neuron;
    out_event.ts     = head_event[sel].deadline;
    pop              = '0;
    pop[sel]         = late || (out_valid && out_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     last_q <= IDX_W'(N - 1);
    else if (|pop)  last_q <= sel;
  end

endmodule
