// arbitration: shares the single network link of a node among its buckets.
//
// Each bucket offers packets as a valid/ready word stream. When the link is free the
// arbiter picks one offering bucket in round-robin order, starting after the bucket that
// was served last, and then stays with it until the word marked 'last' has been taken,
// so packets are never interleaved. The chosen stream is passed through without a
// register stage: out_valid/out_word come combinationally from the granted input and
// in_ready of the granted input is out_ready.
//
// Timing: the grant is taken as soon as a bucket is chosen, even before its first word
// is accepted, so the offered word stays stable while the link stalls. A decision is
// made only while no packet holds the link: after a packet's last word the next packet
// starts in the following cycle, so packets from different buckets follow each other
// without an idle cycle.
//
// Follows the paper: an arbitration stage between the buckets and the network (figure of
// the experiment setup). The paper does not describe the policy; round-robin with packet
// locking is this design's choice. 'contention' pulses when a grant is made while more
// than one bucket is waiting.
module arbitration
  import pulse_pkg::*;
#(
  parameter int unsigned N = 4,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_valid,
  input  net_word_t     in_word [N],
  output logic [N-1:0]  in_ready,
  output logic          out_valid,
  output net_word_t     out_word,
  input  logic          out_ready,
  output logic          contention
);

  logic             locked;
  logic [IDX_W-1:0] grant_q;   // bucket holding the link while locked
  logic [IDX_W-1:0] last_q;    // bucket served last
  logic [IDX_W-1:0] pick;
  logic             pick_any;
  logic [IDX_W-1:0] sel;

  // round-robin choice among the offering inputs, starting after last_q
  always_comb begin
    int unsigned idx;
    idx      = 0;
    pick     = last_q;
    pick_any = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = (int'(last_q) + k) % N;
      if (!pick_any && in_valid[idx]) begin
        pick     = IDX_W'(idx);
        pick_any = 1'b1;
      end
    end
  end

  assign sel        = locked ? grant_q : pick;
  assign contention = !locked && pick_any && ((in_valid & (in_valid - 1'b1)) != '0);

  always_comb begin
    out_valid = (locked || pick_any) && in_valid[sel];
    out_word  = in_word[sel];
    in_ready  = '0;
    in_ready[sel] = out_ready && (locked || pick_any);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      grant_q <= '0;
      last_q  <= IDX_W'(N - 1);
    end else begin
      if (!locked && pick_any) begin
        grant_q <= pick;
        last_q  <= pick;
        locked  <= !(out_ready && out_word.last);
      end else if (locked && out_valid && out_ready && out_word.last) begin
        locked  <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));
`endif

endmodule
