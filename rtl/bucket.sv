// bucket: aggregates the pulse events for one destination node into network packets.
//
// Routed events for this bucket (up to LANES per cycle) are written into an event FIFO.
// The events not yet assigned to a packet are the "pending" events; the bucket tracks
// how many there are and the earliest deadline among them. A packet is closed when
//   - the pending events reach EVENTS_PER_PACKET (flush on full), or
//   - the earliest pending deadline is no more than cfg_flush_slack ticks ahead of the
//     current system time 'now' (flush on deadline), so that aggregation never holds an
//     event past the time its axonal delay allows.
// Closing a packet pushes its length into a small length FIFO. The sender side emits each
// closed packet as one header word {cfg_dst_node, cfg_src_node} followed by its events,
// one word each, with 'last' on the final word (valid/ready stream, AXI-stream rules:
// valid and data hold until ready). Events that find the FIFO full are dropped and
// reported on 'overflow'.
//
// Timing: an event written in cycle t can be in a packet closed in cycle t (full) or
// t+1 and later (deadline); the first header word is offered the cycle after closing.
// The output carries one word per cycle, so a packet of N events takes N+1 cycles.
//
// Follows the paper: aggregation into packets with bucket-buffers, a statically
// configured network address per bucket, aggregation time bounded by the axonal delay.
// Own choices: packet size, FIFO depth, the slack-based flush rule, packet format.
module bucket
  import pulse_pkg::*;
#(
  parameter int unsigned EVENTS_PER_PACKET = 8,
  parameter int unsigned DEPTH             = 32,   // event FIFO entries, power of two
  parameter int unsigned LANES             = 2,
  localparam int unsigned PTR_W            = $clog2(DEPTH),
  localparam int unsigned CNT_W            = $clog2(DEPTH + 1),
  localparam int unsigned LEN_W            = $clog2(EVENTS_PER_PACKET + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  ts_t              now,
  // static configuration
  input  node_t            cfg_dst_node,
  input  node_t            cfg_src_node,
  input  ts_t              cfg_flush_slack,
  // routed events for this bucket
  input  logic [LANES-1:0] in_valid,
  input  net_event_t       in_event [LANES],
  // packet stream
  output logic             out_valid,
  output net_word_t        out_word,
  input  logic             out_ready,
  // status pulses
  output logic             overflow,
  output logic             flush_full,
  output logic             flush_deadline
);

  // ---------------------------------------------------------------- event FIFO
  net_event_t       fifo [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [CNT_W-1:0] count;

  // ---------------------------------------------------------------- length FIFO
  logic [LEN_W-1:0] len_fifo [DEPTH];
  logic [PTR_W-1:0] len_wr, len_rd;
  logic [CNT_W-1:0] len_count;

  // ---------------------------------------------------------------- pending state
  logic [LEN_W-1:0] pending;
  ts_t              min_dl;

  // accepted lane events, in lane order
  logic [LANES-1:0] accept;
  logic [CNT_W-1:0] n_acc;
  logic             pop_evt, pop_len;

  always_comb begin
    logic [CNT_W-1:0] space;
    space    = CNT_W'(DEPTH) - count;
    n_acc    = '0;
    accept   = '0;
    overflow = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      if (in_valid[l]) begin
        if (n_acc < space) begin
          accept[l] = 1'b1;
          n_acc     = n_acc + 1'b1;
        end else begin
          overflow = 1'b1;
        end
      end
    end
  end

  // earlier(a, b): a is the earlier deadline of the two (modulo 256)
  function automatic ts_t earlier(ts_t a, ts_t b);
    return ($signed(a - b) < 0) ? a : b;
  endfunction

  // packet closing decision
  logic             close;
  logic [LEN_W-1:0] close_len;
  logic [LEN_W-1:0] pending_nxt;
  ts_t              min_nxt;

  always_comb begin
    logic [LEN_W:0] total;
    logic [LEN_W:0] pos;
    logic        have;
    total          = (LEN_W+1)'(pending) + (LEN_W+1)'(n_acc);
    close          = 1'b0;
    close_len      = '0;
    flush_full     = 1'b0;
    flush_deadline = 1'b0;
    pending_nxt    = LEN_W'(total);
    min_nxt        = min_dl;
    have           = 1'b0;
    pos            = '0;
    if (total >= (LEN_W+1)'(EVENTS_PER_PACKET)) begin
      // the first EVENTS_PER_PACKET events form a packet, the rest stay pending
      close       = 1'b1;
      flush_full  = 1'b1;
      close_len   = LEN_W'(EVENTS_PER_PACKET);
      pending_nxt = LEN_W'(total - (LEN_W+1)'(EVENTS_PER_PACKET));
      pos         = (LEN_W+1)'(pending);
      for (int l = 0; l < LANES; l++) begin
        if (accept[l]) begin
          pos = pos + 1'b1;
          if (pos > (LEN_W+1)'(EVENTS_PER_PACKET)) begin
            min_nxt = have ? earlier(min_nxt, in_event[l].deadline) : in_event[l].deadline;
            have    = 1'b1;
          end
        end
      end
    end else if (pending != '0 && slack(min_dl, now) <= $signed(cfg_flush_slack)) begin
      // earliest pending deadline is close: send what is pending now
      close          = 1'b1;
      flush_deadline = 1'b1;
      close_len      = pending;
      pending_nxt    = LEN_W'(n_acc);
      for (int l = 0; l < LANES; l++) begin
        if (accept[l]) begin
          min_nxt = have ? earlier(min_nxt, in_event[l].deadline) : in_event[l].deadline;
          have    = 1'b1;
        end
      end
    end else begin
      have = (pending != '0);
      for (int l = 0; l < LANES; l++) begin
        if (accept[l]) begin
          min_nxt = have ? earlier(min_nxt, in_event[l].deadline) : in_event[l].deadline;
          have    = 1'b1;
        end
      end
    end
  end

  // FIFO writes
  always_ff @(posedge clk) begin
    logic [PTR_W-1:0] p;
    p = wr_ptr;
    for (int l = 0; l < LANES; l++) begin
      if (accept[l]) begin
        fifo[p] <= in_event[l];
        p = p + 1'b1;
      end
    end
    if (close) len_fifo[len_wr] <= close_len;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      count     <= '0;
      len_wr    <= '0;
      len_rd    <= '0;
      len_count <= '0;
      pending   <= '0;
      min_dl    <= '0;
    end else begin
      wr_ptr    <= wr_ptr + PTR_W'(n_acc);
      rd_ptr    <= rd_ptr + PTR_W'(pop_evt);
      count     <= count + n_acc - CNT_W'(pop_evt);
      len_wr    <= len_wr + PTR_W'(close);
      len_rd    <= len_rd + PTR_W'(pop_len);
      len_count <= len_count + CNT_W'(close) - CNT_W'(pop_len);
      pending   <= pending_nxt;
      min_dl    <= min_nxt;
    end
  end

  // ---------------------------------------------------------------- sender
  logic             in_body;  // header sent, events of the packet follow
  logic [LEN_W-1:0] sent;

  always_comb begin
    out_valid     = (len_count != '0);
    out_word.data = in_body ? make_event_word(fifo[rd_ptr])
                            : make_header(cfg_dst_node, cfg_src_node);
    out_word.last = in_body && (sent + 1'b1 == len_fifo[len_rd]);
    pop_evt       = in_body && out_valid && out_ready;
    pop_len       = pop_evt && out_word.last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_body <= 1'b0;
      sent    <= '0;
    end else if (out_valid && out_ready) begin
      if (!in_body) begin
        in_body <= 1'b1;
        sent    <= '0;
      end else if (out_word.last) begin
        in_body <= 1'b0;
      end else begin
        sent <= sent + 1'b1;
      end
    end
  end

`ifndef SYNTHESIS
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));
  a_no_len_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    close |-> len_count < CNT_W'(DEPTH) || pop_len);
`endif

endmodule
