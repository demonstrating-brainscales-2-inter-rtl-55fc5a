// sorted_stream: merge buffer for the events of one source stream at the destination.
//
// A plain first-in first-out buffer of routed events. The events of one source stream
// leave the source node in the order of their timestamps; as long as the source neurons
// of the stream share one axonal delay, the buffer therefore holds them in ascending
// deadline order and its head is the stream's earliest event, so the merge stage only
// has to compare heads. Nothing here reorders events with mixed delays.
//
// Interface: push side push_valid/push_event/push_ready (ready while not full); head
// side head_valid/head_event show the oldest entry without a register delay, 'pop'
// removes it. 'level' is the fill level. Timing: an event pushed in cycle t is visible at
// the head in cycle t+1; one push and one pop per cycle, also when full (pop frees the
// slot used by the push only in the next cycle).
//
// Follows the paper: one merge buffer per source stream ("sorted stream" in the
// experiment-setup figure). Depth is this design's choice.
module sorted_stream
  import pulse_pkg::*;
#(
  parameter int unsigned DEPTH = 32,   // power of two
  localparam int unsigned PTR_W = $clog2(DEPTH),
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  input  net_event_t       push_event,
  output logic             push_ready,
  output logic             head_valid,
  output net_event_t       head_event,
  input  logic             pop,
  output logic [CNT_W-1:0] level
);

  net_event_t       mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign push_ready = (level != CNT_W'(DEPTH));
  assign head_valid = (level != '0);
  assign head_event = mem[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop && head_valid;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_event;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      wr_ptr <= wr_ptr + PTR_W'(do_push);
      rd_ptr <= rd_ptr + PTR_W'(do_pop);
      level  <= level + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

endmodule
