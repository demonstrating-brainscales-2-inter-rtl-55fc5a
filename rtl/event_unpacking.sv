// event_unpacking: splits packets arriving from the network into single events.
//
// The first word of a packet is its header {destination node, source node}. The source
// node is looked up among the configured source streams (cfg_stream_src, enabled by
// cfg_stream_en); on a hit, the following words up to the one marked 'last' are turned
// into events and pushed into the merge buffer of that stream. A packet from a source
// that has no stream, or whose destination is not this node (cfg_own_node), is read and
// discarded, and 'drop_packet' pulses once for it.
//
// Interface: valid/ready packet stream in; one push port per stream (push_valid is
// one-hot, push_event shared); status pulses. Timing: header takes one cycle, then one
// event per cycle; when the chosen merge buffer is full the input is stalled (in_ready
// low) instead of losing events.
//
// Follows the paper: an unpacking stage feeding one merge buffer per source stream.
// Own choices: the header format, matching by source node, stalling when full.
module event_unpacking
  import pulse_pkg::*;
#(
  parameter int unsigned NUM_STREAMS = 4,
  localparam int unsigned SIDX_W = (NUM_STREAMS > 1) ? $clog2(NUM_STREAMS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  node_t                  cfg_own_node,
  input  node_t                  cfg_stream_src [NUM_STREAMS],
  input  logic [NUM_STREAMS-1:0] cfg_stream_en,
  // packets from the network
  input  logic                   in_valid,
  input  net_word_t              in_word,
  output logic                   in_ready,
  // events to the merge buffers
  output logic [NUM_STREAMS-1:0] push_valid,
  output net_event_t             push_event,
  input  logic [NUM_STREAMS-1:0] push_ready,
  // status
  output logic                   drop_packet,
  output logic                   event_out
);

  typedef enum logic [1:0] {S_HEADER, S_BODY, S_DISCARD} state_e;

  state_e            state;
  logic [SIDX_W-1:0] stream_q;

  logic [SIDX_W-1:0] hit_idx;
  logic              hit;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int unsigned s = 0; s < NUM_STREAMS; s++) begin
      if (!hit && cfg_stream_en[s] && cfg_stream_src[s] == header_src(in_word.data)) begin
        hit     = 1'b1;
        hit_idx = SIDX_W'(s);
      end
    end
    if (header_dst(in_word.data) != cfg_own_node) hit = 1'b0;
  end

  always_comb begin
    push_event = event_of_word(in_word.data);
    push_valid = '0;
    in_ready   = 1'b1;
    if (state == S_BODY) begin
      push_valid[stream_q] = in_valid;
      in_ready             = push_ready[stream_q];
    end
    drop_packet = (state == S_HEADER) && in_valid && !hit;
    event_out   = (state == S_BODY) && in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_HEADER;
      stream_q <= '0;
    end else if (in_valid && in_ready) begin
      unique case (state)
        S_HEADER: begin
          stream_q <= hit_idx;
          if (!in_word.last) state <= hit ? S_BODY : S_DISCARD;
        end
        S_BODY, S_DISCARD: if (in_word.last) state <= S_HEADER;
        default: state <= S_HEADER;
      endcase
    end
  end

endmodule
