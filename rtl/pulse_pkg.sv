// pulse_pkg: types and constants shared by the inter-chip pulse-routing blocks.
//
// A pulse event leaves the neuromorphic chip as a 14-bit source neuron address and an
// 8-bit timestamp, up to two per 125 MHz FPGA clock cycle; both widths follow the paper.
// The source FPGA turns each event into a routed event: a freely remappable 14-bit
// destination neuron address, the index of the bucket that aggregates events for one
// destination node, and an 8-bit arrival deadline (timestamp plus modelled axonal delay,
// modulo 256). Packets on the network are addressed by a 16-bit node address, as in the
// EXTOLL network.
//
// This design's own choices: the network side is a 32-bit word stream with a "last" flag;
// a packet is one header word {destination node, source node} followed by one word per
// event {10'b0, neuron, deadline}. Deadlines are compared modulo 256 through the signed
// difference to the current 8-bit system time (a window of +-127 ticks).
package pulse_pkg;

  localparam int unsigned NEURON_W = 14;  // source / destination neuron address
  localparam int unsigned TS_W     = 8;   // timestamp, delay and deadline
  localparam int unsigned NODE_W   = 16;  // network node address
  localparam int unsigned WORD_W   = 32;  // network stream word

  typedef logic [NEURON_W-1:0] neuron_t;
  typedef logic [TS_W-1:0]     ts_t;
  typedef logic [NODE_W-1:0]   node_t;
  typedef logic [WORD_W-1:0]   word_t;

  // Event as delivered by the chip (source side) or to the chip (destination side,
  // where the timestamp field carries the deadline).
  typedef struct packed {
    neuron_t neuron;
    ts_t     ts;
  } chip_event_t;

  // Event after the routing lookup, as stored in a bucket and in a merge buffer.
  typedef struct packed {
    neuron_t neuron;    // destination neuron address
    ts_t     deadline;  // arrival deadline
  } net_event_t;

  // One word of the packet stream.
  typedef struct packed {
    word_t data;
    logic  last;
  } net_word_t;

  // Per-cycle event flags of a node, for monitoring (each bit is one cycle's pulse).
  typedef struct packed {
    logic unmapped;        // chip event without routing entry, dropped
    logic overflow;        // bucket full, event dropped
    logic flush_full;      // a bucket closed a full packet
    logic flush_deadline;  // a bucket closed a packet early because of a near deadline
    logic contention;      // several buckets waited for the link at a grant
    logic drop_packet;     // received packet without a matching source stream
    logic expired;         // event reached the merge stage after its deadline, dropped
  } status_t;

  // Configuration register map (word addresses of the register-file write port).
  localparam logic [16:0] CFG_OWN_NODE    = 17'h0_0000;  // [15:0] own node address
  localparam logic [16:0] CFG_FLUSH_SLACK = 17'h0_0001;  // [7:0] bucket flush slack
  localparam logic [16:0] CFG_BUCKET_DST  = 17'h0_0100;  // +b: [15:0] destination node
  localparam logic [16:0] CFG_STREAM_SRC  = 17'h0_0200;  // +s: [16] enable, [15:0] source node
  localparam logic [16:0] CFG_LUT         = 17'h1_0000;  // +neuron: routing entry

  function automatic word_t make_header(node_t dst, node_t src);
    return {dst, src};
  endfunction

  function automatic node_t header_dst(word_t w);
    return w[31:16];
  endfunction

  function automatic node_t header_src(word_t w);
    return w[15:0];
  endfunction

  function automatic word_t make_event_word(net_event_t e);
    return {{(WORD_W-NEURON_W-TS_W){1'b0}}, e};
  endfunction

  function automatic net_event_t event_of_word(word_t w);
    return net_event_t'(w[NEURON_W+TS_W-1:0]);
  endfunction

  // Signed distance from 'now' to 'deadline', modulo 256: negative means expired.
  function automatic logic signed [TS_W-1:0] slack(ts_t deadline, ts_t now);
    return $signed(deadline - now);
  endfunction

endpackage
