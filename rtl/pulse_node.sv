// pulse_node: pulse-communication logic of one FPGA that links a neuromorphic chip to a
// packet network, in both directions.
//
// Source path: events from the chip (two lanes) pass the routing lookup
// (event_routing), which yields destination neuron, bucket index and arrival deadline;
// each bucket aggregates the events for one destination node into packets; the
// arbitration stage puts the packets of all buckets on the network link (tx_*).
// Destination path: packets from the network (rx_*) are split into events by
// event_unpacking, queued in one merge buffer (sorted_stream) per source node, and
// merge_sort forms the single event stream to the chip (chip_out_*).
//
// A free-running 8-bit system time 'now' advances once per clock cycle from reset; chip
// timestamps and deadlines are read in this time base. Configuration is written through a
// simple register-file write port (cfg_we/cfg_addr/cfg_wdata, map in pulse_pkg): own node
// address, bucket flush slack, destination node per bucket, source node per merge buffer,
// and the routing table (cfg_addr = CFG_LUT + source neuron, cfg_wdata = {enable, bucket,
// destination neuron, delay} in the low bits).
//
// Timing: routing lookup 1 cycle; bucket closes a packet in the cycle it becomes full;
// header offered the next cycle; one network word per cycle in each direction; one event
// per cycle to the chip.
//
// Follows the paper: block structure and order of the experiment-setup figure, 14-bit
// neuron addresses, 8-bit timestamps, two events per cycle, 16-bit node addresses,
// static network addresses in the buckets, remappable destination neuron addresses, the
// prototype without temporal merging (TEMPORAL_MERGE = 0). Own choices: numbers of buckets
// and merge buffers, packet size, buffer depths, packet format, register map, time base.
module pulse_node
  import pulse_pkg::*;
#(
  parameter int unsigned LUT_DEPTH         = 16384,
  parameter int unsigned NUM_BUCKETS       = 4,
  parameter int unsigned EVENTS_PER_PACKET = 8,
  parameter int unsigned BUCKET_DEPTH      = 32,
  parameter int unsigned NUM_STREAMS       = 4,
  parameter int unsigned STREAM_DEPTH      = 32,
  parameter bit          TEMPORAL_MERGE    = 1'b0,
  localparam int unsigned LANES            = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // events from the chip
  input  logic [LANES-1:0] chip_in_valid,
  input  chip_event_t      chip_in_event [LANES],
  // events to the chip
  output logic             chip_out_valid,
  output chip_event_t      chip_out_event,
  input  logic             chip_out_ready,
  // network transmit
  output logic             tx_valid,
  output net_word_t        tx_word,
  input  logic             tx_ready,
  // network receive
  input  logic             rx_valid,
  input  net_word_t        rx_word,
  output logic             rx_ready,
  // configuration write port
  input  logic             cfg_we,
  input  logic [16:0]      cfg_addr,
  input  logic [31:0]      cfg_wdata,
  // monitoring
  output ts_t              now,
  output status_t          status
);

  localparam int unsigned BUCKET_W = (NUM_BUCKETS > 1) ? $clog2(NUM_BUCKETS) : 1;
  localparam int unsigned ADDR_W   = $clog2(LUT_DEPTH);
  localparam int unsigned ENTRY_W  = 1 + BUCKET_W + NEURON_W + TS_W;

  // ---------------------------------------------------------------- system time
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  // ---------------------------------------------------------------- registers
  node_t                  own_node;
  ts_t                    flush_slack;
  node_t                  bucket_dst [NUM_BUCKETS];
  node_t                  stream_src [NUM_STREAMS];
  logic [NUM_STREAMS-1:0] stream_en;
  logic                   lut_we;

  assign lut_we = cfg_we && cfg_addr[16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_node    <= '0;
      flush_slack <= '0;
      stream_en   <= '0;
      for (int b = 0; b < NUM_BUCKETS; b++) bucket_dst[b] <= '0;
      for (int s = 0; s < NUM_STREAMS; s++) stream_src[s] <= '0;
    end else if (cfg_we && !cfg_addr[16]) begin
      if (cfg_addr == CFG_OWN_NODE)    own_node    <= cfg_wdata[15:0];
      if (cfg_addr == CFG_FLUSH_SLACK) flush_slack <= cfg_wdata[7:0];
      for (int b = 0; b < NUM_BUCKETS; b++)
        if (cfg_addr == CFG_BUCKET_DST + 17'(b)) bucket_dst[b] <= cfg_wdata[15:0];
      for (int s = 0; s < NUM_STREAMS; s++)
        if (cfg_addr == CFG_STREAM_SRC + 17'(s)) begin
          stream_src[s] <= cfg_wdata[15:0];
          stream_en[s]  <= cfg_wdata[16];
        end
    end
  end

  // ---------------------------------------------------------------- source path
  logic [LANES-1:0]    r_valid;
  logic [BUCKET_W-1:0] r_bucket [LANES];
  net_event_t          r_event  [LANES];
  logic [LANES-1:0]    r_unmapped;

  event_routing #(
    .LUT_DEPTH  (LUT_DEPTH),
    .NUM_BUCKETS(NUM_BUCKETS),
    .LANES      (LANES)
  ) u_routing (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (chip_in_valid),
    .in_event  (chip_in_event),
    .lut_we    (lut_we),
    .lut_addr  (cfg_addr[ADDR_W-1:0]),
    .lut_wdata (cfg_wdata[ENTRY_W-1:0]),
    .out_valid (r_valid),
    .out_bucket(r_bucket),
    .out_event (r_event),
    .unmapped  (r_unmapped)
  );

  logic [NUM_BUCKETS-1:0] b_valid;
  net_word_t              b_word [NUM_BUCKETS];
  logic [NUM_BUCKETS-1:0] b_ready;
  logic [NUM_BUCKETS-1:0] b_overflow, b_full, b_deadline;

  for (genvar b = 0; b < NUM_BUCKETS; b++) begin : g_bucket
    logic [LANES-1:0] sel;
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      assign sel[l] = r_valid[l] && (r_bucket[l] == BUCKET_W'(b));
    end

    bucket #(
      .EVENTS_PER_PACKET(EVENTS_PER_PACKET),
      .DEPTH            (BUCKET_DEPTH),
      .LANES            (LANES)
    ) u_bucket (
      .clk            (clk),
      .rst_n          (rst_n),
      .now            (now),
      .cfg_dst_node   (bucket_dst[b]),
      .cfg_src_node   (own_node),
      .cfg_flush_slack(flush_slack),
      .in_valid       (sel),
      .in_event       (r_event),
      .out_valid      (b_valid[b]),
      .out_word       (b_word[b]),
      .out_ready      (b_ready[b]),
      .overflow       (b_overflow[b]),
      .flush_full     (b_full[b]),
      .flush_deadline (b_deadline[b])
    );
  end

  logic contention;

  arbitration #(.N(NUM_BUCKETS)) u_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (b_valid),
    .in_word   (b_word),
    .in_ready  (b_ready),
    .out_valid (tx_valid),
    .out_word  (tx_word),
    .out_ready (tx_ready),
    .contention(contention)
  );

  // ---------------------------------------------------------------- destination path
  logic [NUM_STREAMS-1:0] s_push_valid, s_push_ready, s_head_valid, s_pop;
  net_event_t             s_push_event;
  net_event_t             s_head_event [NUM_STREAMS];
  logic                   drop_packet, expired;

  event_unpacking #(.NUM_STREAMS(NUM_STREAMS)) u_unpack (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_own_node  (own_node),
    .cfg_stream_src(stream_src),
    .cfg_stream_en (stream_en),
    .in_valid      (rx_valid),
    .in_word       (rx_word),
    .in_ready      (rx_ready),
    .push_valid    (s_push_valid),
    .push_event    (s_push_event),
    .push_ready    (s_push_ready),
    .drop_packet   (drop_packet),
    .event_out     ()
  );

  for (genvar s = 0; s < NUM_STREAMS; s++) begin : g_stream
    sorted_stream #(.DEPTH(STREAM_DEPTH)) u_stream (
      .clk       (clk),
      .rst_n     (rst_n),
      .push_valid(s_push_valid[s]),
      .push_event(s_push_event),
      .push_ready(s_push_ready[s]),
      .head_valid(s_head_valid[s]),
      .head_event(s_head_event[s]),
      .pop       (s_pop[s]),
      .level     ()
    );
  end

  merge_sort #(
    .N             (NUM_STREAMS),
    .TEMPORAL_MERGE(TEMPORAL_MERGE)
  ) u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .now       (now),
    .head_valid(s_head_valid),
    .head_event(s_head_event),
    .pop       (s_pop),
    .out_valid (chip_out_valid),
    .out_event (chip_out_event),
    .out_ready (chip_out_ready),
    .expired   (expired)
  );

  // ---------------------------------------------------------------- monitoring
  always_comb begin
    status.unmapped       = |r_unmapped;
    status.overflow       = |b_overflow;
    status.flush_full     = |b_full;
    status.flush_deadline = |b_deadline;
    status.contention     = contention;
    status.drop_packet    = drop_packet;
    status.expired        = expired;
  end

endmodule
