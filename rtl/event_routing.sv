// event_routing: source-side routing lookup for pulse events from the chip.
//
// Up to two events per clock cycle arrive from the chip (one per lane), each a 14-bit
// source neuron address and an 8-bit timestamp. Each lane reads the routing table at the
// source neuron address. A table entry holds an enable bit, the index of the bucket that
// aggregates events for one destination node, the freely remappable destination neuron
// address, and the modelled axonal delay. The routed event carries the destination neuron
// and the arrival deadline = timestamp + delay (modulo 256). Events whose entry is not
// enabled are discarded and reported on 'unmapped'.
//
// Interface: lane inputs in_valid/in_event; table write port lut_we/lut_addr/lut_wdata
// (fed by the configuration registers); lane outputs out_valid/out_bucket/out_event.
// Timing: one cycle latency (registered table read), two events per cycle sustained,
// no back-pressure (the chip link cannot be stalled).
//
// Follows the paper: two events per 125 MHz cycle, 14-bit address, 8-bit timestamp,
// deadline = timestamp + axonal delay, lookup yielding a remappable destination neuron
// address and a bucket index. Own choices: the delay is stored per source neuron in the
// same table, the table has one entry per source neuron (16384) and two read ports plus
// one write port, and a disabled entry drops the event.
module event_routing
  import pulse_pkg::*;
#(
  parameter int unsigned LUT_DEPTH   = 16384,  // one entry per 14-bit source address
  parameter int unsigned NUM_BUCKETS = 4,
  parameter int unsigned LANES       = 2,      // events per clock cycle from the chip
  localparam int unsigned BUCKET_W   = (NUM_BUCKETS > 1) ? $clog2(NUM_BUCKETS) : 1,
  localparam int unsigned ADDR_W     = $clog2(LUT_DEPTH),
  localparam int unsigned ENTRY_W    = 1 + BUCKET_W + NEURON_W + TS_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // events from the chip
  input  logic [LANES-1:0]       in_valid,
  input  chip_event_t            in_event   [LANES],
  // routing-table write port: {enable, bucket, destination neuron, delay}
  input  logic                   lut_we,
  input  logic [ADDR_W-1:0]      lut_addr,
  input  logic [ENTRY_W-1:0]     lut_wdata,
  // routed events
  output logic [LANES-1:0]       out_valid,
  output logic [BUCKET_W-1:0]    out_bucket [LANES],
  output net_event_t             out_event  [LANES],
  output logic [LANES-1:0]       unmapped
);

  typedef struct packed {
    logic                enable;
    logic [BUCKET_W-1:0] bucket;
    neuron_t             neuron;
    ts_t                 delay;
  } lut_entry_t;

  logic [ENTRY_W-1:0] lut [LUT_DEPTH];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_wdata;
  end

  lut_entry_t       entry_q [LANES];
  ts_t              ts_q    [LANES];
  logic [LANES-1:0] valid_q;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      entry_q[l] <= lut_entry_t'(lut[in_event[l].neuron[ADDR_W-1:0]]);
      ts_q[l]    <= in_event[l].ts;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) valid_q[l] <= 1'b0;
      else        valid_q[l] <= in_valid[l];
    end

    always_comb begin
      out_valid[l]          = valid_q[l] & entry_q[l].enable;
      unmapped[l]           = valid_q[l] & ~entry_q[l].enable;
      out_bucket[l]         = entry_q[l].bucket;
      out_event[l].neuron   = entry_q[l].neuron;
      out_event[l].deadline = ts_q[l] + entry_q[l].delay;
    end
  end

endmodule
