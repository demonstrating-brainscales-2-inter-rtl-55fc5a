// tb_event_routing: self-checking test of the routing lookup.
//
// Writes a reference copy of 64 routing entries (some disabled) into the table, then
// offers two random events per cycle for 400 cycles from those 64 source neurons. Every
// output lane is compared, exactly one cycle after its input, with the reference model:
// enable -> out_valid / unmapped, bucket, destination neuron, deadline = timestamp + delay
// modulo 256. Checking every cycle at a fixed offset also checks the rate of two events
// per cycle and the one-cycle latency.
module tb_event_routing;
  import pulse_pkg::*;

  localparam int unsigned NB      = 4;
  localparam int unsigned BW      = 2;
  localparam int unsigned ENTRY_W = 1 + BW + NEURON_W + TS_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0]         in_valid;
  chip_event_t        in_event [2];
  logic               lut_we;
  logic [13:0]        lut_addr;
  logic [ENTRY_W-1:0] lut_wdata;
  logic [1:0]         out_valid, unmapped;
  logic [BW-1:0]      out_bucket [2];
  net_event_t         out_event [2];

  event_routing #(.NUM_BUCKETS(NB)) dut (.*);

  int checks = 0, failures = 0;
  logic [ENTRY_W-1:0] ref_lut [64];
  neuron_t            src_id  [64];
  logic [1:0]         exp_v;
  chip_event_t        exp_in [2];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_mapped;
    n_mapped = 0;
    in_valid = '0;
    lut_we   = 1'b0;
    lut_addr = '0;
    lut_wdata = '0;
    for (int l = 0; l < 2; l++) in_event[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 64; i++) begin
      src_id[i]  = neuron_t'(i * 251 + 7);            // distinct addresses
      ref_lut[i] = ENTRY_W'($urandom);
      ref_lut[i][ENTRY_W-1] = (i % 5 != 0);            // every fifth entry disabled
      @(negedge clk);
      lut_we = 1'b1; lut_addr = src_id[i]; lut_wdata = ref_lut[i];
    end
    @(negedge clk) lut_we = 1'b0;

    for (int c = 0; c < 400; c++) begin
      int k [2];
      @(negedge clk);
      for (int l = 0; l < 2; l++) begin
        k[l] = $urandom_range(63);
        in_valid[l] = ($urandom_range(9) != 0);
        in_event[l].neuron = src_id[k[l]];
        in_event[l].ts     = ts_t'($urandom);
      end
      @(posedge clk);
      exp_v = in_valid;
      exp_in = in_event;
      #1;
      for (int l = 0; l < 2; l++) begin
        logic [ENTRY_W-1:0] e;
        e = ref_lut[k[l]];
        check(out_valid[l] == (exp_v[l] && e[ENTRY_W-1]), "valid");
        check(unmapped[l]  == (exp_v[l] && !e[ENTRY_W-1]), "unmapped");
        if (exp_v[l] && e[ENTRY_W-1]) begin
          n_mapped++;
          check(out_bucket[l] == e[ENTRY_W-2 -: BW], "bucket");
          check(out_event[l].neuron == e[TS_W +: NEURON_W], "neuron");
          check(out_event[l].deadline == ts_t'(exp_in[l].ts + e[TS_W-1:0]), "deadline");
        end
      end
    end
    check(n_mapped > 400, "enough mapped events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
