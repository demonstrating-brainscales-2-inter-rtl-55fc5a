// tb_fig2_demo: the inter-chip feed-forward experiment with four FPGAs and four chips.
//
// Nodes 1 and 2 serve the source chips, nodes 3 and 4 the target chips. All nodes have
// their default parameters and are joined by the behavioural network model (20 cycles
// of latency). On each source chip a population of 64 neurons fires regularly. Every
// neuron fires once per 1500 cycles (12 us at 125 MHz, i.e. 12 ms of biological time at
// a speed-up of 1000), with a random phase, for three periods. Source neurons 0..31 go
// through bucket 0 to node 3 and source neurons 32..63 through bucket 1 to node 4. Each
// source neuron gets its own destination neuron (chip 1: n + 100, chip 2: n + 200) and an
// axonal delay of 100 ticks. Each target node has two merge buffers, one per source node.
// Checked: every spike reaches the right target chip exactly once, with the remapped
// neuron and deadline = timestamp + 100, and no spike is late or lost. The test reports
// the largest emission-to-delivery latency in cycles and checks that it stays below the
// delay.
module tb_fig2_demo;
  import pulse_pkg::*;

  localparam int NN = 4;
  localparam int POP = 64;
  localparam int PERIOD = 1500;
  localparam int PERIODS = 3;
  localparam int DELAY = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [1:0]    civ [NN];
  chip_event_t   cie [NN][2];
  logic          cov [NN];
  chip_event_t   coe [NN];
  logic [NN-1:0] txv, txr, rxv, rxr, stall;
  net_word_t     txw [NN], rxw [NN];
  logic          cwe [NN];
  logic [16:0]   cad [NN];
  logic [31:0]   cwd [NN];
  ts_t           now [NN];
  status_t       st [NN];
  int            misrouted;

  for (genvar n = 0; n < NN; n++) begin : g_node
    pulse_node u_node (
      .clk(clk), .rst_n(rst_n),
      .chip_in_valid(civ[n]), .chip_in_event(cie[n]),
      .chip_out_valid(cov[n]), .chip_out_event(coe[n]), .chip_out_ready(1'b1),
      .tx_valid(txv[n]), .tx_word(txw[n]), .tx_ready(txr[n]),
      .rx_valid(rxv[n]), .rx_word(rxw[n]), .rx_ready(rxr[n]),
      .cfg_we(cwe[n]), .cfg_addr(cad[n]), .cfg_wdata(cwd[n]),
      .now(now[n]), .status(st[n]));
  end

  extoll_net_model #(.NODES(NN), .LATENCY(20)) u_net (
    .clk, .tx_valid(txv & {NN{rst_n}}), .tx_word(txw), .tx_ready(txr), .stall,
    .rx_valid(rxv), .rx_word(rxw), .rx_ready(rxr), .misrouted);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected spikes per target node: key {neuron, deadline} -> list of emission cycles
  longint cyc = 0;
  longint sent_at [NN][int][$];
  int     n_sent = 0, n_got = 0, max_lat = 0;
  int     n_loss = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int n = 0; n < NN; n++) begin
        n_loss += int'(st[n].overflow) + int'(st[n].expired) + int'(st[n].drop_packet)
                + int'(st[n].unmapped);
        if (cov[n]) begin
          int k;
          k = int'({coe[n].neuron, coe[n].ts});
          check(sent_at[n].exists(k) && sent_at[n][k].size() > 0, "spike expected at this chip");
          if (sent_at[n].exists(k) && sent_at[n][k].size() > 0) begin
            int lat;
            lat = int'(cyc - sent_at[n][k].pop_front());
            if (lat > max_lat) max_lat = lat;
          end
          check($signed(ts_t'(coe[n].ts - now[n])) >= 0, "spike on time");
          n_got++;
        end
      end
    end
  end

  task automatic cfg(int n, logic [16:0] a, logic [31:0] d);
    @(negedge clk);
    cwe[n] = 1'b1; cad[n] = a; cwd[n] = d;
    @(negedge clk);
    cwe[n] = 1'b0;
  endtask

  int phase [2][POP];

  initial begin
    for (int n = 0; n < NN; n++) begin
      civ[n] = '0; cie[n][0] = '0; cie[n][1] = '0; cwe[n] = 1'b0; cad[n] = '0; cwd[n] = '0;
    end
    stall = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int n = 0; n < NN; n++) begin
      cfg(n, CFG_OWN_NODE, n + 1);
      cfg(n, CFG_FLUSH_SLACK, 60);
    end
    for (int n = 0; n < 2; n++) begin
      cfg(n, CFG_BUCKET_DST + 0, 3);
      cfg(n, CFG_BUCKET_DST + 1, 4);
      for (int i = 0; i < POP; i++)
        cfg(n, CFG_LUT + 17'(i),
            32'({1'b1, 2'(i < 32 ? 0 : 1), neuron_t'(i + 100 * (n + 1)), ts_t'(DELAY)}));
    end
    for (int n = 2; n < NN; n++) begin
      cfg(n, CFG_STREAM_SRC + 0, 32'h1_0001);
      cfg(n, CFG_STREAM_SRC + 1, 32'h1_0002);
    end
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < POP; i++) phase[c][i] = $urandom_range(PERIOD - 1);

    // regular firing of both populations; two spikes per cycle at most per chip
    for (int t = 0; t < PERIOD * PERIODS; t++) begin
      @(negedge clk);
      for (int c = 0; c < 2; c++) begin
        int lane;
        lane = 0;
        civ[c] = '0;
        for (int i = 0; i < POP; i++)
          if ((t % PERIOD) == phase[c][i] && lane < 2) begin
            int tgt;
            civ[c][lane] = 1'b1;
            cie[c][lane].neuron = neuron_t'(i);
            cie[c][lane].ts = now[c];
            tgt = (i < 32) ? 2 : 3;
            sent_at[tgt][int'({neuron_t'(i + 100 * (c + 1)), ts_t'(now[c] + ts_t'(DELAY))})]
              .push_back(cyc);
            n_sent++;
            lane++;
          end else if ((t % PERIOD) == phase[c][i]) begin
            phase[c][i] = (phase[c][i] + 1) % PERIOD;   // third spike in a cycle: next cycle
          end
      end
    end
    @(negedge clk);
    civ[0] = '0; civ[1] = '0;
    repeat (400) @(negedge clk);

    check(n_sent == 2 * POP * PERIODS, "all spikes emitted");
    check(n_got == n_sent, "all spikes delivered");
    check(n_loss == 0, "no spike lost");
    check(misrouted == 0, "no misrouted packet");
    check(max_lat < DELAY, "latency below the axonal delay");
    $display("spikes %0d delivered %0d, largest latency %0d cycles", n_sent, n_got, max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
