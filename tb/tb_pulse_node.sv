// tb_pulse_node: end-to-end test of two pulse nodes joined by a network model, with all
// parameters of the nodes at their defaults.
//
// Node A (address 1) and node B (address 2) are configured through their register ports:
//   A: source neurons 0..63 -> bucket 0 -> node B, destination neuron n+1000, delay 60
//      source neurons 64..127 -> bucket 1 -> node A itself, neuron n+3000, delay 50
//      source neurons 128..131 disabled; source neuron 132 -> bucket 0, delay 3
//   B: source neurons 0..63 -> bucket 0 -> node B itself, neuron n+2000, delay 70
//   A receives from A (merge buffer 0); B receives from A (buffer 0) and B (buffer 1).
// Phases: (1) random traffic from both chips; every event must reach its target chip
// exactly once, with the remapped neuron and deadline = timestamp + delay, and before
// its deadline; (2) events with a 3-tick delay, which must expire at node B and be
// dropped; (3) a burst of two events per cycle into one bucket while A's link is
// stalled, which must overflow that bucket; (4) B's buffer for node A switched off,
// so that B discards A's packets. The test counts each mechanism (flush on full, flush
// on deadline, contention at the arbiter, unmapped event, expiry, overflow, link stall,
// discarded packet, interleaving of two streams at B) and fails if one never happened.
module tb_pulse_node;
  import pulse_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;   // 125 MHz

  // two nodes
  logic [1:0]  civ [2];
  chip_event_t cie [2][2];
  logic        cov [2], cor [2];
  chip_event_t coe [2];
  logic [1:0]  txv, txr, rxv, rxr, stall;
  net_word_t   txw [2], rxw [2];
  logic        cwe [2];
  logic [16:0] cad [2];
  logic [31:0] cwd [2];
  ts_t         now [2];
  status_t     st [2];
  int          misrouted;

  for (genvar n = 0; n < 2; n++) begin : g_node
    pulse_node u_node (
      .clk           (clk),
      .rst_n         (rst_n),
      .chip_in_valid (civ[n]),
      .chip_in_event (cie[n]),
      .chip_out_valid(cov[n]),
      .chip_out_event(coe[n]),
      .chip_out_ready(cor[n]),
      .tx_valid      (txv[n]),
      .tx_word       (txw[n]),
      .tx_ready      (txr[n]),
      .rx_valid      (rxv[n]),
      .rx_word       (rxw[n]),
      .rx_ready      (rxr[n]),
      .cfg_we        (cwe[n]),
      .cfg_addr      (cad[n]),
      .cfg_wdata     (cwd[n]),
      .now           (now[n]),
      .status        (st[n])
    );
  end

  extoll_net_model #(.NODES(2), .LATENCY(20)) u_net (
    .clk, .tx_valid(txv & {2{rst_n}}), .tx_word(txw), .tx_ready(txr), .stall,
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference model
  // expected deliveries per target node, keyed by {neuron, deadline}
  int exp_cnt [2][int];
  int n_expected [2];
  int n_delivered [2];
  int n_unexpected = 0, n_late = 0;
  bit strict = 1'b1;          // every delivered event must be expected
  int last_src_b = -1, n_interleave = 0;
  int n_full = 0, n_dl = 0, n_cont = 0, n_unmapped = 0, n_expired = 0, n_ovf = 0;
  int n_drop = 0, n_stall = 0;

  function automatic int key(neuron_t n, ts_t d);
    return int'({n, d});
  endfunction

  // routing of the test configuration: returns target node (-1: none), neuron, delay
  function automatic void route(int node, neuron_t src, output int tgt,
                                output neuron_t nn, output ts_t dly);
    tgt = -1; nn = '0; dly = '0;
    if (node == 0) begin
      if (src < 64)        begin tgt = 1; nn = src + 1000; dly = 60; end
      else if (src < 128)  begin tgt = 0; nn = src + 3000; dly = 50; end
      else if (src == 132) begin tgt = 1; nn = 14'd5000;   dly = 3;  end
    end else begin
      if (src < 64)        begin tgt = 1; nn = src + 2000; dly = 70; end
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < 2; n++) begin
        n_full     += int'(st[n].flush_full);
        n_dl       += int'(st[n].flush_deadline);
        n_cont     += int'(st[n].contention);
        n_unmapped += int'(st[n].unmapped);
        n_expired  += int'(st[n].expired);
        n_ovf      += int'(st[n].overflow);
        n_drop     += int'(st[n].drop_packet);
        n_stall    += int'(txv[n] && !txr[n]);
        if (cov[n] && cor[n]) begin
          int k;
          k = key(coe[n].neuron, coe[n].ts);
          n_delivered[n]++;
          if (exp_cnt[n].exists(k) && exp_cnt[n][k] > 0) exp_cnt[n][k]--;
          else n_unexpected++;
          check(n_unexpected == 0, "delivered event was expected");
          if ($signed(ts_t'(coe[n].ts - now[n])) < 0) n_late++;
          check(n_late == 0, "delivered before its deadline");
          if (n == 1) begin
            int s;
            s = (coe[n].neuron >= 2000) ? 1 : 0;
            if (last_src_b >= 0 && s != last_src_b) n_interleave++;
            last_src_b = s;
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- stimulus helpers
  task automatic cfg(int n, logic [16:0] a, logic [31:0] d);
    @(negedge clk);
    cwe[n] = 1'b1; cad[n] = a; cwd[n] = d;
    @(negedge clk);
    cwe[n] = 1'b0;
  endtask

  function automatic logic [31:0] lut_entry(bit en, int b, neuron_t nn, ts_t dly);
    return 32'({en, 2'(b), nn, dly});
  endfunction

  // one cycle of chip events; p = probability in percent per lane
  task automatic chip_cycle(int n, int p, int lo, int hi, bit count);
    @(negedge clk);
    for (int l = 0; l < 2; l++) begin
      civ[n][l]        = ($urandom_range(99) < p);
      cie[n][l].neuron = neuron_t'($urandom_range(lo, hi));
      cie[n][l].ts     = now[n];
      if (civ[n][l] && count) begin
        int tgt; neuron_t nn; ts_t dly;
        route(n, cie[n][l].neuron, tgt, nn, dly);
        if (tgt >= 0) begin
          exp_cnt[tgt][key(nn, cie[n][l].ts + dly)]++;
          n_expected[tgt]++;
        end
      end
    end
  endtask

  task automatic quiet(int cycles);
    @(negedge clk);
    civ[0] = '0; civ[1] = '0;
    repeat (cycles) @(negedge clk);
  endtask

  function automatic int outstanding(int n);
    int s = 0;
    foreach (exp_cnt[n][k]) s += exp_cnt[n][k];
    return s;
  endfunction

  // ---------------------------------------------------------------- test
  initial begin
    int inj_burst;
    for (int n = 0; n < 2; n++) begin
      civ[n] = '0; cie[n][0] = '0; cie[n][1] = '0;
      cor[n] = 1'b1; cwe[n] = 1'b0; cad[n] = '0; cwd[n] = '0;
    end
    stall = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // configuration
    cfg(0, CFG_OWN_NODE, 1);
    cfg(1, CFG_OWN_NODE, 2);
    cfg(0, CFG_FLUSH_SLACK, 45);
    cfg(1, CFG_FLUSH_SLACK, 45);
    cfg(0, CFG_BUCKET_DST + 0, 2);
    cfg(0, CFG_BUCKET_DST + 1, 1);
    cfg(1, CFG_BUCKET_DST + 0, 2);
    cfg(0, CFG_STREAM_SRC + 0, 32'h1_0001);
    cfg(1, CFG_STREAM_SRC + 0, 32'h1_0001);
    cfg(1, CFG_STREAM_SRC + 1, 32'h1_0002);
    for (int i = 0; i < 64; i++) begin
      cfg(0, CFG_LUT + 17'(i),      lut_entry(1, 0, neuron_t'(i + 1000), 60));
      cfg(0, CFG_LUT + 17'(i + 64), lut_entry(1, 1, neuron_t'(i + 64 + 3000), 50));
      cfg(1, CFG_LUT + 17'(i),      lut_entry(1, 0, neuron_t'(i + 2000), 70));
    end
    for (int i = 128; i < 132; i++) cfg(0, CFG_LUT + 17'(i), lut_entry(0, 0, '0, 0));
    cfg(0, CFG_LUT + 17'(132), lut_entry(1, 0, 14'd5000, 3));

    // ---- phase 1: random traffic on both chips
    fork
      for (int c = 0; c < 3000; c++) chip_cycle(0, 15, 0, 131, 1'b1);
      for (int c = 0; c < 3000; c++) chip_cycle(1, 15, 0, 63, 1'b1);
      for (int c = 0; c < 3000; c++) begin
        @(negedge clk);
        cor[1] = ($urandom_range(9) != 0);
      end
    join
    cor[1] = 1'b1;
    quiet(300);
    check(n_unexpected == 0, "phase 1: no unexpected event");
    check(n_late == 0, "phase 1: no event delivered after its deadline");
    check(outstanding(0) == 0 && outstanding(1) == 0, "phase 1: every event delivered");
    check(n_delivered[0] == n_expected[0] && n_delivered[1] == n_expected[1],
          "phase 1: delivered counts");
    check(n_expired == 0 && n_ovf == 0, "phase 1: no loss");
    $display("phase 1: delivered A=%0d B=%0d", n_delivered[0], n_delivered[1]);

    // ---- phase 2: events with too short a delay expire at node B
    begin
      int del0;
      del0 = n_delivered[1];
      for (int c = 0; c < 20; c++) chip_cycle(0, 50, 132, 132, 1'b0);
      quiet(200);
      check(n_expired > 0, "phase 2: short-delay events expired");
      check(n_delivered[1] == del0, "phase 2: expired events not delivered");
    end

    // ---- phase 3: burst into one bucket while A's link is stalled
    begin
      int del0;
      strict = 1'b0;
      del0 = n_delivered[1];
      stall[0] = 1'b1;
      inj_burst = 0;
      for (int c = 0; c < 30; c++) begin
        chip_cycle(0, 100, 0, 63, 1'b1);
        inj_burst += 2;
      end
      stall[0] = 1'b0;
      quiet(400);
      check(n_ovf > 0, "phase 3: bucket overflow");
      check(n_delivered[1] - del0 < inj_burst, "phase 3: events lost to overflow");
      check(n_delivered[1] - del0 > 0, "phase 3: kept events delivered");
      check(n_unexpected == 0, "phase 3: no unexpected event");
      // forget what was lost
      foreach (exp_cnt[1][k]) exp_cnt[1][k] = 0;
    end

    // ---- phase 4: B drops packets from a source without merge buffer
    begin
      int del0;
      cfg(1, CFG_STREAM_SRC + 0, 32'h0_0001);
      del0 = n_delivered[1];
      for (int c = 0; c < 50; c++) chip_cycle(0, 30, 0, 63, 1'b0);
      quiet(200);
      check(n_drop > 0, "phase 4: packets discarded");
      check(n_delivered[1] == del0, "phase 4: nothing delivered");
      cfg(1, CFG_STREAM_SRC + 0, 32'h1_0001);
    end

    // ---- mechanisms
    $display("flush_full=%0d flush_deadline=%0d contention=%0d unmapped=%0d expired=%0d",
             n_full, n_dl, n_cont, n_unmapped, n_expired);
    $display("overflow=%0d link_stall=%0d dropped_packets=%0d interleave_at_B=%0d",
             n_ovf, n_stall, n_drop, n_interleave);
    check(n_full > 0, "mechanism: flush on full");
    check(n_dl > 0, "mechanism: flush on deadline");
    check(n_cont > 0, "mechanism: arbitration contention");
    check(n_unmapped > 0, "mechanism: unmapped event");
    check(n_expired > 0, "mechanism: expiry");
    check(n_ovf > 0, "mechanism: overflow");
    check(n_stall > 0, "mechanism: link stall");
    check(n_drop > 0, "mechanism: packet discard");
    check(n_interleave > 0, "mechanism: two streams merged at B");
    check(misrouted == 0, "no misrouted packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
