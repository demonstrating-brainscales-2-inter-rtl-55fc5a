// tb_temporal_merge: the destination merge with and without temporal ordering, end to end.
//
// Two source nodes (1, 2) send the same pattern of spikes to two target nodes: node 3
// is built with TEMPORAL_MERGE = 1, node 4 with the default (round-robin service, as in
// the prototype). For 30 cycles one of the source chips emits a pair of spikes per
// cycle; source neuron i < 32 goes to node 3 and i + 32 to node 4, with an axonal
// delay of 110 ticks. Source 1 fires in the first 15 cycles and source 2 in the next 15. Both target chips hold chip_out_ready low for 75 cycles, so that
// all packets are in the merge buffers, and then take one spike per cycle. Checked: both
// chips receive every spike exactly once and on time; node 3 receives them in
// non-decreasing deadline order; node 4, which does not sort, receives at least one
// spike out of order, which shows that the ordering comes from the merge mode.
module tb_temporal_merge;
  import pulse_pkg::*;

  localparam int NN = 4;
  localparam int DELAY = 110;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [1:0]    civ [NN];
  chip_event_t   cie [NN][2];
  logic          cov [NN], cor [NN];
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
    pulse_node #(.TEMPORAL_MERGE(n == 2)) u_node (
      .clk(clk), .rst_n(rst_n),
      .chip_in_valid(civ[n]), .chip_in_event(cie[n]),
      .chip_out_valid(cov[n]), .chip_out_event(coe[n]), .chip_out_ready(cor[n]),
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_cnt [NN][int];
  int n_sent [NN], n_got [NN], n_inv [NN];
  logic signed [TS_W-1:0] last_slack [NN];
  bit have_last [NN];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 2; n < NN; n++) begin
        if (cov[n] && cor[n]) begin
          int k;
          logic signed [TS_W-1:0] s;
          k = int'({coe[n].neuron, coe[n].ts});
          check(exp_cnt[n].exists(k) && exp_cnt[n][k] > 0, "spike expected");
          if (exp_cnt[n].exists(k)) exp_cnt[n][k]--;
          s = slack(coe[n].ts, now[n]);
          check(s >= 0, "spike on time");
          // slack shrinks by one per cycle: compare deadlines, not slacks
          if (have_last[n] && (s + 8'sd1 < last_slack[n])) n_inv[n]++;
          last_slack[n] = s;
          have_last[n] = 1'b1;
          n_got[n]++;
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

  initial begin
    for (int n = 0; n < NN; n++) begin
      civ[n] = '0; cie[n][0] = '0; cie[n][1] = '0; cwe[n] = 1'b0; cad[n] = '0; cwd[n] = '0;
      cor[n] = 1'b1; n_sent[n] = 0; n_got[n] = 0; n_inv[n] = 0; have_last[n] = 1'b0;
      last_slack[n] = '0;
    end
    stall = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < NN; n++) begin
      cfg(n, CFG_OWN_NODE, n + 1);
      cfg(n, CFG_FLUSH_SLACK, 100);
    end
    for (int n = 0; n < 2; n++) begin
      cfg(n, CFG_BUCKET_DST + 0, 3);
      cfg(n, CFG_BUCKET_DST + 1, 4);
      for (int i = 0; i < 64; i++)
        cfg(n, CFG_LUT + 17'(i),
            32'({1'b1, 2'(i < 32 ? 0 : 1), neuron_t'(i + 100 * (n + 1)), ts_t'(DELAY)}));
    end
    for (int n = 2; n < NN; n++) begin
      cfg(n, CFG_STREAM_SRC + 0, 32'h1_0001);
      cfg(n, CFG_STREAM_SRC + 1, 32'h1_0002);
    end

    cor[2] = 1'b0; cor[3] = 1'b0;
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      for (int c = 0; c < 2; c++) begin
        // source 1 fires in the first 15 cycles, source 2 in the next 15, so served in
        // turn the two streams would alternate between early and late deadlines
        civ[c] = ((t / 15) == c) ? 2'b11 : 2'b00;
        if (civ[c] != 0) begin
          int i;
          i = $urandom_range(31);
          cie[c][0] = '{neuron: neuron_t'(i), ts: now[c]};
          cie[c][1] = '{neuron: neuron_t'(i + 32), ts: now[c]};
          exp_cnt[2][int'({neuron_t'(i + 100 * (c + 1)), ts_t'(now[c] + DELAY)})]++;
          exp_cnt[3][int'({neuron_t'(i + 32 + 100 * (c + 1)), ts_t'(now[c] + DELAY)})]++;
          n_sent[2]++;
          n_sent[3]++;
        end
      end
    end
    @(negedge clk);
    civ[0] = '0; civ[1] = '0;
    repeat (45) @(negedge clk);
    cor[2] = 1'b1; cor[3] = 1'b1;
    repeat (200) @(negedge clk);

    check(n_got[2] == n_sent[2] && n_got[3] == n_sent[3], "all spikes delivered");
    check(n_inv[2] == 0, "temporal merge: deadlines in order");
    check(n_inv[3] > 0, "round-robin service: some spikes out of order");
    check(misrouted == 0, "no misrouted packet");
    $display("sent %0d/%0d, inversions: temporal=%0d round-robin=%0d",
             n_sent[2], n_sent[3], n_inv[2], n_inv[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
