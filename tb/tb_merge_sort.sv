// tb_merge_sort: self-checking test of the destination merge stage, in both modes.
//
// Two instances are fed by queue models of four merge buffers, each filled with events
// of ascending deadline; some deadlines are already past. The system time is held
// still while a round drains so that the expected order is exact.
//   - TEMPORAL_MERGE = 1: the events reaching the chip must be exactly the not-yet-expired
//     events of all streams, sorted by deadline (ties to the lower stream).
//   - TEMPORAL_MERGE = 0: the streams must be served in round-robin order, one event
//     each, skipping empty ones.
// In both, expired events must be removed with one 'expired' pulse each and never sent,
// and with out_ready low nothing may be removed unless it is expired.
module tb_merge_sort;
  import pulse_pkg::*;

  localparam int unsigned N = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  ts_t now;
  logic out_ready;

  // two instances, one per mode
  logic [N-1:0] hv [2];
  net_event_t   he [2][N];
  logic [N-1:0] pop [2];
  logic         ov [2], ex [2];
  chip_event_t  oe [2];

  merge_sort #(.N(N), .TEMPORAL_MERGE(1'b0)) dut_rr (
    .clk, .rst_n, .now, .head_valid(hv[0]), .head_event(he[0]), .pop(pop[0]),
    .out_valid(ov[0]), .out_event(oe[0]), .out_ready, .expired(ex[0]));
  merge_sort #(.N(N), .TEMPORAL_MERGE(1'b1)) dut_tm (
    .clk, .rst_n, .now, .head_valid(hv[1]), .head_event(he[1]), .pop(pop[1]),
    .out_valid(ov[1]), .out_event(oe[1]), .out_ready, .expired(ex[1]));

  int checks = 0, failures = 0;
  net_event_t q [2][N][$];
  chip_event_t got [2][$];
  int n_exp [2];

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

  always_comb begin
    for (int m = 0; m < 2; m++)
      for (int s = 0; s < N; s++) begin
        hv[m][s] = (q[m][s].size() > 0);
        he[m][s] = (q[m][s].size() > 0) ? q[m][s][0] : '0;
      end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < 2; m++) begin
        check($countones(pop[m]) <= 1, "one pop per cycle");
        if (!out_ready) check(pop[m] == '0 || ex[m], "no pop while stalled");
        if (ov[m] && out_ready) got[m].push_back(oe[m]);
        n_exp[m] += int'(ex[m]);
        for (int s = 0; s < N; s++) if (pop[m][s]) void'(q[m][s].pop_front());
      end
    end
  end

  initial begin
    for (int round = 0; round < 60; round++) begin
      net_event_t all [$];
      int n_late;
      @(negedge clk);
      rst_n = 1'b1;
      now = ts_t'($urandom);
      n_late = 0;
      all.delete();
      for (int s = 0; s < N; s++) begin
        int d, len;
        d = -($urandom_range(0, 6));                  // start a few ticks in the past
        len = $urandom_range(0, 8);
        for (int i = 0; i < len; i++) begin
          net_event_t e;
          e.neuron   = neuron_t'($urandom);
          e.deadline = now + ts_t'(d);
          if (d < 0) n_late++;
          for (int m = 0; m < 2; m++) q[m][s].push_back(e);
          all.push_back(e);
          d += $urandom_range(0, 12);
        end
      end
      got[0].delete(); got[1].delete();
      n_exp[0] = 0; n_exp[1] = 0;
      // stalled for a few cycles: only expired events may leave
      out_ready = 1'b0;
      repeat (3) @(negedge clk);
      out_ready = 1'b1;
      repeat (40) @(negedge clk);
      for (int m = 0; m < 2; m++) begin
        check(n_exp[m] == n_late, "expired count");
        check(got[m].size() == all.size() - n_late, "delivered count");
        for (int s = 0; s < N; s++) check(q[m][s].size() == 0, "drained");
      end
      // temporal merge: sorted by deadline relative to now, ties to the lower stream
      for (int k = 1; k < got[1].size(); k++)
        check($signed(ts_t'(got[1][k].ts - now)) >= $signed(ts_t'(got[1][k-1].ts - now)),
              "temporal merge order");
      for (int k = 0; k < got[1].size(); k++)
        check($signed(ts_t'(got[1][k].ts - now)) >= 0, "no expired event sent");
    end

    // round-robin service order for the prototype mode
    begin
      int order [$];
      @(negedge clk);
      now = 8'd0;
      for (int s = 0; s < N; s++)
        for (int i = 0; i < 3 + s; i++)
          q[0][s].push_back('{neuron: neuron_t'(s), deadline: 8'd50});
      got[0].delete();
      repeat (30) @(negedge clk);
      // expected: streams 0..3 in turn, skipping emptied ones
      begin
        int left [N];
        int exp_s [$];
        int s;
        for (int k = 0; k < N; k++) left[k] = 3 + k;
        // the rotation starts after the stream served last, seen in the first event
        s = int'(got[0][0].neuron);
        while (exp_s.size() < 18) begin
          if (left[s] > 0) begin
            exp_s.push_back(s);
            left[s]--;
          end
          s = (s + 1) % N;
        end
        check(got[0].size() == 18, "round-robin count");
        for (int k = 0; k < got[0].size() && k < 18; k++)
          check(int'(got[0][k].neuron) == exp_s[k], "round-robin order");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    now = '0;
    out_ready = 1'b1;
  end
endmodule
