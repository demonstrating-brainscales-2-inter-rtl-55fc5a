// tb_bucket: self-checking test of event aggregation in one bucket.
//
// A monitor takes every packet word from the bucket and checks the header word
// {destination node, source node}, that events leave in the order they were accepted
// (reference queue), that no packet exceeds EVENTS_PER_PACKET events and that 'last'
// closes each packet. Directed phases then check:
//   1. flush on full: 8 events at two per cycle form one packet of 8, its header is
//      offered the cycle after the closing cycle and the packet takes 9 cycles;
//   2. flush on deadline: 3 events with deadline now+40 and slack 10 are sent as one
//      packet of 3 once now reaches deadline-10, and not before;
//   3. overflow: with the link stalled, 40 events into a 32-entry buffer drop exactly 8
//      and the 32 kept events leave as 4 full packets;
//   4. random traffic with random link stalls and random deadlines.
module tb_bucket;
  import pulse_pkg::*;

  localparam int unsigned EPP = 8;
  localparam int unsigned DEPTH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  ts_t        now;
  node_t      cfg_dst_node = 16'hBEEF, cfg_src_node = 16'h0042;
  ts_t        cfg_flush_slack;
  logic [1:0] in_valid;
  net_event_t in_event [2];
  logic       out_valid, out_ready;
  net_word_t  out_word;
  logic       overflow, flush_full, flush_deadline;

  bucket #(.EVENTS_PER_PACKET(EPP), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  net_event_t exp_q [$];
  int         pkt_len_q [$];
  int         n_overflow = 0, n_full = 0, n_deadline = 0;
  int         cycle = 0;
  int         first_header_cycle = -1;
  bit         in_pkt = 1'b0;
  int         cur_len = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time base and monitor
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      now <= now + 1'b1;
      n_overflow <= n_overflow + int'(overflow);
      n_full     <= n_full + int'(flush_full);
      n_deadline <= n_deadline + int'(flush_deadline);
      if (out_valid && out_ready) begin
        if (!in_pkt) begin
          check(out_word.data == {cfg_dst_node, cfg_src_node}, "header word");
          check(!out_word.last, "header not last");
          if (first_header_cycle < 0) first_header_cycle = cycle;
          in_pkt  = 1'b1;
          cur_len = 0;
        end else begin
          net_event_t e;
          e = event_of_word(out_word.data);
          cur_len++;
          check(exp_q.size() > 0, "unexpected event");
          if (exp_q.size() > 0) check(e == exp_q.pop_front(), "event order/content");
          check(out_word.data[31:22] == '0, "event word padding");
          check(cur_len <= EPP, "packet size");
          if (out_word.last) begin
            in_pkt = 1'b0;
            pkt_len_q.push_back(cur_len);
          end
        end
      end
    end
  end

  // drive one cycle of input; events the bucket will accept go to the reference queue
  task automatic drive(bit v0, bit v1, ts_t dl0, ts_t dl1);
    @(negedge clk);
    in_valid = {v1, v0};
    in_event[0] = '{neuron: neuron_t'($urandom), deadline: dl0};
    in_event[1] = '{neuron: neuron_t'($urandom), deadline: dl1};
  endtask

  task automatic idle(int n);
    @(negedge clk);
    in_valid = '0;
    repeat (n) @(negedge clk);
  endtask

  // accepted events enter the reference queue at the clock edge, when overflow is known
  always @(posedge clk) begin
    if (rst_n) begin
      int free;
      free = int'(DEPTH) - int'(dut.count);
      for (int l = 0; l < 2; l++)
        if (in_valid[l]) begin
          if (free > 0) begin
            exp_q.push_back(in_event[l]);
            free--;
          end
        end
    end
  end

  initial begin
    int t_close;
    now = '0;
    in_valid = '0;
    out_ready = 1'b1;
    cfg_flush_slack = 8'd0;
    in_event[0] = '0;
    in_event[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1. flush on full
    for (int i = 0; i < 4; i++) drive(1, 1, now + 8'd100, now + 8'd100);
    t_close = cycle;
    idle(20);
    check(pkt_len_q.size() == 1 && pkt_len_q[0] == EPP, "full packet of 8");
    check(n_full == 1 && n_deadline == 0, "one flush on full");
    check(first_header_cycle == t_close + 1, "header one cycle after close");
    pkt_len_q.delete();

    // ---- 2. flush on deadline
    cfg_flush_slack = 8'd10;
    drive(1, 1, now + 8'd40, now + 8'd45);
    drive(1, 0, now + 8'd60, 8'd0);
    idle(0);
    // the earliest deadline is reached minus 10 ticks about 28 cycles from now
    repeat (20) @(negedge clk);
    check(pkt_len_q.size() == 0 && n_deadline == 0, "no early flush");
    repeat (20) @(negedge clk);
    check(pkt_len_q.size() == 1 && pkt_len_q[0] == 3, "deadline packet of 3");
    check(n_deadline == 1, "one flush on deadline");
    pkt_len_q.delete();

    // ---- 3. overflow with stalled link
    cfg_flush_slack = 8'd0;
    out_ready = 1'b0;
    for (int i = 0; i < 20; i++) drive(1, 1, now + 8'd120, now + 8'd120);
    idle(2);
    check(n_overflow == 4 && int'(dut.count) == int'(DEPTH), "8 events dropped (4 cycles of 2)");
    out_ready = 1'b1;
    idle(60);
    check(pkt_len_q.size() == 4, "four packets after overflow");
    foreach (pkt_len_q[i]) check(pkt_len_q[i] == EPP, "full packets after overflow");
    pkt_len_q.delete();

    // ---- 4. random traffic
    cfg_flush_slack = 8'd20;
    fork
      begin
        for (int i = 0; i < 2000; i++)
          drive($urandom_range(2) == 0, $urandom_range(3) == 0,
                now + 8'($urandom_range(30, 90)), now + 8'($urandom_range(30, 90)));
        idle(200);
      end
      begin
        for (int i = 0; i < 2200; i++) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
        end
        out_ready = 1'b1;
      end
    join
    idle(100);
    check(exp_q.size() == 0, "all accepted events delivered");
    check(n_full > 10 && n_deadline > 5, "both flush kinds in random traffic");
    $display("flush_full=%0d flush_deadline=%0d overflow=%0d", n_full, n_deadline, n_overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
