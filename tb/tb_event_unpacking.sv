// tb_event_unpacking: self-checking test of packet unpacking.
//
// Three of four merge buffers are configured with source nodes 0x0011, 0x0022, 0x0033
// (the fourth is disabled). The test sends packets from these sources, from an unknown
// source and with a wrong destination node, with random gaps and random buffer
// back-pressure. The tb models the buffers as queues: each event must reach the buffer of
// its source, in order, with neuron and deadline intact; the others must be discarded
// with exactly one drop_packet pulse each; while the chosen buffer is not ready the input
// must stall.
module tb_event_unpacking;
  import pulse_pkg::*;

  localparam int unsigned NS = 4;
  localparam node_t OWN = 16'h0005;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  node_t           cfg_own_node = OWN;
  node_t           cfg_stream_src [NS];
  logic [NS-1:0]   cfg_stream_en = 4'b0111;
  logic            in_valid, in_ready;
  net_word_t       in_word;
  logic [NS-1:0]   push_valid, push_ready;
  net_event_t      push_event;
  logic            drop_packet, event_out;

  event_unpacking #(.NUM_STREAMS(NS)) dut (.*);

  int checks = 0, failures = 0;
  net_event_t exp_q [NS][$];
  int         n_drop = 0, exp_drop = 0;
  int         n_stalls = 0;

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

  always @(posedge clk) begin
    if (rst_n) begin
      n_drop <= n_drop + int'(drop_packet);
      check($countones(push_valid) <= 1, "one push at a time");
      for (int s = 0; s < NS; s++) begin
        if (push_valid[s] && push_ready[s]) begin
          check(exp_q[s].size() > 0, "unexpected event");
          if (exp_q[s].size() > 0) check(push_event == exp_q[s].pop_front(), "event in stream");
        end
        if (push_valid[s] && !push_ready[s]) begin
          check(!in_ready, "stall while buffer full");
          n_stalls++;
        end
      end
    end
  end

  always @(negedge clk) push_ready <= NS'($urandom);

  task automatic send_word(word_t d, bit last);
    in_valid     = 1'b1;
    in_word.data = d;
    in_word.last = last;
    do @(posedge clk); while (!in_ready);
    #1;
    in_valid = 1'b0;
    if ($urandom_range(3) == 0) @(posedge clk);
    #1;
  endtask

  task automatic send_packet(node_t dst, node_t src, int n);
    int s;
    bit good;
    s = -1;
    for (int k = 0; k < NS; k++) if (cfg_stream_en[k] && cfg_stream_src[k] == src) s = k;
    good = (s >= 0) && (dst == OWN);
    if (!good) exp_drop++;
    send_word(make_header(dst, src), n == 0);
    for (int i = 0; i < n; i++) begin
      net_event_t e;
      e = net_event_t'($urandom);
      if (good) exp_q[s].push_back(e);
      send_word(make_event_word(e), i == n - 1);
    end
  endtask

  initial begin
    cfg_stream_src[0] = 16'h0011;
    cfg_stream_src[1] = 16'h0022;
    cfg_stream_src[2] = 16'h0033;
    cfg_stream_src[3] = 16'h0044;   // disabled
    in_valid = 1'b0;
    in_word  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int p = 0; p < 600; p++) begin
      int r;
      r = $urandom_range(9);
      case (r)
        7:       send_packet(OWN, 16'h0044, $urandom_range(1, 8));   // disabled stream
        8:       send_packet(OWN, 16'h0099, $urandom_range(1, 8));   // unknown source
        9:       send_packet(16'h0006, 16'h0011, $urandom_range(1, 8)); // not for us
        default: send_packet(OWN, 16'h0011 * node_t'(1 + r % 3), $urandom_range(1, 8));
      endcase
    end
    repeat (5) @(posedge clk);
    for (int s = 0; s < NS; s++) check(exp_q[s].size() == 0, "all events delivered");
    check(n_drop == exp_drop, "one drop per discarded packet");
    check(n_stalls > 50, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
