// tb_sorted_stream: self-checking test of one merge buffer.
//
// Fills the 32-entry buffer until push_ready drops (exactly 32 events must fit), empties
// it, and then runs random simultaneous pushes and pops. Every popped head is compared
// with a reference queue; level, push_ready and head_valid are compared with the
// reference fill level every cycle, including the one-cycle delay from push to head.
module tb_sorted_stream;
  import pulse_pkg::*;

  localparam int unsigned DEPTH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       push_valid, push_ready, head_valid, pop;
  net_event_t push_event, head_event;
  logic [5:0] level;

  sorted_stream #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  net_event_t ref_q [$];

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

  // reference model and per-cycle checks, sampled just before each clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      check(int'(level) == ref_q.size(), "level");
      check(push_ready == (ref_q.size() < DEPTH), "push_ready");
      check(head_valid == (ref_q.size() > 0), "head_valid");
      if (pop && head_valid) begin
        check(head_event == ref_q[0], "head event");
        void'(ref_q.pop_front());
      end
      if (push_valid && push_ready) ref_q.push_back(push_event);
    end
  end

  initial begin
    int pushed;
    pushed = 0;
    push_valid = 1'b0; pop = 1'b0; push_event = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // fill
    push_valid = 1'b1;
    for (int i = 0; i < 40; i++) begin
      push_event = net_event_t'($urandom);
      if (push_ready) pushed++;
      @(negedge clk);
    end
    check(pushed == DEPTH, "exactly DEPTH entries fit");
    push_valid = 1'b0;
    pop = 1'b1;
    repeat (40) @(negedge clk);
    check(ref_q.size() == 0, "emptied");
    // random
    for (int i = 0; i < 3000; i++) begin
      push_valid = ($urandom_range(2) != 0);
      push_event = net_event_t'($urandom);
      pop = ($urandom_range(1) != 0);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
