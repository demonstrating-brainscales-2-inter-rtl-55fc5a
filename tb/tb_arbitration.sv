// tb_arbitration: self-checking test of the packet arbiter.
//
// Four sources each send packets of 1 to 6 words; every word carries {source, packet
// number, word number} so the monitor can check that packets arrive whole (never
// interleaved), complete and in order per source, and that 'last' ends each one. In a
// saturated phase all four sources always have a packet and the link never stalls: the
// grants must then rotate 0,1,2,3,0,... and packets must follow back to back without idle
// cycles. A random phase adds random link stalls and random source gaps.
module tb_arbitration;
  import pulse_pkg::*;

  localparam int unsigned N = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready;
  net_word_t    in_word [N];
  logic         out_valid, out_ready, contention;
  net_word_t    out_word;

  arbitration #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int pkt_no   [N];   // next packet number to send, per source
  int word_no  [N];
  int pkt_len  [N];
  int exp_pkt  [N];   // next packet number expected, per source
  bit          gap_en = 1'b0;
  int          cur_src = -1, cur_word = 0;
  int          grant_log [$];
  int          idle_cycles = 0, n_contention = 0;
  bit          mon_busy_phase = 1'b0;

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

  // sources
  for (genvar i = 0; i < N; i++) begin : g_src
    always_comb begin
      in_word[i].data = {8'(i), 12'(pkt_no[i]), 12'(word_no[i])};
      in_word[i].last = (word_no[i] == pkt_len[i] - 1);
    end
    always @(posedge clk) begin
      if (!rst_n) begin
        in_valid[i] <= 1'b1;
      end else if (in_valid[i] && in_ready[i]) begin
        if (word_no[i] == pkt_len[i] - 1) begin
          pkt_no[i]  <= pkt_no[i] + 1;
          word_no[i] <= 0;
          pkt_len[i] <= $urandom_range(1, 6);
          in_valid[i] <= gap_en ? ($urandom_range(2) != 0) : 1'b1;
        end else begin
          word_no[i] <= word_no[i] + 1;
        end
      end else if (!in_valid[i]) begin
        in_valid[i] <= gap_en ? ($urandom_range(2) == 0) : 1'b1;
      end
    end
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n) begin
      n_contention <= n_contention + int'(contention);
      if (mon_busy_phase && !(out_valid && out_ready)) idle_cycles++;
      if (out_valid && out_ready) begin
        int s, p, w;
        s = int'(out_word.data[31:24]);
        p = int'(out_word.data[23:12]);
        w = int'(out_word.data[11:0]);
        check(s < N, "source field");
        if (cur_src < 0) begin
          check(w == 0, "packet starts with word 0");
          if (s < N) check(p == (exp_pkt[s] % 4096), "packet order per source");
          cur_src  = s;
          cur_word = 0;
          grant_log.push_back(s);
        end else begin
          check(s == cur_src, "no interleaving");
          check(w == cur_word, "word order");
        end
        cur_word++;
        if (out_word.last) begin
          if (s < N) exp_pkt[s]++;
          cur_src = -1;
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      pkt_no[i] = 0; word_no[i] = 0; pkt_len[i] = 1 + i; exp_pkt[i] = 0;
    end
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // saturated phase
    mon_busy_phase = 1'b1;
    repeat (400) @(negedge clk);
    mon_busy_phase = 1'b0;
    check(idle_cycles == 0, "no idle link cycle while saturated");
    for (int k = 1; k < grant_log.size(); k++)
      check(grant_log[k] == (grant_log[k-1] + 1) % N, "round-robin order");
    check(grant_log.size() > 40, "enough packets");
    check(n_contention > 40, "contention seen");

    // random phase
    gap_en = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = ($urandom_range(2) != 0);
    end
    out_ready = 1'b1;
    repeat (50) @(negedge clk);
    for (int i = 0; i < N; i++) check(exp_pkt[i] > 100, "every source served");
    $display("packets %0d %0d %0d %0d", exp_pkt[0], exp_pkt[1], exp_pkt[2], exp_pkt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
