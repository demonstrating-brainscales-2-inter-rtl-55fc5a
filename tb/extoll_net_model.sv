// extoll_net_model: behavioural model of the packet network between pulse nodes
// (simulation only, not synthesizable).
//
// Port p belongs to the node with address p+1. A packet is taken word by word from a
// node's transmit stream (tx_ready follows the 'stall' input, to model a congested
// link); when its last word has arrived, the whole packet is routed by the destination
// node address in its header word to that node's receive queue and becomes visible
// there LATENCY cycles later. Packets to an address without a port are discarded and
// counted. Receive ports are valid/ready streams; packets from different senders are
// never interleaved.
module extoll_net_model
  import pulse_pkg::*;
#(
  parameter int unsigned NODES   = 2,
  parameter int unsigned LATENCY = 20
) (
  input  logic             clk,
  input  logic [NODES-1:0] tx_valid,
  input  net_word_t        tx_word [NODES],
  output logic [NODES-1:0] tx_ready,
  input  logic [NODES-1:0] stall,
  output logic [NODES-1:0] rx_valid,
  output net_word_t        rx_word [NODES],
  input  logic [NODES-1:0] rx_ready,
  output int               misrouted
);

  net_word_t cur   [NODES][$];  // packet being collected, per sender
  net_word_t dq    [NODES][$];  // words waiting for each receiver
  longint    rel   [NODES][$];  // release cycle of each waiting word
  longint    cycle = 0;

  assign tx_ready = ~stall;

  initial begin
    misrouted = 0;
    rx_valid  = '0;
    for (int p = 0; p < NODES; p++) rx_word[p] = '0;
  end

  always @(posedge clk) begin
    cycle++;
    // receive side: hand out words
    for (int p = 0; p < NODES; p++)
      if (rx_valid[p] && rx_ready[p]) begin
        void'(dq[p].pop_front());
        void'(rel[p].pop_front());
      end
    // transmit side: collect and route whole packets
    for (int p = 0; p < NODES; p++)
      if (tx_valid[p] && tx_ready[p]) begin
        cur[p].push_back(tx_word[p]);
        if (tx_word[p].last) begin
          int d;
          d = int'(header_dst(cur[p][0].data)) - 1;
          if (d >= 0 && d < int'(NODES)) begin
            foreach (cur[p][i]) begin
              dq[d].push_back(cur[p][i]);
              rel[d].push_back(cycle + longint'(LATENCY));
            end
          end else begin
            misrouted++;
          end
          cur[p].delete();
        end
      end
    for (int p = 0; p < NODES; p++) begin
      rx_valid[p] <= (dq[p].size() > 0) && (rel[p][0] <= cycle);
      rx_word[p]  <= (dq[p].size() > 0) ? dq[p][0] : '0;
    end
  end

endmodule
