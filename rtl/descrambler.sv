// descrambler: recovers the 26 payload bits of each TDS packet. The TDS
// scrambles them with the self-synchronising scrambler of IEEE 802.3 clause 49,
// polynomial 1 + x^39 + x^58; the 4-bit header travels unscrambled. The
// descrambler keeps the last 58 received scrambled payload bits and, bit by bit
// in transmission order (payload bit 25 first), outputs
//   d = s xor s[t-39] xor s[t-58].
// Being self-synchronising, it needs no seed: after 58 payload bits (three
// packets) the output is correct. All packets, signal or NULL, pass through it
// so the history stays continuous.
// Timing: one Clk160_c cycle, as in the latency budget of the link: frame and
// is_signal are registered on the clock edge that captures pkt_in.
// is_signal flags header 1010 for the forwarding / NULL-suppression decision
// made downstream.
module descrambler
  import router_pkg::*;
#(
  parameter int unsigned TAP_A = 39,
  parameter int unsigned TAP_B = 58
) (
  input  logic          clk,
  input  logic          rst,
  input  tds_packet_t   pkt_in,
  output tds_packet_t   frame,
  output logic          is_signal
);
  logic [TAP_B-1:0] hist;        // hist[0] = most recent scrambled bit
  logic [TAP_B-1:0] hist_next;
  logic [PAY_W-1:0] plain;

  always_comb begin
    hist_next = hist;
    for (int i = PAY_W - 1; i >= 0; i--) begin
      plain[i]  = pkt_in.payload[i] ^ hist_next[TAP_A-1] ^ hist_next[TAP_B-1];
      hist_next = {hist_next[TAP_B-2:0], pkt_in.payload[i]};
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      hist      <= '0;
      frame     <= '0;
      is_signal <= 1'b0;
    end else begin
      hist          <= hist_next;
      frame.header  <= pkt_in.header;
      frame.payload <= plain;
      is_signal     <= (pkt_in.header == HDR_SIGNAL);
    end
  end
endmodule
