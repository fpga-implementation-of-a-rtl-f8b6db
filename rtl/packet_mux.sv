// packet_mux: moves each pair of TDS packets from the RX UsrClk domain into the
// phase-compensated Clk160_c domain. The packet builder updates the 60-bit pair
// on a Sample edge, once per three RX UsrClk cycles (12.5 ns, two Clk160_c
// cycles), and toggles pair_tag at the same edge. Once the phase of Clk160_c
// has been compensated, exactly two Clk160_c edges fall inside each 12.5 ns
// window in which the pair is stable. SEL is generated here: the first Clk160_c
// edge after an update sees pair_tag differ from its registered copy (SEL = 0,
// first packet, pair[59:30]); the second sees them equal (SEL = 1, second
// packet, pair[29:0]). pkt is combinational and is registered by the
// descrambler on the same edge, so the mux adds no cycle.
// The mux and SEL follow the receiver; deriving SEL from a load toggle in the
// Clk160_c domain is this design's choice. pair_tag is read across clock
// domains on purpose: the scheme places the Clk160_c edges a known time after
// the RX UsrClk edge that updates it.
module packet_mux
  import router_pkg::*;
(
  input  logic              clk160_c,
  input  logic              rst,
  input  logic [PAIR_W-1:0] pair,
  input  logic              pair_tag,
  output logic              sel,
  output tds_packet_t       pkt
);
  logic tag_q;

  always_ff @(posedge clk160_c or posedge rst) begin
    if (rst) tag_q <= 1'b0;
    else     tag_q <= pair_tag;
  end

  assign sel = (pair_tag == tag_q);
  assign pkt = sel ? tds_packet_t'(pair[PKT_W-1:0]) : tds_packet_t'(pair[PAIR_W-1:PKT_W]);
endmodule
