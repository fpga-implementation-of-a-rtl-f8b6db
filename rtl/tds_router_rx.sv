// tds_router_rx: one fixed-latency TDS-to-Router link receiver (the protocol
// decoder of one link in the Router FPGA).
// Inputs are the 20-bit words and the 240 MHz RX UsrClk of a GTP receiver run
// with all PCS features bypassed, and Clk160, the 160 MHz clock derived from
// the LHC clock. Outputs are the descrambled 30-bit TDS frames, one per cycle
// of Clk160_c, the phase-compensated copy of Clk160 produced here.
// Clock edge alignment and phase compensation: Clk160 passes through three
// cascaded IDELAYE2s (78 ps taps) to become Clk160_c. RX UsrClk runs down a
// chain of 11 CARRY4s whose 22 taps are sampled by Clk160_c. Step 1 adds taps
// until a rising edge of RX UsrClk is seen to coincide with one of Clk160_c;
// the Sample strobe is then locked to those coinciding RX UsrClk edges (every
// third one). Step 2 adds round(head_pos x UI / 78 ps) taps, so Clk160_c moves
// with the position of the packet header in the window and the frame leaves at
// the same time after its arrival whatever the GTP's word alignment.
// Data path: 5-word window -> header search and two-packet build on Sample ->
// SEL mux into Clk160_c -> descrambler (one cycle).
// Ports: everything in the RX UsrClk domain enters on rx_usrclk; frame,
// frame_is_signal and link_ready are registered on clk160_c. rst is an
// asynchronous active-high reset for both domains. link_ready is high when the
// header is locked and the phase compensation has been loaded; frames before
// that are not meaningful. head_pos, ctrl_r0, ctrl_r and tap_header are status outputs
// (the same values the authors read out over JTAG).
// IDELAYE2 and CARRY4 are behavioural models of the FPGA primitives; the GTP
// itself is outside this module.
module tds_router_rx
  import router_pkg::*;
(
  input  logic               rst,
  input  logic               clk160,
  input  logic               rx_usrclk,
  input  logic [WORD_W-1:0]  rx_data,
  output logic               clk160_c,
  output tds_packet_t        frame,
  output logic               frame_is_signal,
  output logic               link_ready,
  output logic               sample,
  output logic               head_locked,
  output logic [POS_W-1:0]   head_pos,
  output logic               phase_locked,
  output logic [9:0]         ctrl_r0,
  output logic [14:0]        ctrl_r,
  output logic [6:0]         tap_header
);
  // ---------------- clock edge align & phase compensation ----------------
  logic              ctrlclk, load, ack, ctl_done, calc_done;
  logic [2:0]        en;
  logic              edge_aligned, hold, ctrl_rst;
  logic [N_TDC-1:0]  d;
  logic [1:0]        dly_cascade;
  logic [4:0]        cntvalueout [3];

  idelaye2_model u_idelay0 (
    .c(ctrlclk), .ld(load), .ce(en[0]), .inc(1'b1), .cntvaluein(ctrl_r[4:0]),
    .idatain(clk160), .dataout(dly_cascade[0]), .cntvalueout(cntvalueout[0]));
  idelaye2_model u_idelay1 (
    .c(ctrlclk), .ld(load), .ce(en[1]), .inc(1'b1), .cntvaluein(ctrl_r[9:5]),
    .idatain(dly_cascade[0]), .dataout(dly_cascade[1]), .cntvalueout(cntvalueout[1]));
  idelaye2_model u_idelay2 (
    .c(ctrlclk), .ld(load), .ce(en[2]), .inc(1'b1), .cntvaluein(ctrl_r[14:10]),
    .idatain(dly_cascade[1]), .dataout(clk160_c), .cntvalueout(cntvalueout[2]));

  carry_chain_tdc u_tdc (
    .rx_usrclk(rx_usrclk), .clk160_c(clk160_c), .rst(rst), .d(d));

  edge_detect_ctrl u_edge (
    .clk160_c(clk160_c), .rx_usrclk(rx_usrclk), .rst(rst), .d(d), .done(ctl_done),
    .edge_aligned(edge_aligned), .hold(hold), .ctrl_rst(ctrl_rst), .sample(sample),
    .phase_locked(phase_locked));

  idelay_ctrl_logic u_ctrl (
    .clk(clk160_c), .rst(rst), .ctrl_rst(ctrl_rst), .edge_aligned(edge_aligned),
    .hold(hold), .calc_done(calc_done), .ctrlclk(ctrlclk), .en(en), .load(load),
    .ctrl_r0(ctrl_r0), .ack(ack), .done(ctl_done));

  idelay_reg_calc u_calc (
    .clk(clk160_c), .rst(rst), .ctrl_r0(ctrl_r0), .ack(ack), .head_pos(head_pos),
    .head_valid(head_locked), .ctrl_r(ctrl_r), .tap_header(tap_header), .done(calc_done));

  // ---------------- data path ----------------
  logic [WIN_W-1:0]  window;
  logic [PAIR_W-1:0] pair;
  logic              pair_tag, sel;
  tds_packet_t       pkt;
  logic              ready_s1;

  rx_word_buffer u_buf (
    .clk(rx_usrclk), .rst(rst), .rx_data(rx_data), .window(window));

  sync_packet_builder u_sync (
    .clk(rx_usrclk), .rst(rst), .sample(sample), .window(window),
    .head_pos(head_pos), .locked(head_locked), .pair(pair), .pair_tag(pair_tag));

  packet_mux u_mux (
    .clk160_c(clk160_c), .rst(rst), .pair(pair), .pair_tag(pair_tag), .sel(sel), .pkt(pkt));

  descrambler u_desc (
    .clk(clk160_c), .rst(rst), .pkt_in(pkt), .frame(frame), .is_signal(frame_is_signal));

  always_ff @(posedge clk160_c or posedge rst) begin
    if (rst) begin
      ready_s1   <= 1'b0;
      link_ready <= 1'b0;
    end else begin
      ready_s1   <= ctl_done;
      link_ready <= ready_s1;
    end
  end
endmodule
