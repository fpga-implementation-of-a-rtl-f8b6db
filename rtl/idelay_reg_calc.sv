// idelay_reg_calc: the "IDELAYE2 ctrl register Calculator" (step 2, phase
// compensation), clocked by Clk160_c.
// It turns the confirmed header position into a delay:
//   tap_header = round(head_pos x UI / TAP_PS),  UI = UI_PS_NUM/UI_PS_DEN ps,
// i.e. round(head_pos x 208.33 / 78) at 4.8 Gbps (0..77 for positions 0..29),
// computed in integer arithmetic (ties round up). It adds the taps found in
// step 1, ctrl_r0[4:0] + ctrl_r0[9:5]. If the sum exceeds one Clk160_c period
// (sum x TAP_PS > CLK_PS) it subtracts WRAP_TAPS = 80 taps (80 x 78 ps is the
// nearest tap count to 6.25 ns). The total is split over the three delays,
// #0 filled first, then #1, then #2: ctrl_r = {taps #2, taps #1, taps #0}.
// head_valid comes from the RX UsrClk domain and is synchronised with two
// flops; head_pos is static while it is high. done rises two cycles after ACK
// and the synchronised head_valid are both present, and falls when either goes.
// While ACK is low ctrl_r is zero, so the control logic's initial load clears
// the delays. The formula and the wrap follow the described receiver; the fill
// order and the handshake timing are this design's choices.
module idelay_reg_calc #(
  parameter int unsigned UI_PS_NUM = 625,
  parameter int unsigned UI_PS_DEN = 3,
  parameter int unsigned TAP_PS    = 78,
  parameter int unsigned CLK_PS    = 6250,
  parameter int unsigned WRAP_TAPS = 80
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [9:0]  ctrl_r0,
  input  logic        ack,
  input  logic [4:0]  head_pos,
  input  logic        head_valid,
  output logic [14:0] ctrl_r,
  output logic [6:0]  tap_header,
  output logic        done
);
  localparam int unsigned TAP_MAX = 31;

  function automatic logic [6:0] taps_for_pos(input logic [4:0] pos);
    int unsigned num;
    num = 2 * int'(pos) * UI_PS_NUM + UI_PS_DEN * TAP_PS;
    return 7'(num / (2 * UI_PS_DEN * TAP_PS));
  endfunction

  logic       hv_s1, hv_s2;
  logic       stage1;
  logic [7:0] sum;
  logic [7:0] total;
  logic [4:0] f0, f1, f2;

  always_comb begin
    sum   = 8'(ctrl_r0[4:0]) + 8'(ctrl_r0[9:5]) + 8'(tap_header);
    total = (int'(sum) * TAP_PS > CLK_PS) ? sum - 8'(WRAP_TAPS) : sum;
    f0    = (total > 8'(TAP_MAX)) ? 5'(TAP_MAX) : total[4:0];
    f1    = (total - 8'(f0) > 8'(TAP_MAX)) ? 5'(TAP_MAX) : 5'(total - 8'(f0));
    f2    = 5'(total - 8'(f0) - 8'(f1));
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      hv_s1      <= 1'b0;
      hv_s2      <= 1'b0;
      stage1     <= 1'b0;
      tap_header <= '0;
      ctrl_r     <= '0;
      done       <= 1'b0;
    end else begin
      hv_s1 <= head_valid;
      hv_s2 <= hv_s1;
      if (ack && hv_s2) begin
        tap_header <= taps_for_pos(head_pos);
        stage1     <= 1'b1;
        if (stage1) begin
          ctrl_r <= {f2, f1, f0};
          done   <= 1'b1;
        end
      end else begin
        stage1 <= 1'b0;
        done   <= 1'b0;
        if (!ack) ctrl_r <= '0;
      end
    end
  end
endmodule
