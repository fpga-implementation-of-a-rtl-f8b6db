// carry_chain_tdc: the tapped delay line that times RX UsrClk against Clk160_c.
// RX UsrClk enters CARRY4 #0 through CYINIT (all selects 1, all DI 0) and
// ripples through N_CARRY4 cascaded CARRY4 cells, about 70 ps each. From every
// CARRY4 the first and the last carry output are taken (the two most linear
// taps), giving 2 x N_CARRY4 = 22 taps that span about 800 ps in steps of about
// 36 ps. A register on each tap, clocked by Clk160_c, captures D[0]..D[21].
// D[0] sits nearest the chain input, so it shows the most recent state of
// RX UsrClk and D[21] the oldest: a rising edge of RX UsrClk that has just
// passed shows up first as D[0] = 1 with the higher taps still 0.
// Interface: d is registered, updated on every rising edge of clk160_c; rst
// clears it asynchronously. The chain, the tap choice and the Clk160_c
// registers follow the described receiver; the CYINIT entry and the all-ones
// selects are the usual way to build such a chain and are this design's choice.
module carry_chain_tdc #(
  parameter int unsigned N_CARRY4 = 11,
  parameter int unsigned CELL_PS  = 18
) (
  input  logic                  rx_usrclk,
  input  logic                  clk160_c,
  input  logic                  rst,
  output logic [2*N_CARRY4-1:0] d
);
  logic [3:0]            co [N_CARRY4];
  logic [3:0]            o_unused [N_CARRY4];
  logic [2*N_CARRY4-1:0] taps;

  for (genvar m = 0; m < N_CARRY4; m++) begin : g_chain
    if (m == 0) begin : g_first
      carry4_model #(.CELL_PS(CELL_PS)) u_carry4 (
        .ci(1'b0), .cyinit(rx_usrclk), .di(4'b0000), .s(4'b1111),
        .o(o_unused[m]), .co(co[m]));
    end else begin : g_next
      carry4_model #(.CELL_PS(CELL_PS)) u_carry4 (
        .ci(co[m-1][3]), .cyinit(1'b0), .di(4'b0000), .s(4'b1111),
        .o(o_unused[m]), .co(co[m]));
    end
    assign taps[2*m]   = co[m][0];
    assign taps[2*m+1] = co[m][3];
  end

  always_ff @(posedge clk160_c or posedge rst) begin
    if (rst) d <= '0;
    else     d <= taps;
  end
endmodule
