// carry4_model: behavioural model of the Xilinx 7-series CARRY4 carry-chain
// primitive (four cascaded carry multiplexers), not synthesizable logic. It is
// used only as a delay line: the receiver sends RX UsrClk into the chain and
// registers the carry outputs to time the clock edge against Clk160_c.
// Each multiplexer stage passes its carry input when its select S[i] is 1 and
// DI[i] when it is 0, after CELL_PS picoseconds; O[i] = S[i] xor carry-in.
// The carry into stage 0 is CI or CYINIT (either may be the chain input).
// Ports follow the primitive. Every stage gets the same average delay of about
// 18 ps; real silicon is uneven, which this model does not reproduce.
module carry4_model #(
  parameter int unsigned CELL_PS = 18
) (
  input  logic       ci,
  input  logic       cyinit,
  input  logic [3:0] di,
  input  logic [3:0] s,
  output logic [3:0] o,
  output logic [3:0] co
);
  timeunit 1ps;
  timeprecision 1ps;

  logic c0_in;
  assign c0_in = ci | cyinit;

  assign #(CELL_PS) co[0] = s[0] ? c0_in : di[0];
  assign #(CELL_PS) co[1] = s[1] ? co[0] : di[1];
  assign #(CELL_PS) co[2] = s[2] ? co[1] : di[2];
  assign #(CELL_PS) co[3] = s[3] ? co[2] : di[3];
  assign o = s ^ {co[2:0], c0_in};
endmodule
