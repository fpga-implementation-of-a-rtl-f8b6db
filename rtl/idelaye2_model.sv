// idelaye2_model: behavioural model of the Xilinx 7-series IDELAYE2 primitive
// in VAR_LOAD mode, not synthesizable logic. It delays idatain by
// cntvalueout x TAP_PS picoseconds (78 ps per tap with a 200 MHz reference).
// The 5-bit tap counter changes on the rising edge of c: ld loads cntvaluein,
// otherwise ce steps it by one (up when inc is 1), wrapping around between
// 31 and 0 as the real primitive does. The delay is a transport delay, so a
// clock passing through it keeps all its edges when the setting changes; an
// edge that falls due earlier than an already scheduled one is reordered as
// the simulator sees fit. The insertion delay of the real part is left out.
module idelaye2_model #(
  parameter int unsigned TAP_PS = 78
) (
  input  logic       c,
  input  logic       ld,
  input  logic       ce,
  input  logic       inc,
  input  logic [4:0] cntvaluein,
  input  logic       idatain,
  output logic       dataout,
  output logic [4:0] cntvalueout
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [4:0] cnt;
  initial cnt = 5'd0;

  always @(posedge c) begin
    if (ld)      cnt <= cntvaluein;
    else if (ce) cnt <= inc ? cnt + 5'd1 : cnt - 5'd1;
  end

  assign cntvalueout = cnt;

  initial dataout = 1'b0;
  always @(idatain) dataout <= #(int'(cnt) * TAP_PS) idatain;
endmodule
