// tb_idelay_reg_calc: sweeps every header position with random step-1 tap
// counts and checks the calculator against the formula worked out here:
// tap_header = round(pos x 208.33 / 78), total = taps + tap_header, less 80
// if total x 78 ps exceeds 6250 ps, split 31/31/rest over IDELAYE2 #0/#1/#2.
// done must come while ACK and head_valid are high, and go when ACK goes;
// with ACK low ctrl_r must be zero.
module tb_idelay_reg_calc;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, ack = 0, head_valid = 0, done;
  logic [9:0] ctrl_r0 = '0;
  logic [4:0] head_pos = '0;
  logic [14:0] ctrl_r;
  logic [6:0] tap_header;

  idelay_reg_calc dut (.*);
  always #3.125 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int th, tot, f0, f1, f2, cyc;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int rep = 0; rep < 4; rep++)
    for (int p = 0; p < 30; p++) begin
      @(negedge clk);
      ctrl_r0 = {5'($urandom % 32), 5'($urandom % 32)};
      if (ctrl_r0[9:5] != 0) ctrl_r0[4:0] = 5'd31;
      head_pos = 5'(p); head_valid = 1; ack = 1;
      cyc = 0;
      while (!done && cyc < 20) begin @(posedge clk); #0.1; cyc++; end
      chk(done, "done rises");
      th  = (p * 1250 + 234) / 468;
      tot = int'(ctrl_r0[9:5]) + int'(ctrl_r0[4:0]) + th;
      if (tot * 78 > 6250) tot -= 80;
      f0 = tot > 31 ? 31 : tot;
      f1 = tot - f0 > 31 ? 31 : tot - f0;
      f2 = tot - f0 - f1;
      chk(tap_header == 7'(th), $sformatf("tap_header pos %0d: %0d want %0d", p, tap_header, th));
      chk(ctrl_r == {5'(f2), 5'(f1), 5'(f0)}, $sformatf("ctrl_r pos %0d r0 %h: %h", p, ctrl_r0, ctrl_r));
      @(negedge clk); ack = 0; head_valid = 0;
      repeat (2) @(posedge clk); #0.1;
      chk(!done && ctrl_r == 0, "ack low clears");
    end
    chk(tap_header <= 77, "range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
