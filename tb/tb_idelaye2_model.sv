// tb_idelaye2_model: checks the IDELAYE2 behavioural model. A load of N taps
// must delay an edge by N x 78 ps; CE with INC steps the setting by one per
// control clock edge and wraps from 31 to 0; CE without INC steps down.
module tb_idelaye2_model;
  timeunit 1ps;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic c = 0, ld = 0, ce = 0, inc = 1, idatain = 0, dataout;
  logic [4:0] cntvaluein = '0, cntvalueout;
  longint t_out;

  idelaye2_model dut (.*);
  always @(posedge dataout) t_out = $time;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic pulse_c(); #100 c = 1; #100 c = 0; endtask
  task automatic measure(input int taps);
    longint t0;
    #5000; t0 = $time; idatain = 1; #4000; idatain = 0;
    chk(t_out - t0 == taps * 78, $sformatf("delay %0d for %0d taps", t_out - t0, taps));
  endtask

  initial begin
    for (int n = 0; n < 32; n += 7) begin
      cntvaluein = 5'(n); ld = 1; pulse_c(); ld = 0;
      chk(cntvalueout == 5'(n), "load");
      measure(n);
    end
    cntvaluein = 5'd30; ld = 1; pulse_c(); ld = 0;
    ce = 1; pulse_c(); ce = 0;
    chk(cntvalueout == 5'd31, "step up");
    measure(31);
    ce = 1; pulse_c(); ce = 0;
    chk(cntvalueout == 5'd0, "wrap to 0");
    inc = 0; ce = 1; pulse_c(); ce = 0;
    chk(cntvalueout == 5'd31, "step down wraps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
