// tb_carry4_model: checks the CARRY4 behavioural model as a delay line. With
// all selects at 1 and DI at 0, a rising edge on CYINIT must reach CO[i] after
// (i+1) x 18 ps, and through CI the same. With a select at 0 the stage must
// pass DI instead. O must be S xor the carry into each stage.
module tb_carry4_model;
  timeunit 1ps;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic ci = 0, cyinit = 0;
  logic [3:0] di = '0, s = 4'b1111, o, co;
  longint t_rise [4];

  carry4_model dut (.ci(ci), .cyinit(cyinit), .di(di), .s(s), .o(o), .co(co));

  for (genvar i = 0; i < 4; i++) begin : g_mon
    always @(posedge co[i]) t_rise[i] = $time;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000;
    cyinit = 1; #500;
    for (int i = 0; i < 4; i++) chk(t_rise[i] == 1000 + 18 * (i + 1), $sformatf("cyinit to co[%0d] = %0d", i, t_rise[i] - 1000));
    chk(o == 4'b0000, "o with carry 1");
    cyinit = 0; #500;
    chk(co == 4'b0000, "falls back");
    ci = 1; #500;
    chk(t_rise[3] == 2000 + 72, "ci to co[3]");
    s = 4'b1101; di = 4'b0000; #200;
    chk(co == 4'b0001, "stage 1 passes di");
    chk(o == 4'b1110, "o = s xor carry in");
    di[1] = 1; #200;
    chk(co == 4'b1111, "di propagates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
