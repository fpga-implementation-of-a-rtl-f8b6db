// tb_idelay_ctrl_logic: drives the IDELAYE2 control logic through both steps.
// After ctrl_rst it must pulse load once, then step En[0] once every 16
// cycles (31 steps), then En[1]; ctrl_r0 must count the steps. Edge Aligned
// (with hold) must stop the stepping; ACK must rise only after hold drops;
// calc done must give one load pulse and then done; withdrawing calc done must
// drop done and a new calc done must load again.
module tb_idelay_ctrl_logic;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, ctrl_rst = 1, edge_aligned = 0, hold = 0, calc_done = 0;
  logic ctrlclk, load, ack, done;
  logic [2:0] en;
  logic [9:0] ctrl_r0;
  int saved = 0;
  int n_en0 = 0, n_en1 = 0, n_load = 0, last_step = -1, cyc = 0, bad_gap = 0;

  idelay_ctrl_logic dut (.*);
  always #3.125 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (en != 0) begin
      if (last_step >= 0 && cyc - last_step != 16) bad_gap++;
      last_step = cyc;
    end
    if (en[0]) n_en0++;
    if (en[1]) n_en1++;
    if (load && !rst && !ctrl_rst) n_load++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    @(posedge clk); #0.1 ctrl_rst = 0;
    chk(load, "initial load");
    repeat (16 * 40) @(posedge clk);
    #0.1;
    chk(n_en0 == 31, $sformatf("31 steps of IDELAYE2 #0, got %0d", n_en0));
    chk(n_en1 >= 8 && n_en1 <= 9, $sformatf("then #1, got %0d", n_en1));
    chk(ctrl_r0 == {5'(n_en1), 5'd31}, $sformatf("ctrl_r0 %h", ctrl_r0));
    saved = n_en1;
    chk(bad_gap == 0, "one step per 16 cycles");
    edge_aligned = 1; hold = 1;
    repeat (40) @(posedge clk); #0.1;
    chk(n_en1 <= saved + 1 && ctrl_r0[9:5] == 5'(n_en1), "stepping stops");
    chk(!ack, "no ACK while hold");
    hold = 0;
    repeat (2) @(posedge clk); #0.1;
    chk(ack && !done, "ACK after hold");
    n_load = 0;
    calc_done = 1;
    repeat (4) @(posedge clk); #0.1;
    chk(n_load == 1 && done, "one load then done");
    calc_done = 0;
    repeat (2) @(posedge clk); #0.1;
    chk(!done && ack, "done withdrawn");
    calc_done = 1;
    repeat (4) @(posedge clk); #0.1;
    chk(n_load == 2 && done, "reload");
    chk(ctrlclk == clk, "ctrlclk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
