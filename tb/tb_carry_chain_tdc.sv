// tb_carry_chain_tdc: a rising edge of rx_usrclk is launched dt ps before a
// rising edge of clk160_c, for dt from -100 to 900 ps. Tap 2m sits (4m+1) x 18
// ps down the chain and tap 2m+1 (4m+4) x 18 ps, so D[k] must be 1 exactly
// when the edge has passed tap k, i.e. when its delay is below dt: a
// thermometer code that starts at D[0].
module tb_carry_chain_tdc;
  timeunit 1ps;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic rx_usrclk = 0, clk160_c = 0, rst = 1;
  logic [21:0] d, want;
  bit tie;

  carry_chain_tdc dut (.rx_usrclk(rx_usrclk), .clk160_c(clk160_c), .rst(rst), .d(d));

  initial begin
    #1000 rst = 0;
    for (int dt = -100; dt <= 900; dt += 13) begin
      #5000;
      if (dt >= 0) begin rx_usrclk = 1; #(dt); clk160_c = 1; end
      else begin clk160_c = 1; #(-dt); rx_usrclk = 1; end
      for (int m = 0; m < 11; m++) begin
        want[2*m]   = (4 * m + 1) * 18 < dt;
        want[2*m+1] = (4 * m + 4) * 18 < dt;
      end
      #1;
      tie = 0;
      for (int m = 0; m < 11; m++) if ((4 * m + 1) * 18 == dt || (4 * m + 4) * 18 == dt) tie = 1;
      if (!tie) checks++;
      if (!tie && d !== want) begin failures++; $display("FAIL dt=%0d d=%b want=%b", dt, d, want); end
      #2000 rx_usrclk = 0; clk160_c = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
