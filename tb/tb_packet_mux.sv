// tb_packet_mux: a pair is updated (and pair_tag toggled) every 12.5 ns as an
// RX UsrClk edge would do it; Clk160_c runs with an offset delta after that
// edge, swept over (0, 6.25) ns. On the first Clk160_c edge after each update
// SEL must be 0 and pkt the first packet; on the second SEL must be 1 and pkt
// the second packet.
module tb_packet_mux;
  timeunit 1ps;
  timeprecision 1ps;
  import router_pkg::*;
  int checks = 0, failures = 0;
  logic clk160_c = 0, rst = 1, pair_tag = 0, sel;
  logic [59:0] pair = '0;
  tds_packet_t pkt;

  packet_mux dut (.*);

  initial begin
    logic [59:0] p;
    #1000 rst = 0;
    for (int delta = 100; delta < 6250; delta += 450) begin
      for (int k = 0; k < 6; k++) begin
        p = {30'($urandom), 30'($urandom)};
        pair = p; pair_tag = ~pair_tag;
        #(delta) clk160_c = 1;
        if (k > 0) begin
          checks++;
          if (sel !== 1'b0 || pkt !== p[59:30]) begin failures++; $display("FAIL first delta=%0d", delta); end
        end
        #3125 clk160_c = 0;
        #3125 clk160_c = 1;
        if (k > 0) begin
          checks++;
          if (sel !== 1'b1 || pkt !== p[29:0]) begin failures++; $display("FAIL second delta=%0d", delta); end
        end
        #(6250 - delta) clk160_c = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
