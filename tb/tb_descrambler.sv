// tb_descrambler: checks the packet descrambler against an independent
// scrambler written here (1 + x^39 + x^58, payload bit 25 sent first, header
// unscrambled). 400 packets, one in four NULL, are scrambled and fed one per
// clock. From the fourth packet on (the descrambler needs 58 payload bits of
// history) the frame registered on the clock edge that takes a packet must
// equal that packet in plain form, which also checks the one-cycle latency:
// header, payload and the signal flag.
module tb_descrambler;
  timeunit 1ns;
  timeprecision 1ps;
  import router_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  tds_packet_t pkt_in, frame;
  logic is_signal;

  descrambler dut (.clk(clk), .rst(rst), .pkt_in(pkt_in), .frame(frame), .is_signal(is_signal));

  always #3.125 clk = ~clk;

  logic [57:0] st = '0;

  initial begin
    tds_packet_t plain, scr;
    logic b;
    pkt_in = '0;
    repeat (3) @(posedge clk);
    #0.1 rst = 1'b0;
    for (int j = 0; j < 400; j++) begin
      plain.header  = (j % 4 == 3) ? HDR_NULL : HDR_SIGNAL;
      plain.payload = PAY_W'($urandom);
      scr = plain;
      for (int i = PAY_W - 1; i >= 0; i--) begin
        b = plain.payload[i] ^ st[38] ^ st[57];
        st = {st[56:0], b};
        scr.payload[i] = b;
      end
      @(negedge clk);
      pkt_in = scr;
      @(posedge clk);
      #0.1;
      if (j >= 3) begin
        checks++;
        if (frame !== plain || is_signal !== (plain.header == HDR_SIGNAL)) begin
          failures++;
          if (failures < 10)
            $display("FAIL packet %0d: got %h/%0d want %h", j, frame, is_signal, plain);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
