// tb_rx_word_buffer: feeds random 20-bit words and checks that the 100-bit
// window holds the last five words in arrival order, oldest in bits 19:0 and
// the word now on rx_data in bits 99:80.
module tb_rx_word_buffer;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [19:0] rx_data = '0, hist [5];
  logic [99:0] window;

  rx_word_buffer dut (.clk(clk), .rst(rst), .rx_data(rx_data), .window(window));
  always #2.083 clk = ~clk;

  initial begin
    for (int i = 0; i < 5; i++) hist[i] = '0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      rx_data = 20'($urandom);
      for (int i = 0; i < 4; i++) hist[i] = hist[i+1];
      hist[4] = rx_data;
      #0.1;
      checks++;
      if (window !== {hist[4], hist[3], hist[2], hist[1], hist[0]}) begin
        failures++; $display("FAIL n=%0d", n);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
