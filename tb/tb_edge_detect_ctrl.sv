// tb_edge_detect_ctrl: RX UsrClk (period 12500/3 ps) and Clk160_c (6250 ps) run
// with Clk160_c 40 ps after every third RX UsrClk edge, as after alignment.
// The testbench plays the tap sampler: D is all zero until a chosen check,
// then 1 in D[0]. It checks that ctrl_rst lasts one cycle; that Edge Aligned
// and hold rise at cycle 15 of the check period in which D first shows a
// non-zero value after zeros, not before; that hold drops once Sample is
// configured; that Sample is then high exactly in the RX UsrClk cycle before
// each edge that coincides with a Clk160_c edge; and that done is reported.
module tb_edge_detect_ctrl;
  timeunit 1ps;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk160_c = 0, rx_usrclk = 0, rst = 1, done = 0;
  logic [21:0] d = '0;
  logic edge_aligned, hold, ctrl_rst, sample, phase_locked;

  edge_detect_ctrl dut (.*);

  // RX UsrClk edges at 12500 k / 3, Clk160_c edges 40 ps after every 6250 ps
  initial begin
    longint n = 1;
    forever begin
      #(n * 12500 / 3 - $time);
      rx_usrclk = 1; #2083; rx_usrclk = 0;
      n++;
    end
  end
  initial begin #40; forever begin clk160_c = 1; #3125 clk160_c = 0; #3125; end end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int c160 = 0, aligned_at = -1, rst_cycles = 0;
  always @(posedge clk160_c) begin
    c160++;
    if (ctrl_rst && !rst) rst_cycles++;
    if (edge_aligned && aligned_at < 0) aligned_at = c160;
  end

  int n_sample = 0, bad_sample = 0;
  always @(posedge rx_usrclk) begin
    // a coinciding edge: Clk160_c rises 40 ps later
    if (sample) begin
      n_sample++;
      if ($time % 12500 > 10) bad_sample++;
    end
  end

  initial begin
    #20000 rst = 0;
    wait (!ctrl_rst);
    // let three checks see zeros, then an edge
    repeat (16 * 3 + 4) @(posedge clk160_c);
    #100 d = 22'h1;
    chk(!edge_aligned, "no early Edge Aligned");
    repeat (20) @(posedge clk160_c);
    #100;
    chk(edge_aligned && hold, "Edge Aligned with hold");
    chk(rst_cycles == 1, $sformatf("ctrl_rst cycles %0d", rst_cycles));
    repeat (100) @(posedge clk160_c);
    #100;
    chk(!hold, "hold released");
    n_sample = 0; bad_sample = 0;
    repeat (300) @(posedge rx_usrclk);
    chk(n_sample >= 99 && n_sample <= 100, $sformatf("one Sample in three cycles, got %0d", n_sample));
    chk(bad_sample == 0, $sformatf("Sample at coinciding edges, %0d wrong", bad_sample));
    done = 1;
    repeat (3) @(posedge clk160_c);
    #100;
    chk(phase_locked, "done reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
