// tb_sync_packet_builder: feeds 100-bit windows cut from a packet stream with
// the packet boundary at a chosen position p, one load every three cycles.
// Each window is the 60-bit advance of the previous one, as the real stream
// gives. Checks: no lock before SYNC_CHECKS (8) loads; lock at p afterwards;
// pair = the two packets starting at p (first in [59:30]); pair_tag toggles
// on each load; after the boundary moves, the lock is lost after LOSS_CHECKS
// (4) bad loads and regained at the new position.
module tb_sync_packet_builder;
  timeunit 1ns;
  timeprecision 1ps;
  import router_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, sample = 0;
  logic [99:0] window = '0;
  logic [4:0] head_pos;
  logic locked, pair_tag;
  logic [59:0] pair;

  sync_packet_builder dut (.*);
  always #2.083 clk = ~clk;

  logic [29:0] pk [4096];
  int p0 = 7;

  function automatic logic sbit(longint b);
    longint j;
    if (b < p0) return 1'b0;
    j = (b - p0) / 30;
    return pk[int'(j % 4096)][29 - int'((b - p0) % 30)];
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  longint base = 0;
  int loads = 0;
  task automatic load_one(output logic [59:0] want);
    longint j;
    logic tag;
    for (int i = 0; i < 100; i++) window[i] = sbit(base + i);
    j = (base - p0 + 29) / 30;  // first packet starting at or after base
    want = {pk[int'(j % 4096)], pk[int'((j + 1) % 4096)]};
    tag = pair_tag;
    @(negedge clk); sample = 1;
    @(negedge clk); sample = 0;
    @(negedge clk);
    loads++;
    chk(pair_tag != tag, "pair_tag toggles");
    base += 60;
  endtask

  initial begin
    logic [59:0] want;
    int lock_at;
    for (int j = 0; j < 4096; j++)
      pk[j] = {(j % 3 == 2) ? HDR_NULL : HDR_SIGNAL, 26'($urandom)};
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    lock_at = -1;
    for (int k = 0; k < 20; k++) begin
      load_one(want);
      if (locked && lock_at < 0) lock_at = loads;
    end
    chk(lock_at == 8, $sformatf("lock after 8 loads, got %0d", lock_at));
    chk(head_pos == 5'(p0), $sformatf("head_pos %0d want %0d", head_pos, p0));
    chk(pair == want, "pair content");
    for (int k = 0; k < 10; k++) begin
      load_one(want);
      checks++;
      if (pair != want) begin failures++; $display("FAIL pair at load %0d", loads); end
    end
    // move the boundary by 13 bits
    p0 = 20;
    lock_at = -1;
    for (int k = 0; k < 30; k++) begin
      load_one(want);
      if (k < 3) chk(locked, "lock kept for 3 bad loads");
      if (k == 3) chk(!locked, "lock lost after 4 bad loads");
      if (k > 3 && locked && lock_at < 0) lock_at = k;
    end
    chk(locked && head_pos == 5'(p0), $sformatf("relock at %0d, head_pos %0d", lock_at, head_pos));
    chk(pair == want, "pair after relock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
