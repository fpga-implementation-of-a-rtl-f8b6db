// tb_tds_router_rx: end-to-end test of one fixed-latency link receiver at its
// default parameters.
// The testbench plays the TDS and the GTP. The TDS side sends 30-bit packets
// back to back at 4.8 Gbps (UI = 625/3 ps): three signal packets (header 1010,
// payload = packet number) then one NULL packet (header 1100, random payload),
// the 26 payload bits scrambled with 1 + x^39 + x^58. Packet j starts at bit
// P0 + 30 j and bit b arrives at the Router at b x UI. The GTP side emits word n
// on an RX UsrClk edge at (20 n + o) x UI + GTP_DLY, the word holding bits
// 20 n + o - 40 ... 20 n + o - 21, earliest bit in bit 0; o (0..19) is the
// phase the CDR happened to lock to. Clk160 has period 6250 ps and phase phi.
// Each run resets the receiver with a new (o, P0, phi), waits for link_ready
// and then checks NFRAMES frames: header, payload, the signal/NULL flag, and
// their order. The latency of every frame, from the arrival of its first bit
// to the Clk160_c edge that registers it, is recorded; across all runs it must
// vary by less than MAX_SPREAD_PS (300 ps, the spread reported for hardware).
// 30 runs sweep the packet boundary so that all 30 header positions occur;
// 15 more use random CDR and Clk160 phases. One run also
// shifts the packet boundary after lock to force a loss of lock and a relock
// without a reset. Mechanisms counted (each must occur): edge alignment,
// IDELAYE2 #1 used in step 1, IDELAYE2 #2 used after step 2, the 80-tap wrap,
// NULL frames, relock after a link failure, every header position.
module tb_tds_router_rx;
  timeunit 1ps;
  timeprecision 1ps;
  import router_pkg::*;

  localparam int  NPKT          = 1 << 18;
  localparam int  NFRAMES       = 40;
  localparam int  SKIP          = 4;
  localparam int  MAX_RUNS      = 45;
  localparam longint GTP_DLY    = 1500;
  localparam longint MAX_SPREAD_PS = 300;

  int checks = 0, failures = 0;

  logic rst = 1'b1, clk160 = 1'b0, rx_usrclk = 1'b0;
  logic [WORD_W-1:0] rx_data = '0;
  logic clk160_c, frame_is_signal, link_ready, sample, head_locked, phase_locked;
  tds_packet_t frame;
  logic [POS_W-1:0] head_pos;
  logic [9:0] ctrl_r0;
  logic [14:0] ctrl_r;
  logic [6:0] tap_header;

  tds_router_rx dut (.*);

  // ---------------- TDS packets (scrambled) ----------------
  logic [PKT_W-1:0] txpkt [NPKT];
  initial begin
    logic [57:0] st;
    logic [PAY_W-1:0] pay;
    logic b;
    st = '0;
    for (int j = 0; j < NPKT; j++) begin
      if (j % 4 == 3) pay = PAY_W'($urandom);
      else            pay = PAY_W'(j);
      for (int i = PAY_W - 1; i >= 0; i--) begin
        b = pay[i] ^ st[38] ^ st[57];
        st = {st[56:0], b};
        pay[i] = b;
      end
      txpkt[j] = {(j % 4 == 3) ? HDR_NULL : HDR_SIGNAL, pay};
    end
  end

  int     o_cfg = 0, p0_cfg = 0;
  longint phi_cfg = 0;

  function automatic longint t_bit(longint b);
    return (b * 625) / 3;
  endfunction

  function automatic logic bit_val(longint b);
    longint j, k;
    if (b < p0_cfg) return 1'b0;
    j = (b - p0_cfg) / 30;
    k = (b - p0_cfg) % 30;
    return txpkt[int'(j % NPKT)][29 - int'(k)];
  endfunction

  // ---------------- GTP RX model ----------------
  initial begin
    longint n, t;
    logic [WORD_W-1:0] w;
    n = 0;
    forever begin
      t = t_bit(20 * n + o_cfg) + GTP_DLY;
      if (t > $time) begin
        #(t - $time);
        for (int i = 0; i < WORD_W; i++) w[i] = bit_val(20 * n + o_cfg - 40 + i);
        rx_usrclk = 1'b1;
        rx_data <= w;
        #2083;
        rx_usrclk = 1'b0;
      end
      n++;
    end
  end

  // ---------------- Clk160 ----------------
  initial begin
    longint k, t;
    k = 0;
    forever begin
      t = phi_cfg + 6250 * k;
      if (t > $time) begin
        #(t - $time);
        clk160 = 1'b1;
        #3125;
        clk160 = 1'b0;
      end
      k++;
    end
  end

  // ---------------- frame monitor ----------------
  bit     measuring = 0;
  int     nframes = 0, last_j = -1;
  longint lat_min = 64'h7fffffffffffffff, lat_max = 0;
  int     n_null = 0, n_signal = 0;

  always @(posedge clk160_c) begin
    longint t_edge, j, lat, base;
    t_edge = $time;
    #1;
    if (measuring && link_ready) begin
      nframes++;
      if (nframes > SKIP) begin
        checks++;
        if (frame.header == HDR_SIGNAL) begin
          // payload carries the packet number modulo 2^26; find the j near now
          base = (t_edge / 6250) - 64;
          j = -1;
          for (longint c = base; c < base + 64; c++)
            if (c >= 0 && PAY_W'(c % NPKT) == frame.payload && c % 4 != 3) j = c;
          if (j < 0 || !frame_is_signal) begin
            failures++;
            $display("FAIL frame payload %h hdr %b sig %0d at packet slot %0d", frame.payload, frame.header, frame_is_signal, t_edge / 6250);
          end else begin
            n_signal++;
            lat = t_edge - t_bit(p0_cfg + 30 * j);
            if (lat < lat_min) lat_min = lat;
            if (lat > lat_max) lat_max = lat;
            if (last_j >= 0 && j != last_j + 1 && !(j == last_j + 2 && (last_j + 1) % 4 == 3)) begin
              failures++;
              $display("FAIL order: %0d after %0d", j, last_j);
            end
            if (nframes == SKIP + 1) $display("  latency %0d ps", lat);
            last_j = int'(j);
          end
        end else if (frame.header == HDR_NULL) begin
          n_null++;
          if (frame_is_signal) begin
            failures++;
            $display("FAIL NULL frame flagged as signal");
          end
          if (last_j >= 0) last_j = last_j + 1;
        end else begin
          failures++;
          $display("FAIL bad header %b", frame.header);
        end
      end
    end
  end

  // ---------------- runs ----------------
  bit [N_POS-1:0] pos_seen = '0;
  int n_aligned = 0, n_idelay1 = 0, n_idelay2 = 0, n_wrap = 0, n_relock = 0;

  task automatic run_once(input int o, input int p0, input longint phi, input bit relock);
    int wait_cycles;
    int t_sum;
    rst = 1'b1;
    measuring = 0;
    o_cfg = o; p0_cfg = p0; phi_cfg = phi;
    #30000;
    rst = 1'b0;
    wait_cycles = 0;
    while (!link_ready && wait_cycles < 5000) begin
      @(posedge clk160);
      wait_cycles++;
    end
    checks++;
    if (!link_ready) begin
      failures++;
      $display("FAIL no link_ready: o=%0d p0=%0d phi=%0d", o, p0, phi);
      return;
    end
    n_aligned++;
    pos_seen[head_pos] = 1'b1;
    if (ctrl_r0[9:5] != 0) n_idelay1++;
    if (ctrl_r[14:10] != 0) n_idelay2++;
    t_sum = int'(ctrl_r0[9:5]) + int'(ctrl_r0[4:0]) + int'(tap_header);
    if (int'(ctrl_r[14:10]) + int'(ctrl_r[9:5]) + int'(ctrl_r[4:0]) != t_sum) n_wrap++;
    // calculator formula, worked out independently
    checks++;
    if (tap_header != 7'((int'(head_pos) * 625 * 2 + 234) / 468) ||
        int'(ctrl_r[14:10]) + int'(ctrl_r[9:5]) + int'(ctrl_r[4:0]) != ((t_sum * 78 > 6250) ? t_sum - 80 : t_sum)) begin
      failures++;
      $display("FAIL ctrl_r %h ctrl_r0 %h pos %0d tap %0d", ctrl_r, ctrl_r0, head_pos, tap_header);
    end
    $display("run o=%0d p0=%0d phi=%0d: head_pos=%0d ctrl_r0=%0d+%0d tap_header=%0d ctrl_r=%0d/%0d/%0d ready after %0d cycles",
             o, p0, phi, head_pos, ctrl_r0[9:5], ctrl_r0[4:0], tap_header, ctrl_r[14:10], ctrl_r[9:5], ctrl_r[4:0], wait_cycles);
    nframes = 0; last_j = -1; measuring = 1;
    wait_cycles = 0;
    while (nframes < NFRAMES && wait_cycles < 4 * NFRAMES) begin @(posedge clk160); wait_cycles++; end
    measuring = 0;
    checks++;
    if (nframes < NFRAMES) begin
      failures++;
      $display("FAIL link dropped: head_locked=%0d phase_locked=%0d", head_locked, phase_locked);
    end
    if (relock) begin
      // link failure: the packet boundary moves by 7 bits; the receiver must
      // lose the header, find it again and reload the delay without a reset
      p0_cfg = p0 + 7;
      wait_cycles = 0;
      while (head_locked && wait_cycles < 2000) begin @(posedge clk160); wait_cycles++; end
      while (link_ready && wait_cycles < 4000) begin @(posedge clk160); wait_cycles++; end
      while (!link_ready && wait_cycles < 6000) begin @(posedge clk160); wait_cycles++; end
      repeat (20) @(posedge clk160);
      checks++;
      if (!link_ready) begin
        failures++;
        $display("FAIL no relock");
      end else begin
        n_relock++;
        pos_seen[head_pos] = 1'b1;
        $display("relock: head_pos=%0d ctrl_r=%0d/%0d/%0d", head_pos, ctrl_r[14:10], ctrl_r[9:5], ctrl_r[4:0]);
        nframes = 0; last_j = -1; measuring = 1;
        while (nframes < NFRAMES) @(posedge clk160);
        measuring = 0;
      end
    end
  endtask

  initial begin
    int r;
    r = 0;
    run_once(3, 11, 1000, 1'b1);
    run_once(8, 15, 5205, 1'b0);
    // sweep the packet boundary with the CDR phase and Clk160 phase fixed,
    // then random CDR and Clk160 phases
    for (int p0 = 0; p0 < 30; p0++) begin
      run_once(5, p0, 1234, 1'b0);
      r++;
    end
    while (r < MAX_RUNS) begin
      run_once(int'($urandom % 20), int'($urandom % 30), longint'($urandom % 6250), 1'b0);
      r++;
    end
    checks++;
    if (lat_max - lat_min >= MAX_SPREAD_PS) begin
      failures++;
      $display("FAIL latency spread %0d ps", lat_max - lat_min);
    end
    $display("latency min %0d ps max %0d ps spread %0d ps", lat_min, lat_max, lat_max - lat_min);
    $display("runs %0d aligned %0d idelay1 %0d idelay2 %0d wrap %0d relock %0d signal %0d null %0d positions %0d/30",
             r + 1, n_aligned, n_idelay1, n_idelay2, n_wrap, n_relock, n_signal, n_null, $countones(pos_seen));
    checks += 7;
    if (n_aligned == 0) failures++;
    if (n_idelay1 == 0) failures++;
    if (n_idelay2 == 0) failures++;
    if (n_wrap == 0)    failures++;
    if (n_relock == 0)  failures++;
    if (n_null == 0)    failures++;
    if (!(&pos_seen))   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd5000000000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
