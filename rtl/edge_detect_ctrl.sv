// edge_detect_ctrl: the "Edge Detector and Control" of the clock edge
// alignment unit. It works in two clock domains.
// Clk160_c domain (step 1, edge search): after reset it holds ctrl_rst for one
// cycle, which starts its own 16-cycle check counter and that of the IDELAYE2
// control logic in lockstep. The control logic adds one 78 ps tap to Clk160_c
// in cycle 0 of each period; here the captured taps D[0]..D[21] are examined in
// cycle 15. The detector first waits to see D all zero (Clk160_c samples RX
// UsrClk while it is low), then the first non-zero D means a rising edge of RX
// UsrClk has just passed the start of the carry chain, a few tens of ps before
// the Clk160_c edge: Edge Aligned and hold are raised together and the search
// stops.
// RX UsrClk domain (Sample generation): while hold is high, a divide-by-two of
// Clk160_c (period 12.5 ns, three RX UsrClk cycles) is sampled by RX UsrClk.
// With the edges aligned, two successive samples are equal only at the RX
// UsrClk edge that coincides with a Clk160_c edge; this fixes the phase of a
// modulo-3 counter. After CFG_CHECKS consistent coincidences the counter is
// frozen free-running and Sample is high in the cycle before each coinciding
// edge, so the window is loaded exactly at the alignment points. hold is then
// released (through a two-flop synchroniser back into Clk160_c).
// done from the control logic (phase compensation finished) is reported as
// phase_locked. The 16-cycle check, the all-zero to non-zero rule, Edge
// Aligned, hold, rst, done and Sample follow the described receiver; the
// divide-by-two phase detector and CFG_CHECKS are this design's choices.
module edge_detect_ctrl #(
  parameter int unsigned N_TAPS       = 22,
  parameter int unsigned CHECK_PERIOD = 16,
  parameter int unsigned CFG_CHECKS   = 4
) (
  input  logic              clk160_c,
  input  logic              rx_usrclk,
  input  logic              rst,
  input  logic [N_TAPS-1:0] d,
  input  logic              done,
  output logic              edge_aligned,
  output logic              hold,
  output logic              ctrl_rst,
  output logic              sample,
  output logic              phase_locked
);
  typedef enum logic [1:0] {SEARCH, CONFIG, ALIGNED} ed_state_t;
  localparam int unsigned CW = $clog2(CHECK_PERIOD);

  // ---------------- Clk160_c domain ----------------
  ed_state_t       state;
  logic [CW-1:0]   cnt;
  logic            armed;
  logic            div2;
  logic            cfg_s1, cfg_s2;
  logic            cfg_done;

  always_ff @(posedge clk160_c or posedge rst) begin
    if (rst) begin
      ctrl_rst     <= 1'b1;
      cnt          <= '0;
      state        <= SEARCH;
      armed        <= 1'b0;
      edge_aligned <= 1'b0;
      hold         <= 1'b0;
      div2         <= 1'b0;
      cfg_s1       <= 1'b0;
      cfg_s2       <= 1'b0;
      phase_locked <= 1'b0;
    end else begin
      ctrl_rst     <= 1'b0;
      cnt          <= ctrl_rst ? '0 : cnt + CW'(1);
      div2         <= ~div2;
      cfg_s1       <= cfg_done;
      cfg_s2       <= cfg_s1;
      phase_locked <= done;
      unique case (state)
        SEARCH: if (!ctrl_rst && cnt == CW'(CHECK_PERIOD - 1)) begin
          if (d == '0) begin
            armed <= 1'b1;
          end else if (armed) begin
            edge_aligned <= 1'b1;
            hold         <= 1'b1;
            state        <= CONFIG;
          end
        end
        CONFIG: if (cfg_s2) begin
          hold  <= 1'b0;
          state <= ALIGNED;
        end
        ALIGNED: ;
        default: state <= SEARCH;
      endcase
    end
  end

  // ---------------- RX UsrClk domain ----------------
  logic       hold_s1, hold_s2;
  logic       div2_q, div2_qq;
  logic [1:0] ph;
  logic [$clog2(CFG_CHECKS+1)-1:0] good;
  logic       coincide;

  assign coincide = (div2_q == div2_qq);

  always_ff @(posedge rx_usrclk or posedge rst) begin
    if (rst) begin
      hold_s1  <= 1'b0;
      hold_s2  <= 1'b0;
      div2_q   <= 1'b0;
      div2_qq  <= 1'b0;
      ph       <= '0;
      good     <= '0;
      cfg_done <= 1'b0;
    end else begin
      hold_s1 <= hold;
      hold_s2 <= hold_s1;
      div2_q  <= div2;
      div2_qq <= div2_q;
      if (hold_s2 && !cfg_done && coincide) begin
        // this cycle starts at a coinciding edge: the next one is phase 1
        ph <= 2'd1;
        if (ph == 2'd0) begin
          good <= good + 1'b1;
          if (int'(good) + 1 >= int'(CFG_CHECKS)) cfg_done <= 1'b1;
        end else begin
          good <= '0;
        end
      end else begin
        ph <= (ph == 2'd2) ? 2'd0 : ph + 2'd1;
      end
    end
  end

  assign sample = cfg_done && (ph == 2'd2);
endmodule
