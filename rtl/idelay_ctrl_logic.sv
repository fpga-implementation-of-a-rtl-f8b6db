// idelay_ctrl_logic: the "IDELAYE2 CONTROL LOGIC", clocked by Clk160_c (which
// it also forwards as ctrlclk, the control clock of the three IDELAYE2s).
// Step 1: while ctrl_rst is high it loads ctrl_r (zero at that time) into all
// delays. Then, in cycle 0 of every CHECK_PERIOD-cycle period, it steps the
// delay of Clk160_c by one 78 ps tap: IDELAYE2 #0 (En[0]) until it reaches
// TAP_MAX, then IDELAYE2 #1 (En[1]). The taps used are kept in
// ctrl_r0 = {taps of #1, taps of #0}. Stepping stops when Edge Aligned is seen.
// It then waits for hold to drop, raises ACK with ctrl_r0 to the register
// calculator, and when the calculator reports done pulses load for one cycle
// so that all three IDELAYE2s take ctrl_r[14:0] (step 2). done is then raised
// to the edge detector. If the calculator withdraws done (the header lock was
// lost), ACK stays up and the new ctrl_r is loaded when done returns.
// IDELAYE2 #i steps on ctrlclk when En[i] is high and loads when load is high.
// The signal names and the order of events follow the described receiver; the
// fill order of #0 then #1 and the reload rule are this design's choices.
module idelay_ctrl_logic #(
  parameter int unsigned CHECK_PERIOD = 16,
  parameter int unsigned TAP_MAX      = 31
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       ctrl_rst,
  input  logic       edge_aligned,
  input  logic       hold,
  input  logic       calc_done,
  output logic       ctrlclk,
  output logic [2:0] en,
  output logic       load,
  output logic [9:0] ctrl_r0,
  output logic       ack,
  output logic       done
);
  typedef enum logic [2:0] {INIT, STEP, WAIT_CALC, LOAD, DONE} ctl_state_t;
  localparam int unsigned CW = $clog2(CHECK_PERIOD);

  ctl_state_t    state;
  logic [CW-1:0] cnt;
  logic [4:0]    t0, t1;
  logic          step;

  assign ctrlclk = clk;
  assign step    = (state == STEP) && (cnt == '0) && !edge_aligned;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state <= INIT;
      cnt   <= '0;
      t0    <= '0;
      t1    <= '0;
    end else if (ctrl_rst) begin
      state <= INIT;
      cnt   <= '0;
      t0    <= '0;
      t1    <= '0;
    end else begin
      cnt <= cnt + CW'(1);
      unique case (state)
        INIT: state <= STEP;
        STEP: begin
          if (edge_aligned) begin
            if (!hold) state <= WAIT_CALC;
          end else if (step) begin
            if (t0 != 5'(TAP_MAX)) t0 <= t0 + 5'd1;
            else                   t1 <= t1 + 5'd1;
          end
        end
        WAIT_CALC: if (calc_done) state <= LOAD;
        LOAD:      state <= DONE;
        DONE:      if (!calc_done) state <= WAIT_CALC;
        default:   state <= INIT;
      endcase
    end
  end

  always_comb begin
    en = 3'b000;
    if (step) en = (t0 != 5'(TAP_MAX)) ? 3'b001 : 3'b010;
  end

  assign load    = (state == INIT) || (state == LOAD);
  assign ctrl_r0 = {t1, t0};
  assign ack     = (state == WAIT_CALC) || (state == LOAD) || (state == DONE);
  assign done    = (state == DONE);
endmodule
