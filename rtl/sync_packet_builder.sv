// sync_packet_builder: link synchronisation and packet building ("Syn. &
// Packet builder"), clocked by RX UsrClk.
// On every Sample strobe (one RX UsrClk cycle in three, i.e. every 60 bits) it
// registers the 100-bit window. For each candidate header position p = 0..29 it
// checks that the four bits starting at window[p] and at window[p+30] both form
// a valid header (1010 signal or 1100 NULL). Packets are sent header first,
// bit 29 first, so packet bit 29-i is window[p+i].
// Synchronisation: the lowest position passing the check becomes the
// candidate; the candidate must then pass SYNC_CHECKS consecutive loads
// without an error before it is confirmed (locked). Once locked, the position
// is kept; LOSS_CHECKS consecutive failed loads drop the lock and the search
// starts again.
// Outputs: head_pos and locked are registered and change one cycle after the
// load that decided them. pair is built combinationally from the registered
// window and head_pos: pair[59:30] is the earlier packet and pair[29:0] the
// later one; it is stable from one Sample load to the next. pair_tag toggles
// on every load, for the SEL logic in the Clk160_c domain.
// The window size, the two-packet build and the "same position, consecutive
// checks" rule follow the described receiver; the check count, the loss rule
// and the bit order are this design's choices.
module sync_packet_builder
  import router_pkg::*;
#(
  parameter int unsigned SYNC_CHECKS = 8,
  parameter int unsigned LOSS_CHECKS = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              sample,
  input  logic [WIN_W-1:0]  window,
  output logic [POS_W-1:0]  head_pos,
  output logic              locked,
  output logic [PAIR_W-1:0] pair,
  output logic              pair_tag
);
  typedef enum logic [1:0] {SEARCH, CONFIRM, LOCKED} sync_state_t;

  logic [WIN_W-1:0] snap;
  logic             snap_new;
  logic [N_POS-1:0] hit;
  logic [POS_W-1:0] first_hit;
  logic             any_hit;
  sync_state_t      state;
  logic [7:0]       good_cnt;
  logic [7:0]       bad_cnt;

  // Header at window bit p (transmitted first) .. p+3
  function automatic logic [HDR_W-1:0] hdr_at(input logic [WIN_W-1:0] w, input int unsigned p);
    return {w[p], w[p+1], w[p+2], w[p+3]};
  endfunction

  always_comb begin
    any_hit   = 1'b0;
    first_hit = '0;
    for (int p = 0; p < N_POS; p++) begin
      hit[p] = is_header(hdr_at(snap, p)) && is_header(hdr_at(snap, p + PKT_W));
    end
    for (int p = N_POS - 1; p >= 0; p--) begin
      if (hit[p]) begin
        any_hit   = 1'b1;
        first_hit = POS_W'(p);
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      snap     <= '0;
      snap_new <= 1'b0;
      pair_tag <= 1'b0;
    end else begin
      snap_new <= sample;
      if (sample) begin
        snap     <= window;
        pair_tag <= ~pair_tag;
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state    <= SEARCH;
      head_pos <= '0;
      good_cnt <= '0;
      bad_cnt  <= '0;
    end else if (snap_new) begin
      unique case (state)
        SEARCH: if (any_hit) begin
          head_pos <= first_hit;
          good_cnt <= 8'd1;
          state    <= (SYNC_CHECKS <= 1) ? LOCKED : CONFIRM;
        end
        CONFIRM: begin
          if (hit[head_pos]) begin
            good_cnt <= good_cnt + 8'd1;
            if (good_cnt + 8'd1 >= 8'(SYNC_CHECKS)) begin
              state   <= LOCKED;
              bad_cnt <= '0;
            end
          end else if (any_hit) begin
            head_pos <= first_hit;
            good_cnt <= 8'd1;
          end else begin
            state <= SEARCH;
          end
        end
        LOCKED: begin
          if (hit[head_pos]) begin
            bad_cnt <= '0;
          end else begin
            bad_cnt <= bad_cnt + 8'd1;
            if (bad_cnt + 8'd1 >= 8'(LOSS_CHECKS)) state <= SEARCH;
          end
        end
        default: state <= SEARCH;
      endcase
    end
  end

  assign locked = (state == LOCKED);

  // Two consecutive packets starting at head_pos
  always_comb begin
    for (int i = 0; i < PKT_W; i++) begin
      pair[PAIR_W-1-i] = snap[int'(head_pos) + i];
      pair[PKT_W-1-i]  = snap[int'(head_pos) + PKT_W + i];
    end
  end
endmodule
