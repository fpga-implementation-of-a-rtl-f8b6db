// rx_word_buffer: the raw-word buffer in front of the packet builder. Four
// WORD_W-bit registers clocked by RX UsrClk keep the previous four GTP words;
// together with the word now on rx_data they form a window of N_WORDS x WORD_W
// = 100 bits, enough to hold two 30-bit TDS packets at any of the 30 header
// positions. The GTP delivers the earliest received bit of a word in bit 0, so
// the window is ordered by arrival: window[0] is the oldest bit, window[99] the
// newest. The window is combinational from the registers and rx_data; the
// packet builder registers it on Sample. Follows the four-register chain of
// the receiver; the bit order is this design's choice.
module rx_word_buffer #(
  parameter int unsigned WORD_W  = 20,
  parameter int unsigned N_WORDS = 5
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [WORD_W-1:0]          rx_data,
  output logic [N_WORDS*WORD_W-1:0]  window
);
  logic [WORD_W-1:0] q [N_WORDS-1];   // q[0] newest stored word

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      for (int i = 0; i < N_WORDS - 1; i++) q[i] <= '0;
    end else begin
      q[0] <= rx_data;
      for (int i = 1; i < N_WORDS - 1; i++) q[i] <= q[i-1];
    end
  end

  always_comb begin
    window[(N_WORDS-1)*WORD_W +: WORD_W] = rx_data;
    for (int i = 0; i < N_WORDS - 1; i++)
      window[(N_WORDS-2-i)*WORD_W +: WORD_W] = q[i];
  end
endmodule
