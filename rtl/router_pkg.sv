// router_pkg: widths, header codes and the packet type shared by the TDS-Router
// link receiver. A TDS packet is 30 bits: a 4-bit header that is sent unscrambled
// followed by 26 scrambled bits. Header 1010 marks a signal packet and 1100 a
// NULL packet. The GTP receiver delivers 20-bit words at 240 MHz, five of which
// (100 bits) form the window that two packets (60 bits) are cut from.
package router_pkg;
  localparam int unsigned WORD_W    = 20;   // GTP parallel width
  localparam int unsigned PKT_W     = 30;   // TDS packet
  localparam int unsigned HDR_W     = 4;
  localparam int unsigned PAY_W     = PKT_W - HDR_W;  // 26 scrambled bits
  localparam int unsigned N_WORDS   = 5;    // RX words in the window
  localparam int unsigned WIN_W     = N_WORDS * WORD_W;  // 100
  localparam int unsigned PAIR_W    = 2 * PKT_W;         // 60
  localparam int unsigned N_POS     = PKT_W;             // header positions 0..29
  localparam int unsigned POS_W     = 5;
  localparam int unsigned N_TDC     = 22;   // D[0]..D[21]
  localparam int unsigned DLY_W     = 5;    // IDELAYE2 tap field

  localparam logic [HDR_W-1:0] HDR_SIGNAL = 4'b1010;
  localparam logic [HDR_W-1:0] HDR_NULL   = 4'b1100;

  typedef struct packed {
    logic [HDR_W-1:0] header;
    logic [PAY_W-1:0] payload;
  } tds_packet_t;

  function automatic logic is_header(input logic [HDR_W-1:0] h);
    return (h == HDR_SIGNAL) || (h == HDR_NULL);
  endfunction
endpackage
