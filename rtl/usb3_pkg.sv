// usb3_pkg: types, symbol codes and CRC functions shared by the USB 3.0
// device controller.
//
// The controller moves one 32-bit word (four 8b/10b symbols) per cycle of
// the 125 MHz transceiver word clock; byte 0 of a word is the first symbol on
// the wire and bit i of the K mask marks byte i as a control (K) symbol.
// The symbol codes, packet type codes, header layouts and CRC polynomials
// below are those of the USB 3.0 specification as this design uses them; the
// controller paper names the packets (LGOOD, LCRD, TSEQ, TS1, TS2) but does
// not print their encodings. CRC bit ordering is self-consistent within this
// design (bytes in wire order, bits LSB first) and has not been checked
// against a commercial host.
package usb3_pkg;

  // ---------------------------------------------------------- K symbols
  localparam logic [7:0] K_COM = 8'hBC;  // K28.5, ordered-set comma
  localparam logic [7:0] K_SKP = 8'h3C;  // K28.1
  localparam logic [7:0] K_SHP = 8'hFB;  // K27.7, start header packet
  localparam logic [7:0] K_SDP = 8'h5C;  // K28.2, start data packet payload
  localparam logic [7:0] K_END = 8'hFD;  // K29.7, end
  localparam logic [7:0] K_SLC = 8'hDC;  // K28.6, start link command
  localparam logic [7:0] K_EPF = 8'hF7;  // K23.7, end packet framing

  // Framing words: three start symbols then EPF, byte 0 first on the wire.
  localparam logic [31:0] W_HPSTART  = {K_EPF, K_SHP, K_SHP, K_SHP};
  localparam logic [31:0] W_DPPSTART = {K_EPF, K_SDP, K_SDP, K_SDP};
  localparam logic [31:0] W_DPPEND   = {K_EPF, K_END, K_END, K_END};
  localparam logic [31:0] W_LCSTART  = {K_EPF, K_SLC, K_SLC, K_SLC};
  localparam logic [31:0] W_COM4     = {4{K_COM}};

  // Training ordered-set identifiers (symbols 6..15 of TS1 / TS2).
  localparam logic [7:0] D_TS1_ID = 8'h4A;  // D10.2
  localparam logic [7:0] D_TS2_ID = 8'h45;  // D5.2

  // ---------------------------------------------------- packet type codes
  typedef enum logic [4:0] {
    PT_LMP = 5'h00,
    PT_TP  = 5'h04,
    PT_DP  = 5'h08,
    PT_ITP = 5'h0C
  } pkt_type_e;

  typedef enum logic [3:0] {
    TP_ACK    = 4'h1,
    TP_NRDY   = 4'h2,
    TP_ERDY   = 4'h3,
    TP_STATUS = 4'h4,
    TP_STALL  = 4'h5
  } tp_subtype_e;

  // Link command word: info[10:0] = {class[1:0], type[1:0], rsvd[2:0], subtype[3:0]}
  typedef enum logic [1:0] {
    LC_TYPE_GOOD = 2'b00,   // LGOOD_n, subtype n = header sequence number
    LC_TYPE_CRD  = 2'b01    // LCRD_x, subtype x = credit index A..D
  } lc_type_e;

  // --------------------------------------------------------- header layout
  // 12-byte header as three little-endian double words.
  typedef struct packed {
    logic [31:0] dw2;
    logic [31:0] dw1;
    logic [31:0] dw0;
  } hdr_t;

  // Decoded fields common to TP and DP headers used by the device.
  // DW0: [4:0] type, [24:5] route string, [31:25] device address
  // TP DW1: [3:0] subtype, [7] direction (1 = IN), [11:8] endpoint,
  //         [20:16] NumP, [25:21] sequence number
  // DP DW1: [4:0] sequence number, [6] end of burst, [7] direction,
  //         [11:8] endpoint, [15] setup, [31:16] data length in bytes
  function automatic hdr_t make_tp(input logic [6:0] addr, input tp_subtype_e st,
                                   input logic dir_in, input logic [3:0] ep,
                                   input logic [4:0] nump, input logic [4:0] seq);
    hdr_t h;
    h.dw0 = {addr, 20'd0, PT_TP};
    h.dw1 = {6'd0, seq, nump, 4'd0, ep, dir_in, 3'd0, st};
    h.dw2 = 32'd0;
    return h;
  endfunction

  function automatic hdr_t make_dph(input logic [6:0] addr, input logic [4:0] seq,
                                    input logic dir_in, input logic [3:0] ep,
                                    input logic setup, input logic [15:0] len);
    hdr_t h;
    h.dw0 = {addr, 20'd0, PT_DP};
    h.dw1 = {len, setup, 3'd0, ep, dir_in, 1'b0, 1'b0, seq};
    h.dw2 = 32'd0;
    return h;
  endfunction

  // --------------------------------------------------------------- CRCs
  // CRC-5 over the 11 information bits of a link control word:
  // x^5 + x^2 + 1, seed all ones, result inverted.
  function automatic logic [4:0] crc5(input logic [10:0] d);
    logic [4:0] c;
    logic fb;
    c = 5'h1F;
    for (int i = 0; i < 11; i++) begin
      fb = c[4] ^ d[i];
      c  = {c[3:0], 1'b0} ^ (fb ? 5'h05 : 5'h00);
    end
    return ~c;
  endfunction

  // Link control word with its CRC-5 in bits [15:11].
  function automatic logic [15:0] lcw(input logic [10:0] info);
    return {crc5(info), info};
  endfunction

  // CRC-16 over the 12 header bytes: x^16 + x^12 + x^3 + x + 1 (0x100B),
  // seed all ones, result inverted.
  function automatic logic [15:0] crc16_hdr(input hdr_t h);
    logic [95:0] d;
    logic [15:0] c;
    logic fb;
    d = h;
    c = 16'hFFFF;
    for (int i = 0; i < 96; i++) begin
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0} ^ (fb ? 16'h100B : 16'h0000);
    end
    return ~c;
  endfunction

  // One 32-bit step of the payload CRC-32 (IEEE 802.3 polynomial, reflected,
  // bits LSB first). Seed 32'hFFFF_FFFF; the transmitted CRC is the inverse.
  function automatic logic [31:0] crc32_step(input logic [31:0] c_in, input logic [31:0] d);
    logic [31:0] c;
    c = c_in;
    for (int i = 0; i < 32; i++) begin
      c = (c >> 1) ^ ((c[0] ^ d[i]) ? 32'hEDB8_8320 : 32'h0);
    end
    return c;
  endfunction

  // ------------------------------------------------------------- LTSSM
  typedef enum logic [3:0] {
    LT_INACTIVE   = 4'd0,
    LT_RX_DETECT  = 4'd1,
    LT_POLL_LFPS  = 4'd2,
    LT_POLL_RXEQ  = 4'd3,   // TSEQ transmission
    LT_POLL_ACT   = 4'd4,   // TS1 exchange
    LT_POLL_CFG   = 4'd5,   // TS2 exchange
    LT_POLL_IDLE  = 4'd6,
    LT_U0         = 4'd7,
    LT_U1         = 4'd8,
    LT_U2         = 4'd9,
    LT_U3         = 4'd10,
    LT_U_EXIT     = 4'd11   // sending wake-up LFPS to leave U1/U2/U3
  } ltssm_state_e;

  // ------------------------------------------------------ status counters
  typedef struct packed {
    logic [31:0] in_pkts;      // bulk-in data packets sent
    logic [31:0] out_pkts;     // bulk-out data packets accepted
    logic [31:0] nrdy;         // NRDY transaction packets sent
    logic [31:0] erdy;         // ERDY transaction packets sent
    logic [31:0] retry;        // packets answered with the retry bit
    logic [31:0] setups;       // SETUP packets received
    logic [31:0] credit_stall; // cycles a header waited for a link credit
    logic [31:0] lgood_rx;     // LGOOD link commands received
    logic [31:0] lc_tx;        // link commands sent
    logic [31:0] hdr_err;      // received headers dropped for CRC / sequence
  } usb3_status_t;

endpackage
