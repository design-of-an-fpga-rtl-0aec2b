// usb3_link: link layer of the device in U0 (link management part of the
// paper's link module).
//
// Transmit side. One 32-bit word is produced per clock; it goes to the PIPE
// module and is scrambled there. Priority per word slot:
//   1. a pending link command, LGOOD_n or LCRD_x, sent as LCSTART followed by
//      one word that carries the 16-bit link command word twice;
//   2. a header packet from the protocol layer, if the partner has a free
//      header buffer (tx_credits > 0): HPSTART, the three header double
//      words, then {link control word, CRC-16}. When the protocol marks the
//      header as followed by data (tx_hdr_has_dpp) the data packet payload
//      follows at once: DPPSTART, payload words, CRC-32, DPPEND;
//   3. logical idle (data 00).
// Link commands are not inserted inside a packet. A header that has to wait
// for a credit is counted in tx_stall_cnt. While the link is in U1, U2 or U3
// (active low, link_up high) nothing is sent, but header sequence numbers,
// credits and owed link commands are kept for the return to U0; they are
// cleared only when link training starts again (link_up low).
//
// Receive side. The descrambled word stream is parsed for HPSTART, LCSTART
// and DPPSTART. A header packet whose CRC-16, link-control-word CRC-5 and
// header sequence number are correct is handed to the protocol layer
// (rx_hdr_valid) and answered with LGOOD_n (n = its sequence number) and
// LCRD_x (x = next of A..D). A received LCRD returns a credit; a received
// LGOOD is counted. Payload words are passed on one word late, so that the
// word before DPPEND can be recognised as the CRC-32; rx_pl_end then reports
// whether it matched.
//
// The paper gives this module's purpose (generating link commands such as
// LGOOD and LCRD); framing symbols, link control word layout, CRCs and the
// credit rule (4 header buffers) are taken from the USB 3.0 specification.
// Not implemented: LBAD / LRTY retry, header retransmission, LUP/LDN, link
// power-management commands, SKP insertion, payloads that are not a whole
// number of 32-bit words.
module usb3_link
  import usb3_pkg::*;
#(
  parameter int unsigned HDR_CREDITS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        active,          // LTSSM in U0: words are sent and parsed
  input  logic        link_up,         // LTSSM in U0..U3 or U-exit; low clears sequence numbers and credits
  // protocol -> link
  input  logic        tx_hdr_valid,
  input  hdr_t        tx_hdr,
  input  logic        tx_hdr_has_dpp,
  output logic        tx_hdr_ack,      // header taken, pulse
  input  logic [31:0] tx_pl_data,      // show-ahead payload word
  input  logic        tx_pl_last,
  output logic        tx_pl_rd,        // payload word taken, pulse
  // link -> protocol
  output logic        rx_hdr_valid,
  output hdr_t        rx_hdr,
  output logic        rx_pl_valid,
  output logic [31:0] rx_pl_data,
  output logic        rx_pl_end,
  output logic        rx_pl_good,
  // PIPE side
  output logic [31:0] tx_data,
  output logic [3:0]  tx_k,
  input  logic [31:0] rx_data,
  input  logic [3:0]  rx_k,
  // status
  output logic [2:0]  tx_credits,
  output logic [31:0] tx_stall_cnt,
  output logic [31:0] rx_lgood_cnt,
  output logic [31:0] rx_hdr_err_cnt,
  output logic [31:0] tx_lc_cnt
);

  // ------------------------------------------------------------------ RX
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_LC, R_DPP} rx_st_e;
  rx_st_e      rst_q;
  logic [2:0]  rx_widx;
  logic [31:0] rx_w [4];
  logic [2:0]  rx_hseq;          // expected header sequence number
  logic [31:0] rx_prev;
  logic        rx_have_prev;
  logic [31:0] rx_crc;
  logic        lc_crd_rx;

  // pending link commands, counted (their sequence numbers run in order)
  logic [2:0]  lgood_pend, lcrd_pend;
  logic [2:0]  lgood_seq;        // sequence number of the next LGOOD to send
  logic [1:0]  lcrd_idx;         // index of the next LCRD to send

  hdr_t        hdr_in;
  logic [15:0] lcw_in;
  logic        hdr_ok;

  always_comb begin
    hdr_in = '{dw2: rx_w[2], dw1: rx_w[1], dw0: rx_w[0]};
    lcw_in = rx_data[31:16];
    hdr_ok = (rx_k == 4'h0) && (rx_data[15:0] == crc16_hdr(hdr_in))
             && (lcw_in == lcw(lcw_in[10:0])) && (lcw_in[2:0] == rx_hseq);
  end

  logic        rx_new_hdr;       // header accepted this cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q          <= R_IDLE;
      rx_widx        <= '0;
      for (int i = 0; i < 4; i++) rx_w[i] <= '0;
      rx_hseq        <= '0;
      rx_prev        <= '0;
      rx_have_prev   <= 1'b0;
      rx_crc         <= '1;
      rx_hdr_valid   <= 1'b0;
      rx_hdr         <= '0;
      rx_pl_valid    <= 1'b0;
      rx_pl_data     <= '0;
      rx_pl_end      <= 1'b0;
      rx_pl_good     <= 1'b0;
      lc_crd_rx      <= 1'b0;
      rx_new_hdr     <= 1'b0;
      rx_lgood_cnt   <= '0;
      rx_hdr_err_cnt <= '0;
    end else begin
      rx_hdr_valid <= 1'b0;
      rx_pl_valid  <= 1'b0;
      rx_pl_end    <= 1'b0;
      lc_crd_rx    <= 1'b0;
      rx_new_hdr   <= 1'b0;
      if (!active) begin
        rst_q <= R_IDLE;
        if (!link_up) rx_hseq <= '0;
      end else begin
        unique case (rst_q)
          R_IDLE: begin
            rx_widx <= '0;
            if (rx_k == 4'hF && rx_data == W_HPSTART) rst_q <= R_HDR;
            else if (rx_k == 4'hF && rx_data == W_LCSTART) rst_q <= R_LC;
            else if (rx_k == 4'hF && rx_data == W_DPPSTART) begin
              rst_q        <= R_DPP;
              rx_have_prev <= 1'b0;
              rx_crc       <= '1;
            end
          end
          R_HDR: begin
            if (rx_widx < 3) begin
              rx_w[rx_widx[1:0]] <= rx_data;
              rx_widx       <= rx_widx + 1;
            end else begin
              rst_q <= R_IDLE;
              if (hdr_ok) begin
                rx_hdr       <= hdr_in;
                rx_hdr_valid <= 1'b1;
                rx_new_hdr   <= 1'b1;
                rx_hseq      <= rx_hseq + 1;
              end else begin
                rx_hdr_err_cnt <= rx_hdr_err_cnt + 1;
              end
            end
          end
          R_LC: begin
            rst_q <= R_IDLE;
            if (rx_k == 4'h0 && rx_data[31:16] == rx_data[15:0]
                && rx_data[15:0] == lcw(rx_data[10:0]) && rx_data[10:9] == 2'b00) begin
              if (rx_data[8:7] == LC_TYPE_GOOD) begin
                rx_lgood_cnt <= rx_lgood_cnt + 1;
              end
              if (rx_data[8:7] == LC_TYPE_CRD) lc_crd_rx <= 1'b1;
            end
          end
          R_DPP: begin
            if (rx_k == 4'hF && rx_data == W_DPPEND) begin
              rst_q      <= R_IDLE;
              rx_pl_end  <= 1'b1;
              rx_pl_good <= rx_have_prev && (rx_prev == ~rx_crc);
            end else if (rx_k != 4'h0) begin
              rst_q      <= R_IDLE;     // aborted payload
              rx_pl_end  <= 1'b1;
              rx_pl_good <= 1'b0;
            end else begin
              rx_prev      <= rx_data;
              rx_have_prev <= 1'b1;
              if (rx_have_prev) begin
                rx_pl_valid <= 1'b1;
                rx_pl_data  <= rx_prev;
                rx_crc      <= crc32_step(rx_crc, rx_prev);
              end
            end
          end
          default: rst_q <= R_IDLE;
        endcase
      end
    end
  end

  // ------------------------------------------------------------------ TX
  typedef enum logic [2:0] {T_IDLE, T_LC, T_HDR, T_PL, T_CRC, T_END} tx_st_e;
  tx_st_e      tst;
  logic [2:0]  tx_widx;
  hdr_t        tx_hdr_q;
  logic        tx_dpp_q;
  logic [2:0]  tx_hseq;
  logic [31:0] tx_crc;
  logic [15:0] lc_word_q;
  logic        lc_next_is_crd;   // alternate LGOOD / LCRD when both pend
  logic        dpp_start_slot;   // first T_PL cycle carries DPPSTART

  logic send_lc, send_hdr, pick_crd;
  always_comb begin
    pick_crd = (lcrd_pend != 0) && ((lgood_pend == 0) || lc_next_is_crd);
    send_lc  = active && (tst == T_IDLE) && ((lgood_pend != 0) || (lcrd_pend != 0));
    send_hdr = active && (tst == T_IDLE) && !send_lc && tx_hdr_valid && (tx_credits != 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst            <= T_IDLE;
      tx_widx        <= '0;
      tx_hdr_q       <= '0;
      tx_dpp_q       <= 1'b0;
      tx_hseq        <= '0;
      tx_crc         <= '1;
      lc_word_q      <= '0;
      lc_next_is_crd <= 1'b0;
      tx_credits     <= 3'(HDR_CREDITS);
      tx_stall_cnt   <= '0;
      tx_lc_cnt      <= '0;
      lgood_pend     <= '0;
      lcrd_pend      <= '0;
      lgood_seq      <= '0;
      lcrd_idx       <= '0;
    end else if (!active) begin
      tst <= T_IDLE;
      if (!link_up) begin
        tx_hseq    <= '0;
        tx_credits <= 3'(HDR_CREDITS);
        lgood_pend <= '0;
        lcrd_pend  <= '0;
        lgood_seq  <= '0;
        lcrd_idx   <= '0;
      end
    end else begin
      // pending link command bookkeeping
      lgood_pend <= lgood_pend + 3'(rx_new_hdr) - 3'(send_lc && !pick_crd);
      lcrd_pend  <= lcrd_pend  + 3'(rx_new_hdr) - 3'(send_lc && pick_crd);
      tx_credits <= tx_credits + 3'(lc_crd_rx) - 3'(send_hdr);
      if (tst == T_IDLE && tx_hdr_valid && tx_credits == 0) tx_stall_cnt <= tx_stall_cnt + 1;
      unique case (tst)
        T_IDLE: begin
          if (send_lc) begin
            tst       <= T_LC;
            tx_lc_cnt <= tx_lc_cnt + 1;
            if (pick_crd) begin
              lc_word_q      <= lcw({2'b00, LC_TYPE_CRD, 3'b000, 2'b00, lcrd_idx});
              lcrd_idx       <= lcrd_idx + 1;
              lc_next_is_crd <= 1'b0;
            end else begin
              lc_word_q      <= lcw({2'b00, LC_TYPE_GOOD, 3'b000, 1'b0, lgood_seq});
              lgood_seq      <= lgood_seq + 1;
              lc_next_is_crd <= 1'b1;
            end
          end else if (send_hdr) begin
            tst      <= T_HDR;
            tx_widx  <= '0;
            tx_hdr_q <= tx_hdr;
            tx_dpp_q <= tx_hdr_has_dpp;
          end
        end
        T_LC: tst <= T_IDLE;
        T_HDR: begin
          tx_widx <= tx_widx + 1;
          if (tx_widx == 3'd4) begin
            tx_hseq <= tx_hseq + 1;
            tst     <= tx_dpp_q ? T_PL : T_IDLE;
            tx_crc  <= '1;
          end
        end
        T_PL: if (!dpp_start_slot) begin
          tx_crc <= crc32_step(tx_crc, tx_pl_data);
          if (tx_pl_last) tst <= T_CRC;
        end
        T_CRC: tst <= T_END;
        T_END: tst <= T_IDLE;
        default: tst <= T_IDLE;
      endcase
    end
  end

  // T_HDR word 0..3 = HPSTART, DW0..DW2; word 4 = {LCW, CRC-16};
  // in T_PL the first cycle is DPPSTART only when entering, so DPPSTART is
  // sent as header word 5 below.
  logic [15:0] tx_lcw;
  assign tx_lcw = lcw({1'b0, 1'b0, 3'b000, 3'b000, tx_hseq});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dpp_start_slot <= 1'b0;
    else        dpp_start_slot <= active && (tst == T_HDR) && (tx_widx == 3'd4) && tx_dpp_q;
  end

  always_comb begin
    tx_data    = 32'h0;
    tx_k       = 4'h0;
    tx_hdr_ack = send_hdr;
    tx_pl_rd   = 1'b0;
    unique case (tst)
      T_LC:  begin tx_data = {lc_word_q, lc_word_q}; end
      T_HDR: begin
        unique case (tx_widx)
          3'd0: begin tx_data = W_HPSTART; tx_k = 4'hF; end
          3'd1: tx_data = tx_hdr_q.dw0;
          3'd2: tx_data = tx_hdr_q.dw1;
          3'd3: tx_data = tx_hdr_q.dw2;
          default: tx_data = {tx_lcw, crc16_hdr(tx_hdr_q)};
        endcase
      end
      T_PL: begin
        if (dpp_start_slot) begin
          tx_data = W_DPPSTART;
          tx_k    = 4'hF;
        end else begin
          tx_data  = tx_pl_data;
          tx_pl_rd = 1'b1;
        end
      end
      T_CRC: tx_data = ~tx_crc;
      T_END: begin tx_data = W_DPPEND; tx_k = 4'hF; end
      default: ;
    endcase
    if (tst == T_IDLE && send_lc) begin
      tx_data = W_LCSTART;
      tx_k    = 4'hF;
    end
  end

endmodule
