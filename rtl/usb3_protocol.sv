// usb3_protocol: protocol layer of the device.
//
// Answers the host's transaction packets, one transaction at a time:
//   ACK TP, IN, EP1   bulk-in request. If the bulk-in FIFO holds data, a data
//                     packet is sent: header with the sequence number the host
//                     asked for and length min(FIFO words, MAX_PKT_BYTES/4)*4,
//                     then the payload read straight from the FIFO. If the
//                     FIFO is empty an NRDY TP is sent; the endpoint block
//                     later asks for an ERDY TP when data has arrived.
//   DP, OUT, EP2      bulk-out data. If the FIFO has room for the packet the
//                     payload is written into it and, with a good CRC-32 and
//                     the expected sequence number, acknowledged by an ACK TP
//                     carrying the next sequence number; a bad CRC is
//                     answered by an ACK TP with the retry bit set. Without
//                     room the payload is dropped and NRDY is sent.
//   DP, setup, EP0    the 8-byte SETUP packet goes to usb3_endpoints and is
//                     acknowledged.
//   ACK TP, IN, EP0   control data stage: the descriptor chosen by the last
//                     GET_DESCRIPTOR is sent (header only if it is empty).
//   DP, OUT, EP0      control OUT data (e.g. SET_SEL) is acknowledged and
//                     discarded.
//   STATUS TP, EP0    answered by an ACK TP; then the endpoint block applies a
//                     pending address or configuration.
// Pending ERDY requests are sent when no transaction is in progress.
// The paper gives this block's role (generating tokens or data packets in
// response to host commands); the transaction rules are the USB 3.0 ones,
// reduced to what a single-packet bulk device needs. Not implemented: bursts
// (NumP > 1 outstanding), retransmission of an IN packet the host asks for
// again (there is no replay buffer), streams, isochronous and interrupt
// endpoints, STALL, link power management packets. A bulk-out payload is
// written into the FIFO as it arrives and committed (made visible to the
// user side) only when its CRC and sequence number are right; otherwise it
// is discarded.
module usb3_protocol
  import usb3_pkg::*;
#(
  parameter int unsigned MAX_PKT_BYTES = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        active,
  // link
  input  logic        rx_hdr_valid,
  input  hdr_t        rx_hdr,
  input  logic        rx_pl_valid,
  input  logic [31:0] rx_pl_data,
  input  logic        rx_pl_end,
  input  logic        rx_pl_good,
  output logic        tx_hdr_valid,
  output hdr_t        tx_hdr,
  output logic        tx_hdr_has_dpp,
  input  logic        tx_hdr_ack,
  output logic [31:0] tx_pl_data,
  output logic        tx_pl_last,
  input  logic        tx_pl_rd,
  // bulk-in FIFO (read side)
  input  logic [31:0] in_fifo_data,
  input  logic [15:0] in_fifo_count,
  output logic        in_fifo_rd,
  // bulk-out FIFO (write side)
  output logic [31:0] out_fifo_data,
  output logic        out_fifo_wr,
  output logic        out_fifo_commit,
  output logic        out_fifo_discard,
  input  logic [15:0] out_fifo_free,
  // endpoint management
  output logic        setup_valid,
  output logic [63:0] setup_pkt,
  output logic        status_done,
  output logic [5:0]  desc_idx,
  input  logic [15:0] desc_len,
  input  logic [31:0] desc_word,
  input  logic [6:0]  dev_addr,
  output logic        in_nrdy_sent,
  output logic        out_accepted,
  output logic        out_nrdy_sent,
  input  logic [4:0]  ep2_seq,
  input  logic        erdy_valid,
  input  logic [3:0]  erdy_ep,
  input  logic        erdy_dir_in,
  output logic        erdy_sent,
  // event counters
  output logic [31:0] in_pkt_cnt,
  output logic [31:0] out_pkt_cnt,
  output logic [31:0] nrdy_cnt,
  output logic [31:0] erdy_cnt,
  output logic [31:0] retry_cnt,
  output logic [31:0] setup_cnt
);

  localparam int unsigned MAX_PKT_WORDS = MAX_PKT_BYTES / 4;

  typedef enum logic [2:0] {P_IDLE, P_RX_PL, P_SEND_HDR, P_SEND_PL} pst_e;
  typedef enum logic [1:0] {RX_FIFO, RX_SETUP, RX_DROP} rx_tgt_e;
  typedef enum logic [2:0] {
    EV_NONE, EV_IN_NRDY, EV_OUT_NRDY, EV_STATUS, EV_ERDY, EV_OUT_OK, EV_IN_DATA
  } ev_e;

  pst_e        st;
  rx_tgt_e     rx_tgt;
  logic [3:0]  rx_ep;
  logic [4:0]  rx_seq;
  logic        rx_setup_word;    // which setup word comes next
  logic [15:0] pl_words;         // payload words to send
  logic [15:0] pl_cnt;
  logic        pl_from_desc;
  ev_e         ev_on_ack;        // what to report when the header is taken
  hdr_t        hdr_q;
  logic        dpp_q;

  // decoded fields of the received header
  logic [4:0]  h_type;
  logic [3:0]  h_sub, h_ep;
  logic        h_dir, h_setup;
  logic [4:0]  tp_seq, dp_seq;
  logic [15:0] dp_len, dp_words;
  always_comb begin
    h_type   = rx_hdr.dw0[4:0];
    h_sub    = rx_hdr.dw1[3:0];
    h_dir    = rx_hdr.dw1[7];
    h_ep     = rx_hdr.dw1[11:8];
    h_setup  = rx_hdr.dw1[15];
    tp_seq   = rx_hdr.dw1[25:21];
    dp_seq   = rx_hdr.dw1[4:0];
    dp_len   = rx_hdr.dw1[31:16];
    dp_words = (dp_len + 16'd3) >> 2;
  end

  logic [15:0] in_words;
  assign in_words = (32'(in_fifo_count) > MAX_PKT_WORDS) ? 16'(MAX_PKT_WORDS) : in_fifo_count;

  function automatic hdr_t ack_tp(input logic [6:0] a, input logic [3:0] ep,
                                  input logic [4:0] seq, input logic rty);
    hdr_t h;
    h = make_tp(a, TP_ACK, 1'b0, ep, 5'd1, seq);
    h.dw1[6] = rty;
    return h;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= P_IDLE;
      rx_tgt        <= RX_DROP;
      rx_ep         <= '0;
      rx_seq        <= '0;
      rx_setup_word <= 1'b0;
      pl_words      <= '0;
      pl_cnt        <= '0;
      pl_from_desc  <= 1'b0;
      ev_on_ack     <= EV_NONE;
      hdr_q         <= '0;
      dpp_q         <= 1'b0;
      setup_pkt     <= '0;
      setup_valid   <= 1'b0;
      out_accepted  <= 1'b0;
      in_pkt_cnt    <= '0;
      out_pkt_cnt   <= '0;
      nrdy_cnt      <= '0;
      erdy_cnt      <= '0;
      retry_cnt     <= '0;
      setup_cnt     <= '0;
    end else if (!active) begin
      st <= P_IDLE;
    end else begin
      setup_valid  <= 1'b0;
      out_accepted <= 1'b0;
      unique case (st)
        P_IDLE: begin
          if (rx_hdr_valid && h_type == PT_TP && h_sub == TP_ACK && h_dir) begin
            // IN request
            pl_cnt <= '0;
            if (h_ep == 4'd1 && in_fifo_count != 0) begin
              hdr_q        <= make_dph(dev_addr, tp_seq, 1'b1, 4'd1, 1'b0, in_words << 2);
              dpp_q        <= 1'b1;
              pl_words     <= in_words;
              pl_from_desc <= 1'b0;
              ev_on_ack    <= EV_IN_DATA;
            end else if (h_ep == 4'd1) begin
              hdr_q     <= make_tp(dev_addr, TP_NRDY, 1'b1, 4'd1, 5'd0, 5'd0);
              dpp_q     <= 1'b0;
              ev_on_ack <= EV_IN_NRDY;
            end else begin
              hdr_q        <= make_dph(dev_addr, tp_seq, 1'b1, h_ep, 1'b0, desc_len);
              dpp_q        <= (desc_len != 0);
              pl_words     <= (desc_len + 16'd3) >> 2;
              pl_from_desc <= 1'b1;
              ev_on_ack    <= EV_NONE;
            end
            st <= P_SEND_HDR;
          end else if (rx_hdr_valid && h_type == PT_TP && h_sub == TP_STATUS) begin
            hdr_q     <= ack_tp(dev_addr, h_ep, 5'd0, 1'b0);
            hdr_q.dw1[20:16] <= 5'd0;
            dpp_q     <= 1'b0;
            ev_on_ack <= EV_STATUS;
            st        <= P_SEND_HDR;
          end else if (rx_hdr_valid && h_type == PT_DP && !h_dir) begin
            rx_ep         <= h_ep;
            rx_seq        <= dp_seq;
            rx_setup_word <= 1'b0;
            if (h_ep == 4'd0 && h_setup)                     rx_tgt <= RX_SETUP;
            else if (h_ep == 4'd2 && out_fifo_free >= dp_words) rx_tgt <= RX_FIFO;
            else                                             rx_tgt <= RX_DROP;
            st <= P_RX_PL;
          end else if (erdy_valid) begin
            hdr_q     <= make_tp(dev_addr, TP_ERDY, erdy_dir_in, erdy_ep, 5'd1, 5'd0);
            dpp_q     <= 1'b0;
            ev_on_ack <= EV_ERDY;
            st        <= P_SEND_HDR;
          end
        end
        P_RX_PL: begin
          if (rx_pl_valid && rx_tgt == RX_SETUP) begin
            if (!rx_setup_word) setup_pkt[31:0]  <= rx_pl_data;
            else                setup_pkt[63:32] <= rx_pl_data;
            rx_setup_word <= 1'b1;
          end
          if (rx_pl_end) begin
            dpp_q     <= 1'b0;
            ev_on_ack <= EV_NONE;
            st        <= P_SEND_HDR;
            unique case (rx_tgt)
              RX_SETUP: begin
                hdr_q <= ack_tp(dev_addr, 4'd0, rx_seq + 5'd1, !rx_pl_good);
                if (rx_pl_good) begin
                  setup_valid <= 1'b1;
                  setup_cnt   <= setup_cnt + 1;
                end else retry_cnt <= retry_cnt + 1;
              end
              RX_FIFO: begin
                if (rx_pl_good && rx_seq == ep2_seq) begin
                  hdr_q     <= ack_tp(dev_addr, 4'd2, rx_seq + 5'd1, 1'b0);
                  ev_on_ack <= EV_OUT_OK;
                end else begin
                  hdr_q     <= ack_tp(dev_addr, 4'd2, ep2_seq, 1'b1);
                  retry_cnt <= retry_cnt + 1;
                end
              end
              default: begin
                if (rx_ep == 4'd2) begin
                  hdr_q     <= make_tp(dev_addr, TP_NRDY, 1'b0, 4'd2, 5'd0, 5'd0);
                  ev_on_ack <= EV_OUT_NRDY;
                end else begin
                  hdr_q <= ack_tp(dev_addr, rx_ep, rx_seq + 5'd1, 1'b0);
                end
              end
            endcase
          end
        end
        P_SEND_HDR: if (tx_hdr_ack) begin
          st <= dpp_q ? P_SEND_PL : P_IDLE;
          unique case (ev_on_ack)
            EV_IN_DATA:  in_pkt_cnt <= in_pkt_cnt + 1;
            EV_IN_NRDY, EV_OUT_NRDY: nrdy_cnt <= nrdy_cnt + 1;
            EV_ERDY:     erdy_cnt <= erdy_cnt + 1;
            EV_OUT_OK: begin
              out_pkt_cnt  <= out_pkt_cnt + 1;
              out_accepted <= 1'b1;
            end
            default: ;
          endcase
        end
        P_SEND_PL: if (tx_pl_rd) begin
          pl_cnt <= pl_cnt + 1;
          if (pl_cnt == pl_words - 1) st <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  always_comb begin
    tx_hdr_valid   = (st == P_SEND_HDR);
    tx_hdr         = hdr_q;
    tx_hdr_has_dpp = dpp_q;
    tx_pl_data     = pl_from_desc ? desc_word : in_fifo_data;
    tx_pl_last     = (pl_cnt == pl_words - 1);
    in_fifo_rd     = (st == P_SEND_PL) && tx_pl_rd && !pl_from_desc;
    desc_idx       = pl_cnt[5:0];
    out_fifo_data  = rx_pl_data;
    out_fifo_wr    = (st == P_RX_PL) && rx_pl_valid && rx_tgt == RX_FIFO;
    out_fifo_commit  = (st == P_RX_PL) && rx_pl_end && rx_tgt == RX_FIFO
                       && rx_pl_good && rx_seq == ep2_seq;
    out_fifo_discard = (st == P_RX_PL) && rx_pl_end && rx_tgt == RX_FIFO && !out_fifo_commit;
    status_done    = (st == P_SEND_HDR) && tx_hdr_ack && ev_on_ack == EV_STATUS;
    in_nrdy_sent   = (st == P_SEND_HDR) && tx_hdr_ack && ev_on_ack == EV_IN_NRDY;
    out_nrdy_sent  = (st == P_SEND_HDR) && tx_hdr_ack && ev_on_ack == EV_OUT_NRDY;
    erdy_sent      = (st == P_SEND_HDR) && tx_hdr_ack && ev_on_ack == EV_ERDY;
  end

endmodule
