// usb3_ltssm: Link Training and Status State Machine of the device.
//
// States and order follow the LTSSM overview of the paper:
// Inactive -> Rx.Detect -> Polling -> U0 -> U1 / U2 / U3.
//   Inactive   left when `enable` is high (this design's choice: the paper
//              prints the transition but not its cause).
//   Rx.Detect  txdetectrx is asserted while phystatus is low; phystatus
//              going high reports that receiver detection is complete and
//              the state moves to Polling.
//   Polling    split into the steps the paper lists:
//              LFPS  - Polling LFPS bursts are sent (usb3_lfps_tx) until the
//                      partner's Polling LFPS has been recognised
//                      (polling_det) and the current own burst has ended;
//              RxEQ  - the transceiver is on and TSEQ_COUNT TSEQ ordered sets
//                      train the partner's equaliser;
//              Active- TS1 is sent until RX_TS_COUNT consecutive TS1 or TS2
//                      have been received;
//              Config- TS2 is sent until RX_TS_COUNT consecutive TS2 have
//                      been received and at least TS2_TX_MIN were sent;
//              Idle  - scrambled logical idle is sent until IDLE_RX_WORDS
//                      consecutive idle words are received, then U0.
//   U0         the link layer owns the transmitter (link_active).
//   U1/U2/U3   entered on go_u1/go_u2/go_u3 from U0; electrical idle with
//              txpd = rxpd = 2'b01. Leaving them (not printed in the state
//              figure) follows the paper's statement that LFPS wakes a link
//              partner in a low-power state: a wake-up LFPS burst is sent
//              (on wake_req or in answer to the partner's wake_det) and U0
//              is re-entered when the burst has ended and the partner's LFPS
//              has been seen. The USB 3.0 Recovery state is not modelled.
// LFPS is requested the way a USB 3.0 PHY is asked for it on its PIPE
// interface, with the combinations the paper gives: in Polling.LFPS
// txpd = rxpd = 00 with txdetectrx = 1 and tx_elecidle = 1; in U-exit
// txpd = rxpd = 01 with tx_elecidle = 0. usb3_lfps_tx decodes them.
// Outside those states txdetectrx is the receiver-detection request and
// tx_elecidle the electrical-idle request of the data path. Receiver
// detection is requested with txpd = rxpd = 10 (the PIPE P2 state in which
// USB 3.0 PHYs detect a receiver; this design's choice, the paper gives no
// power state for it), which keeps it apart from the Polling combination.
// The TSEQ, TS1 and TS2 contents, the counts RX_TS_COUNT = 8,
// TS2_TX_MIN = 16 and TSEQ_COUNT = 65536 are taken from the USB 3.0
// specification, not from the paper. No timeouts are implemented.
// Ordered sets are sent unscrambled and word aligned (COM in byte 0); all
// outputs are registered or decoded from the registered state.
module usb3_ltssm
  import usb3_pkg::*;
#(
  parameter int unsigned TSEQ_COUNT    = 65536,
  parameter int unsigned RX_TS_COUNT   = 8,
  parameter int unsigned TS2_TX_MIN    = 16,
  parameter int unsigned IDLE_RX_WORDS = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  // transceiver status / control
  input  logic         phystatus,
  output logic         txdetectrx,
  output logic [1:0]   txpd,
  output logic [1:0]   rxpd,
  // LFPS generator / detector
  input  logic         lfps_burst_done,
  input  logic         lfps_active,
  input  logic         rx_polling_det,
  input  logic         rx_wake_det,
  // received, descrambled words
  input  logic [31:0]  rx_data,
  input  logic [3:0]   rx_k,
  // training words for the transmitter
  output logic [31:0]  os_data,
  output logic [3:0]   os_k,
  output logic         tx_scr_en,
  output logic         rx_scr_en,
  output logic         tx_elecidle,
  output logic         use_lfps,      // transmitter shows the LFPS generator
  output logic         link_active,   // U0: transmitter belongs to the link
  // power management requests
  input  logic         go_u1,
  input  logic         go_u2,
  input  logic         go_u3,
  input  logic         wake_req,
  output ltssm_state_e state
);

  // ------------------------------------------------------------- TSEQ
  function automatic logic [31:0] tseq_word(input logic [2:0] w);
    case (w)
      3'd0: return {8'hC0, 8'h17, 8'hFF, K_COM};  // K28.5 D31.7 D23.0 D0.6
      3'd1: return {8'h02, 8'hE7, 8'hB2, 8'h14};  // D20.0 D18.5 D7.7 D2.0
      3'd2: return {8'h28, 8'h6E, 8'h72, 8'h82};  // D2.4 D18.3 D14.3 D8.1
      3'd3: return {8'hBF, 8'h6D, 8'hBE, 8'hA6};  // D6.5 D30.5 D13.3 D31.5
      default: return {4{8'h4A}};                  // D10.2 x 16
    endcase
  endfunction

  function automatic logic [31:0] ts_word(input logic [1:0] w, input logic [7:0] id);
    case (w)
      2'd0: return W_COM4;
      2'd1: return {id, id, 8'h00, 8'h00};  // symbol 4 reserved, 5 link functionality
      default: return {4{id}};
    endcase
  endfunction

  // ------------------------------------------- received ordered sets
  logic [1:0] rx_os_idx;      // word index inside a received TS ordered set
  logic       rx_os_ok;       // words so far match
  logic [7:0] rx_os_id;
  logic       rx_ts1_done, rx_ts2_done;
  logic [7:0] rx_ts_cnt;      // consecutive TS1-or-TS2 (Active) / TS2 (Config)
  logic [7:0] rx_idle_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_os_idx   <= '0;
      rx_os_ok    <= 1'b0;
      rx_os_id    <= '0;
      rx_ts1_done <= 1'b0;
      rx_ts2_done <= 1'b0;
    end else begin
      rx_ts1_done <= 1'b0;
      rx_ts2_done <= 1'b0;
      if (rx_k == 4'hF && rx_data == W_COM4) begin
        rx_os_idx <= 2'd1;
        rx_os_ok  <= 1'b1;
      end else if (rx_os_idx != 2'd0) begin
        rx_os_idx <= rx_os_idx + 1;
        unique case (rx_os_idx)
          2'd1: begin
            rx_os_id <= rx_data[31:24];
            rx_os_ok <= rx_os_ok && rx_k == 4'h0 && rx_data[31:24] == rx_data[23:16]
                        && (rx_data[31:24] == D_TS1_ID || rx_data[31:24] == D_TS2_ID);
          end
          2'd2: rx_os_ok <= rx_os_ok && rx_k == 4'h0 && rx_data == {4{rx_os_id}};
          default: begin
            if (rx_os_ok && rx_k == 4'h0 && rx_data == {4{rx_os_id}}) begin
              rx_ts1_done <= (rx_os_id == D_TS1_ID);
              rx_ts2_done <= (rx_os_id == D_TS2_ID);
            end
            rx_os_ok <= 1'b0;
          end
        endcase
      end
    end
  end

  // ------------------------------------------------------ state machine
  logic [31:0] os_cnt;        // ordered sets sent in this state
  logic [2:0]  os_word;       // word inside the ordered set being sent
  logic        os_last;       // last word of the ordered set being sent
  logic        partner_seen;  // Polling LFPS / wake LFPS seen from the partner

  assign os_last = (state == LT_POLL_RXEQ) ? (os_word == 3'd7) : (os_word[1:0] == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= LT_INACTIVE;
      os_cnt        <= '0;
      os_word       <= '0;
      partner_seen  <= 1'b0;
      rx_ts_cnt     <= '0;
      rx_idle_cnt   <= '0;
    end else begin
      // ordered-set word counter runs in every training state
      if (state inside {LT_POLL_RXEQ, LT_POLL_ACT, LT_POLL_CFG}) begin
        os_word <= os_last ? 3'd0 : os_word + 1;
        if (os_last) os_cnt <= os_cnt + 1;
      end else begin
        os_word <= '0;
      end
      // consecutive received TS counting
      if (state == LT_POLL_ACT) begin
        if (rx_ts1_done || rx_ts2_done) rx_ts_cnt <= (rx_ts_cnt == 8'hFF) ? rx_ts_cnt : rx_ts_cnt + 1;
      end else if (state == LT_POLL_CFG) begin
        if (rx_ts2_done) rx_ts_cnt <= (rx_ts_cnt == 8'hFF) ? rx_ts_cnt : rx_ts_cnt + 1;
        else if (rx_ts1_done) rx_ts_cnt <= '0;
      end
      if (state == LT_POLL_IDLE)
        rx_idle_cnt <= (rx_k == 4'h0 && rx_data == 32'h0) ? rx_idle_cnt + 1 : '0;
      else
        rx_idle_cnt <= '0;

      unique case (state)
        LT_INACTIVE: if (enable) state <= LT_RX_DETECT;
        LT_RX_DETECT: if (phystatus) begin
          state        <= LT_POLL_LFPS;
          partner_seen <= 1'b0;
        end
        LT_POLL_LFPS: begin
          if (rx_polling_det) partner_seen <= 1'b1;
          if (lfps_burst_done && (partner_seen || rx_polling_det)) begin
            state  <= LT_POLL_RXEQ;
            os_cnt <= '0;
          end
        end
        LT_POLL_RXEQ: if (os_last && os_cnt == TSEQ_COUNT - 1) begin
          state     <= LT_POLL_ACT;
          os_cnt    <= '0;
          rx_ts_cnt <= '0;
        end
        LT_POLL_ACT: if (os_last && 32'(rx_ts_cnt) >= RX_TS_COUNT) begin
          state     <= LT_POLL_CFG;
          os_cnt    <= '0;
          rx_ts_cnt <= '0;
        end
        LT_POLL_CFG: if (os_last && 32'(rx_ts_cnt) >= RX_TS_COUNT && os_cnt >= TS2_TX_MIN - 1) begin
          state <= LT_POLL_IDLE;
        end
        LT_POLL_IDLE: if (32'(rx_idle_cnt) >= IDLE_RX_WORDS - 1 && rx_k == 4'h0 && rx_data == 32'h0)
          state <= LT_U0;
        LT_U0: begin
          if (go_u1)      state <= LT_U1;
          else if (go_u2) state <= LT_U2;
          else if (go_u3) state <= LT_U3;
        end
        LT_U1, LT_U2, LT_U3: if (wake_req || rx_wake_det) begin
          state         <= LT_U_EXIT;
          partner_seen  <= rx_wake_det;
        end
        LT_U_EXIT: begin
          if (rx_wake_det) partner_seen <= 1'b1;
          if (lfps_burst_done && (partner_seen || rx_wake_det)) state <= LT_U0;
        end
        default: state <= LT_INACTIVE;
      endcase
      if (!enable) state <= LT_INACTIVE;
    end
  end

  // ------------------------------------------------------------ outputs
  always_comb begin
    os_data = 32'h0;
    os_k    = 4'h0;
    unique case (state)
      LT_POLL_RXEQ: begin
        os_data = tseq_word(os_word);
        os_k    = (os_word == 3'd0) ? 4'b0001 : 4'b0000;
      end
      LT_POLL_ACT: begin
        os_data = ts_word(os_word[1:0], D_TS1_ID);
        os_k    = (os_word[1:0] == 2'd0) ? 4'hF : 4'h0;
      end
      LT_POLL_CFG: begin
        os_data = ts_word(os_word[1:0], D_TS2_ID);
        os_k    = (os_word[1:0] == 2'd0) ? 4'hF : 4'h0;
      end
      default: ;  // logical idle: data 00, scrambled
    endcase
  end

  // PIPE-style requests. The LFPS generator recognises the two combinations
  // that mean "send LFPS": Polling.LFPS (txpd = rxpd = 00, txdetectrx = 1,
  // tx_elecidle = 1) and U-exit (txpd = rxpd = 01, tx_elecidle = 0).
  assign txdetectrx      = ((state == LT_RX_DETECT) && !phystatus) || (state == LT_POLL_LFPS);
  always_comb begin
    if (state inside {LT_U1, LT_U2, LT_U3, LT_U_EXIT}) txpd = 2'b01;
    else if (state == LT_RX_DETECT)                    txpd = 2'b10;
    else                                               txpd = 2'b00;
  end
  assign rxpd            = txpd;
  assign use_lfps        = (state inside {LT_POLL_LFPS, LT_U_EXIT}) || lfps_active;
  assign tx_elecidle     = state inside {LT_INACTIVE, LT_RX_DETECT, LT_POLL_LFPS, LT_U1, LT_U2, LT_U3};
  assign tx_scr_en       = (state == LT_POLL_IDLE) || (state == LT_U0);
  assign rx_scr_en       = tx_scr_en;
  assign link_active     = (state == LT_U0);

endmodule
