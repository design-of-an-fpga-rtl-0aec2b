// usb3_lfps_tx: Low-Frequency Periodic Signaling (LFPS) generator.
//
// LFPS is produced through the ordinary transceiver datapath rather than by a
// dedicated analog block. The transceiver runs a 40-bit interface with the
// 8b/10b encoder bypassed on all four byte lanes (tx_8b10b_bypass = 8'h0F), so
// each 40-bit word is sent raw and lasts 8 ns at 5 Gb/s. One word of all ones
// gives only 8 ns of high level, less than the 10 ns half period of the
// fastest allowed LFPS (tPeriod >= 20 ns), so the high level is held for
// HALF_PERIOD_WORDS = 2 words and the low level likewise, which makes
// tPeriod = 4 words = 32 ns. A Polling burst (tBurst) is BURST_PERIODS = 32
// periods = 1.024 us; after it the line is put into electrical idle
// (tx_elecidle = 1) until tRepeat, REPEAT_WORDS = 1250 words = 10 us after the
// burst started. These three numbers follow the paper; the wake-up burst
// length is this design's choice (WAKE_PERIODS = 2500 periods = 80 us, the
// shortest U2-exit burst of the USB 3.0 LFPS table, which also satisfies the
// U1-exit limits).
//
// The generator is commanded the way a USB 3.0 PHY is told to send LFPS on
// its PIPE interface, with the two signal combinations the paper lists:
//   Polling LFPS  req_txpd = 00, req_rxpd = 00, req_txdetectrx = 1 and
//                 req_txelecidle = 1 (link initialisation);
//   wake-up LFPS  req_txpd = 01, req_rxpd = 01 and req_txelecidle = 0
//                 (waking a partner in a low-power link state).
// Because a generic transceiver would read TXDETECTRX = 1 as a request for
// receiver detection, the request is not passed on while it means "send
// Polling LFPS": tx_detectrx is req_txdetectrx outside that combination.
//
// Interface (all on the 125 MHz word clock):
//   req_*       PIPE-style requests from the LTSSM (levels). While the
//               Polling combination holds, bursts repeat every REPEAT_WORDS;
//               a burst in progress always completes. The wake-up
//               combination starting (rising edge) gives one burst of
//               WAKE_PERIODS periods (ignored while a burst or gap runs).
//   tx_data     40-bit raw word for the transceiver, valid while
//               tx_elecidle is low.
//   tx_detectrx TXDETECTRX for the transceiver.
//   burst_done  one-cycle pulse in the last word of every burst.
// Timing: a burst starts the cycle after the request is seen in idle; the
// first word of a burst is high.
module usb3_lfps_tx #(
  parameter int unsigned HALF_PERIOD_WORDS = 2,
  parameter int unsigned BURST_PERIODS     = 32,
  parameter int unsigned REPEAT_WORDS      = 1250,
  parameter int unsigned WAKE_PERIODS      = 2500
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  req_txpd,
  input  logic [1:0]  req_rxpd,
  input  logic        req_txdetectrx,
  input  logic        req_txelecidle,
  output logic [39:0] tx_data,
  output logic        tx_elecidle,
  output logic [7:0]  tx_8b10b_bypass,
  output logic        tx_detectrx,
  output logic        active,
  output logic        burst_done
);

  localparam int unsigned PERIOD_WORDS = 2 * HALF_PERIOD_WORDS;

  typedef enum logic [1:0] {S_IDLE, S_BURST, S_GAP} st_e;
  st_e         st;
  logic [31:0] word_cnt;     // words since the burst started
  logic [31:0] burst_words;  // length of the current burst in words
  logic [31:0] phase;        // position inside one tPeriod
  logic        polling_en;   // Polling LFPS combination present
  logic        wake_cond;    // wake-up LFPS combination present
  logic        wake_cond_q;
  logic        wake_req;     // wake-up combination has just started

  assign polling_en  = (req_txpd == 2'b00) && (req_rxpd == 2'b00) && req_txdetectrx && req_txelecidle;
  assign wake_cond   = (req_txpd == 2'b01) && (req_rxpd == 2'b01) && !req_txelecidle;
  assign wake_req    = wake_cond && !wake_cond_q;
  assign tx_detectrx = req_txdetectrx && !polling_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      word_cnt    <= '0;
      burst_words <= '0;
      phase       <= '0;
      wake_cond_q <= 1'b0;
    end else begin
      wake_cond_q <= wake_cond;
      unique case (st)
        S_IDLE: begin
          word_cnt <= '0;
          phase    <= '0;
          if (polling_en) begin
            st          <= S_BURST;
            burst_words <= BURST_PERIODS * PERIOD_WORDS;
          end else if (wake_req) begin
            st          <= S_BURST;
            burst_words <= WAKE_PERIODS * PERIOD_WORDS;
          end
        end
        S_BURST: begin
          word_cnt <= word_cnt + 1;
          phase    <= (phase == PERIOD_WORDS - 1) ? '0 : phase + 1;
          if (word_cnt == burst_words - 1)
            st <= (burst_words == BURST_PERIODS * PERIOD_WORDS) ? S_GAP : S_IDLE;
        end
        S_GAP: begin
          word_cnt <= word_cnt + 1;
          if (word_cnt >= REPEAT_WORDS - 1) begin
            word_cnt <= '0;
            phase    <= '0;
            st       <= polling_en ? S_BURST : S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    active          = (st == S_BURST);
    tx_elecidle     = !active;
    tx_data         = (active && phase < HALF_PERIOD_WORDS) ? 40'hFF_FFFF_FFFF : 40'h0;
    tx_8b10b_bypass = 8'h0F;
    burst_done      = active && (word_cnt == burst_words - 1);
  end

endmodule
