// usb3_lfps_rx: received-LFPS detector and classifier.
//
// The transceiver reports LFPS on its receive side only through RXELECIDLE:
// rx_elecidle = 0 means LFPS is present, 1 means no LFPS. This block times
// those low periods on the 125 MHz word clock (8 ns per count).
//   * A burst whose length lies within the Polling tBurst limits
//     (POLL_BURST_MIN..POLL_BURST_MAX words, 0.6 us..1.4 us) and which
//     started POLL_REPEAT_MIN..POLL_REPEAT_MAX words (6 us..14 us) after the
//     previous such burst is reported as Polling LFPS (polling_det pulse at
//     the end of the burst). Two bursts are therefore needed for a first
//     detection; the limits are the Polling row of the USB 3.0 LFPS
//     transmitter timing table.
//   * A burst that has lasted WAKE_MIN words (600 ns, the shortest U1-exit
//     burst) raises wake_det for one cycle while it is still going on, so
//     that the link partner's wake-up can be answered before it ends.
// The paper says only that the received LFPS must be checked to be a Polling
// signal; the timing method here is this design's own. rx_elecidle is assumed
// to be synchronous to clk and free of glitches.
module usb3_lfps_rx #(
  parameter int unsigned POLL_BURST_MIN  = 75,
  parameter int unsigned POLL_BURST_MAX  = 175,
  parameter int unsigned POLL_REPEAT_MIN = 750,
  parameter int unsigned POLL_REPEAT_MAX = 1750,
  parameter int unsigned WAKE_MIN        = 75
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_elecidle,
  output logic        lfps_present,
  output logic        polling_det,
  output logic        wake_det,
  output logic [31:0] last_burst_len
);

  logic        in_burst;
  logic [31:0] burst_cnt;     // length of the running burst
  logic [31:0] since_start;   // words since the previous valid Polling burst started
  logic [31:0] start_gap;     // since_start latched at the current burst's start
  logic        prev_valid;    // a valid-length Polling burst has been seen

  logic burst_ok;
  assign burst_ok = (burst_cnt >= POLL_BURST_MIN) && (burst_cnt <= POLL_BURST_MAX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_burst       <= 1'b0;
      burst_cnt      <= '0;
      since_start    <= '0;
      start_gap      <= '0;
      prev_valid     <= 1'b0;
      polling_det    <= 1'b0;
      wake_det       <= 1'b0;
      last_burst_len <= '0;
    end else begin
      polling_det <= 1'b0;
      wake_det    <= 1'b0;
      if (since_start != '1) since_start <= since_start + 1;
      if (!rx_elecidle) begin
        if (!in_burst) begin
          in_burst  <= 1'b1;
          burst_cnt <= 32'd1;
          start_gap <= since_start;
        end else if (burst_cnt != '1) begin
          burst_cnt <= burst_cnt + 1;
        end
        if (in_burst && burst_cnt == WAKE_MIN - 1) wake_det <= 1'b1;
      end else if (in_burst) begin
        in_burst       <= 1'b0;
        last_burst_len <= burst_cnt;
        if (burst_ok) begin
          if (prev_valid && start_gap >= POLL_REPEAT_MIN && start_gap <= POLL_REPEAT_MAX)
            polling_det <= 1'b1;
          prev_valid  <= 1'b1;
          // restart the repeat timer from this burst's first word
          since_start <= burst_cnt + 1;
        end else begin
          prev_valid <= 1'b0;
        end
      end
    end
  end

  assign lfps_present = !rx_elecidle;

endmodule
