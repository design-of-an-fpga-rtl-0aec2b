// usb3_device_top: USB 3.0 SuperSpeed device controller built from FPGA logic,
// with an FPGA multi-gigabit transceiver (outside this module) as the PHY.
//
// Structure (device serial interface engine):
//   transceiver <-> PIPE (scrambling) <-> LTSSM and link <-> protocol <->
//   endpoints, plus the LFPS generator and detector that stand in for the
//   LFPS circuits of a dedicated USB PHY, and two dual-clock FIFOs to the
//   user's clock domain (EP1 bulk-in, EP2 bulk-out).
//
// Transmit path to the transceiver, one 40-bit word per 125 MHz clock:
//   * while the LTSSM sends LFPS (Polling, U-state exit) the LFPS generator
//     drives gt_txdata raw with gt_tx8b10bbypass = 8'h0F;
//   * otherwise gt_txdata[31:0] is the scrambled data word and
//     gt_txdata[35:32] its K flags for the transceiver's 8b/10b encoder,
//     gt_tx8b10bbypass = 8'h00. The word comes from the LTSSM's training
//     sequences before U0 and from the link layer in U0.
//     In U1, U2, U3 and U-exit it is COM words (own choice, in place of
//     Recovery's ordered sets, so the scramblers restart in step).
// Link and endpoint state (sequence numbers, credits, address, configuration)
// is kept through U1, U2 and U3 and cleared only by retraining (link_up low).
// The LTSSM asks for LFPS with PIPE-style requests (txpd, rxpd, TXDETECTRX,
// TXELECIDLE in the combinations the paper gives); the LFPS generator
// decodes them and passes TXDETECTRX on only when it asks for receiver
// detection. gt_txelecidle, gt_txdetectrx, gt_txpd and gt_rxpd go to the
// transceiver; gt_rxelecidle and gt_phystatus come back from it together
// with the comma-aligned, 8b/10b-decoded receive word gt_rxdata/gt_rxcharisk.
// All controller logic runs on `clk`, the transceiver's word clock (TXOUTCLK
// through a PLL in the reference hardware); user_clk is independent.
module usb3_device_top
  import usb3_pkg::*;
#(
  parameter int unsigned FIFO_ADDR_W   = 11,
  parameter int unsigned MAX_PKT_BYTES = 1024,
  parameter int unsigned TSEQ_COUNT    = 65536,
  parameter int unsigned LFPS_REPEAT   = 1250
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  // transceiver
  output logic [39:0]  gt_txdata,
  output logic [7:0]   gt_tx8b10bbypass,
  output logic         gt_txelecidle,
  output logic         gt_txdetectrx,
  output logic [1:0]   gt_txpd,
  output logic [1:0]   gt_rxpd,
  input  logic [31:0]  gt_rxdata,
  input  logic [3:0]   gt_rxcharisk,
  input  logic         gt_rxelecidle,
  input  logic         gt_phystatus,
  // link power management
  input  logic         go_u1,
  input  logic         go_u2,
  input  logic         go_u3,
  input  logic         wake_req,
  // user side
  input  logic         user_clk,
  input  logic         user_rst_n,
  input  logic         in_wr_en,
  input  logic [31:0]  in_wr_data,
  output logic         in_full,
  input  logic         out_rd_en,
  output logic [31:0]  out_rd_data,
  output logic         out_empty,
  // status
  output ltssm_state_e ltssm_state,
  output logic [6:0]   dev_addr,
  output logic         configured,
  output usb3_status_t status
);

  // ---------------------------------------------------------------- LFPS
  logic [39:0] lfps_data;
  logic [7:0]  lfps_bypass;
  logic        lfps_elecidle, lfps_active, lfps_burst_done;
  logic        lt_txdetectrx, lt_elecidle;
  logic        rx_polling_det, rx_wake_det, rx_lfps_present;
  logic [31:0] rx_last_burst;

  usb3_lfps_tx #(.REPEAT_WORDS(LFPS_REPEAT)) u_lfps_tx (
    .clk, .rst_n,
    .req_txpd(gt_txpd), .req_rxpd(gt_rxpd),
    .req_txdetectrx(lt_txdetectrx), .req_txelecidle(lt_elecidle),
    .tx_data(lfps_data), .tx_elecidle(lfps_elecidle), .tx_8b10b_bypass(lfps_bypass),
    .tx_detectrx(gt_txdetectrx),
    .active(lfps_active), .burst_done(lfps_burst_done)
  );

  usb3_lfps_rx u_lfps_rx (
    .clk, .rst_n, .rx_elecidle(gt_rxelecidle),
    .lfps_present(rx_lfps_present), .polling_det(rx_polling_det),
    .wake_det(rx_wake_det), .last_burst_len(rx_last_burst)
  );

  // --------------------------------------------------------------- LTSSM
  logic [31:0] os_data;
  logic [3:0]  os_k;
  logic        tx_scr_en, rx_scr_en, use_lfps, link_active;
  logic [31:0] rx_data;
  logic [3:0]  rx_k;

  usb3_ltssm #(.TSEQ_COUNT(TSEQ_COUNT)) u_ltssm (
    .clk, .rst_n, .enable,
    .phystatus(gt_phystatus), .txdetectrx(lt_txdetectrx),
    .txpd(gt_txpd), .rxpd(gt_rxpd),
    .lfps_burst_done, .lfps_active,
    .rx_polling_det, .rx_wake_det,
    .rx_data, .rx_k,
    .os_data, .os_k, .tx_scr_en, .rx_scr_en,
    .tx_elecidle(lt_elecidle), .use_lfps, .link_active,
    .go_u1, .go_u2, .go_u3, .wake_req,
    .state(ltssm_state)
  );

  // ---------------------------------------------------------------- PIPE
  logic [31:0] link_tx_data, pipe_tx_data, gt_tx_word;
  logic [3:0]  link_tx_k, pipe_tx_k, gt_tx_k;

  // link_up: trained link, including the low-power states; the link and
  // endpoint state survive U1, U2 and U3 and is cleared on retraining
  logic link_up, lowpower;
  assign link_up  = ltssm_state inside {LT_U0, LT_U1, LT_U2, LT_U3, LT_U_EXIT};
  assign lowpower = ltssm_state inside {LT_U1, LT_U2, LT_U3, LT_U_EXIT};

  // In U1, U2, U3 and U-exit the scrambler is fed COM words, so it waits at
  // the seed and the first words after the return to U0 realign the partner
  // (stand-in for the Recovery ordered sets, which are not built).
  assign pipe_tx_data = link_active ? link_tx_data : (lowpower ? W_COM4 : os_data);
  assign pipe_tx_k    = link_active ? link_tx_k    : (lowpower ? 4'hF : os_k);

  usb3_pipe u_pipe (
    .clk, .rst_n,
    .tx_scr_en, .tx_data(pipe_tx_data), .tx_k(pipe_tx_k),
    .rx_scr_en, .rx_data, .rx_k,
    .gt_txdata(gt_tx_word), .gt_txcharisk(gt_tx_k),
    .gt_rxdata, .gt_rxcharisk
  );

  always_comb begin
    if (use_lfps) begin
      gt_txdata        = lfps_data;
      gt_tx8b10bbypass = lfps_bypass;
      gt_txelecidle    = lfps_elecidle;
    end else begin
      gt_txdata        = {4'h0, gt_tx_k, gt_tx_word};
      gt_tx8b10bbypass = 8'h00;
      gt_txelecidle    = lt_elecidle;
    end
  end

  // ---------------------------------------------------------------- link
  logic        ptx_hdr_valid, ptx_has_dpp, ptx_hdr_ack, ptx_pl_last, ptx_pl_rd;
  hdr_t        ptx_hdr, prx_hdr;
  logic [31:0] ptx_pl_data, prx_pl_data;
  logic        prx_hdr_valid, prx_pl_valid, prx_pl_end, prx_pl_good;

  usb3_link u_link (
    .clk, .rst_n, .active(link_active), .link_up,
    .tx_hdr_valid(ptx_hdr_valid), .tx_hdr(ptx_hdr), .tx_hdr_has_dpp(ptx_has_dpp),
    .tx_hdr_ack(ptx_hdr_ack), .tx_pl_data(ptx_pl_data), .tx_pl_last(ptx_pl_last),
    .tx_pl_rd(ptx_pl_rd),
    .rx_hdr_valid(prx_hdr_valid), .rx_hdr(prx_hdr), .rx_pl_valid(prx_pl_valid),
    .rx_pl_data(prx_pl_data), .rx_pl_end(prx_pl_end), .rx_pl_good(prx_pl_good),
    .tx_data(link_tx_data), .tx_k(link_tx_k), .rx_data, .rx_k,
    .tx_credits(), .tx_stall_cnt(status.credit_stall), .rx_lgood_cnt(status.lgood_rx),
    .rx_hdr_err_cnt(status.hdr_err), .tx_lc_cnt(status.lc_tx)
  );

  // --------------------------------------------------------------- FIFOs
  logic [31:0]        in_rd_data;
  logic               in_rd_en;
  logic [FIFO_ADDR_W:0] in_rd_count, out_wr_count;
  logic [31:0]        out_wr_data;
  logic               out_wr_en, out_full, out_commit, out_discard;

  usb3_async_fifo #(.DATA_W(32), .ADDR_W(FIFO_ADDR_W)) u_in_fifo (
    .wr_clk(user_clk), .wr_rst_n(user_rst_n), .wr_en(in_wr_en), .wr_data(in_wr_data),
    .wr_commit(1'b1), .wr_discard(1'b0),
    .wr_full(in_full), .wr_count(),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(in_rd_en), .rd_data(in_rd_data),
    .rd_empty(), .rd_count(in_rd_count)
  );

  usb3_async_fifo #(.DATA_W(32), .ADDR_W(FIFO_ADDR_W)) u_out_fifo (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_en(out_wr_en), .wr_data(out_wr_data),
    .wr_commit(out_commit), .wr_discard(out_discard),
    .wr_full(out_full), .wr_count(out_wr_count),
    .rd_clk(user_clk), .rd_rst_n(user_rst_n), .rd_en(out_rd_en), .rd_data(out_rd_data),
    .rd_empty(out_empty), .rd_count()
  );

  logic [15:0] out_free;
  assign out_free = 16'((1 << FIFO_ADDR_W) - 32'(out_wr_count));

  // ------------------------------------------------- protocol / endpoints
  logic        setup_valid, status_done, in_nrdy_sent, out_accepted, out_nrdy_sent;
  logic [63:0] setup_pkt;
  logic [5:0]  desc_idx;
  logic [15:0] desc_len;
  logic [31:0] desc_word;
  logic [4:0]  ep2_seq;
  logic        erdy_valid, erdy_dir_in, erdy_sent;
  logic [3:0]  erdy_ep;

  usb3_protocol #(.MAX_PKT_BYTES(MAX_PKT_BYTES)) u_protocol (
    .clk, .rst_n, .active(link_active),
    .rx_hdr_valid(prx_hdr_valid), .rx_hdr(prx_hdr), .rx_pl_valid(prx_pl_valid),
    .rx_pl_data(prx_pl_data), .rx_pl_end(prx_pl_end), .rx_pl_good(prx_pl_good),
    .tx_hdr_valid(ptx_hdr_valid), .tx_hdr(ptx_hdr), .tx_hdr_has_dpp(ptx_has_dpp),
    .tx_hdr_ack(ptx_hdr_ack), .tx_pl_data(ptx_pl_data), .tx_pl_last(ptx_pl_last),
    .tx_pl_rd(ptx_pl_rd),
    .in_fifo_data(in_rd_data), .in_fifo_count(16'(in_rd_count)), .in_fifo_rd(in_rd_en),
    .out_fifo_data(out_wr_data), .out_fifo_wr(out_wr_en),
    .out_fifo_commit(out_commit), .out_fifo_discard(out_discard), .out_fifo_free(out_free),
    .setup_valid, .setup_pkt, .status_done, .desc_idx, .desc_len, .desc_word,
    .dev_addr, .in_nrdy_sent, .out_accepted, .out_nrdy_sent, .ep2_seq,
    .erdy_valid, .erdy_ep, .erdy_dir_in, .erdy_sent,
    .in_pkt_cnt(status.in_pkts), .out_pkt_cnt(status.out_pkts), .nrdy_cnt(status.nrdy),
    .erdy_cnt(status.erdy), .retry_cnt(status.retry), .setup_cnt(status.setups)
  );

  usb3_endpoints #(.MAX_PKT_BYTES(MAX_PKT_BYTES)) u_endpoints (
    .clk, .rst_n, .active(link_up),
    .setup_valid, .setup_pkt, .status_done, .desc_idx, .desc_len, .desc_word,
    .dev_addr, .configured,
    .in_nrdy_sent, .in_fifo_count(16'(in_rd_count)),
    .out_accepted, .out_nrdy_sent, .out_fifo_free(out_free), .ep2_seq,
    .erdy_valid, .erdy_ep, .erdy_dir_in, .erdy_sent
  );

endmodule
