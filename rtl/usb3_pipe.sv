// usb3_pipe: PIPE interface module of the serial interface engine.
//
// Sits between the link-level logic and the transceiver's 32-bit parallel
// data ports and scrambles transmitted data symbols and descrambles received
// ones, which is the whole of its job as the paper states it. Each direction
// is one usb3_scrambler with one cycle of latency. K symbols pass unchanged;
// COM symbols in training ordered sets reseed both LFSRs, so the two ends of
// the link start U0 with aligned scramblers. Scrambling is switched off
// (tx_scr_en / rx_scr_en low) while training sequences are exchanged, which
// are sent in clear. Received words are assumed to be symbol-aligned by the
// transceiver's comma detection (a COM lands in byte 0).
module usb3_pipe
  import usb3_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // link side
  input  logic        tx_scr_en,
  input  logic [31:0] tx_data,
  input  logic [3:0]  tx_k,
  input  logic        rx_scr_en,
  output logic [31:0] rx_data,
  output logic [3:0]  rx_k,
  // transceiver side
  output logic [31:0] gt_txdata,
  output logic [3:0]  gt_txcharisk,
  input  logic [31:0] gt_rxdata,
  input  logic [3:0]  gt_rxcharisk
);

  usb3_scrambler u_tx_scr (
    .clk, .rst_n, .scr_en(tx_scr_en),
    .in_data(tx_data), .in_k(tx_k),
    .out_data(gt_txdata), .out_k(gt_txcharisk)
  );

  usb3_scrambler u_rx_descr (
    .clk, .rst_n, .scr_en(rx_scr_en),
    .in_data(gt_rxdata), .in_k(gt_rxcharisk),
    .out_data(rx_data), .out_k(rx_k)
  );

endmodule
