// tb_usb3_ltssm: link training and status state machine, with TSEQ_COUNT
// reduced to 4 ordered sets. The testbench stands in for the LFPS blocks and
// the link partner's training sequences. Checks every state change of the
// training path (Inactive, Rx.Detect, Polling LFPS / RxEQ / Active /
// Configuration / Idle, U0), the TSEQ, TS1 and TS2 words sent, the TXDETECTRX,
// power-down, electrical-idle and scrambler-enable outputs (including the
// PIPE-style combinations that request Polling and wake-up LFPS), that Polling
// LFPS is left only after the partner's Polling LFPS and the end of an own
// burst, the TS counts (8 received, 16 TS2 sent), and U1/U2/U3 entry and
// exit by LFPS from either side.
`timescale 1ns/1ps
module tb_usb3_ltssm;
  import usb3_pkg::*;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, enable = 0, phystatus = 0;
  logic txdetectrx, tx_scr_en, rx_scr_en, tx_elecidle, use_lfps,
        link_active;
  logic [1:0] txpd, rxpd;
  logic lfps_burst_done = 0, lfps_active = 0, rx_polling_det = 0, rx_wake_det = 0;
  logic [31:0] rx_data = 0, os_data;
  logic [3:0] rx_k = 0, os_k;
  logic go_u1 = 0, go_u2 = 0, go_u3 = 0, wake_req = 0;
  ltssm_state_e state;

  usb3_ltssm #(.TSEQ_COUNT(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s (state %s)", $time, what, state.name()); end
  endtask

  initial begin
    #(8 * 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(ref logic s);
    s = 1;
    @(negedge clk);
    s = 0;
  endtask

  // partner's ordered sets on the receive side, in the background
  logic [7:0] rx_id = 8'h00;   // 0: logical idle
  initial begin
    forever begin
      if (rx_id == 8'h00) begin
        rx_data = 0; rx_k = 0;
        @(negedge clk);
      end else begin
        logic [7:0] id;
        id = rx_id;
        rx_data = {4{8'hBC}}; rx_k = 4'hF; @(negedge clk);
        rx_data = {id, id, 16'h0}; rx_k = 0; @(negedge clk);
        rx_data = {4{id}}; @(negedge clk);
        rx_data = {4{id}}; @(negedge clk);
      end
    end
  end

  // count transmitted ordered sets
  int tx_tseq = 0, tx_ts1 = 0, tx_ts2 = 0, bad_words = 0, wpos = 0;
  logic [7:0] cur_id;
  always @(negedge clk) begin
    if (state == LT_POLL_RXEQ) begin
      unique case (wpos % 8)
        0: begin
          if (!(os_data == 32'hC017FFBC && os_k == 4'b0001)) bad_words++;
          tx_tseq++;
        end
        1: if (os_data != 32'h02E7B214 || os_k != 0) bad_words++;
        2: if (os_data != 32'h286E7282 || os_k != 0) bad_words++;
        3: if (os_data != 32'hBF6DBEA6 || os_k != 0) bad_words++;
        default: if (os_data != 32'h4A4A4A4A || os_k != 0) bad_words++;
      endcase
      wpos++;
    end else if (state == LT_POLL_ACT || state == LT_POLL_CFG) begin
      if (os_k == 4'hF && os_data == 32'hBCBCBCBC) wpos = 0;
      else if (wpos == 0) bad_words++;
      if (wpos == 1) begin
        cur_id = os_data[31:24];
        if (!(os_data[15:0] == 0 && os_data[31:24] == os_data[23:16] && os_k == 0)) bad_words++;
      end
      if (wpos >= 2 && (os_data != {4{cur_id}} || os_k != 0)) bad_words++;
      if (wpos == 3) begin
        if (cur_id == 8'h4A) tx_ts1++;
        if (cur_id == 8'h45) tx_ts2++;
      end
      wpos++;
    end else wpos = 0;
  end

  task automatic wait_state(input ltssm_state_e s, input int max);
    for (int i = 0; i < max && state != s; i++) @(negedge clk);
    check(state == s, $sformatf("reached %s", s.name()));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == LT_INACTIVE && tx_elecidle && !txdetectrx, "Inactive, electrical idle");
    enable = 1;
    @(negedge clk);
    check(state == LT_RX_DETECT && txdetectrx && txpd == 2'b10 && rxpd == 2'b10 && tx_elecidle,
          "Rx.Detect drives TXDETECTRX in P2");
    repeat (5) @(negedge clk);
    pulse(phystatus);
    check(state == LT_POLL_LFPS && txdetectrx && tx_elecidle && use_lfps && txpd == 0 && rxpd == 0,
          "Polling.LFPS after PhyStatus: LFPS requested by txpd/rxpd 00, TXDETECTRX, TXELECIDLE");
    // own burst ends before the partner's Polling LFPS was recognised: stay
    lfps_active = 1;
    repeat (5) @(negedge clk);
    lfps_active = 0;
    pulse(lfps_burst_done);
    repeat (3) @(negedge clk);
    check(state == LT_POLL_LFPS, "stays in Polling.LFPS without partner LFPS");
    pulse(rx_polling_det);
    repeat (3) @(negedge clk);
    check(state == LT_POLL_LFPS, "waits for the end of the own burst");
    pulse(lfps_burst_done);
    check(state == LT_POLL_RXEQ && !tx_elecidle && !use_lfps && !tx_scr_en, "Polling.RxEQ");
    rx_id = 8'h4A;     // partner sends TS1 from now on
    wait_state(LT_POLL_ACT, 100);
    check(tx_tseq == 4, $sformatf("4 TSEQ ordered sets (%0d)", tx_tseq));
    wait_state(LT_POLL_CFG, 200);
    check(tx_ts1 >= 8, "TS1 sent while 8 TS1 are received");
    rx_id = 8'h45;
    wait_state(LT_POLL_IDLE, 400);
    check(tx_ts2 == 16, $sformatf("16 TS2 sent (%0d)", tx_ts2));
    check(tx_scr_en && rx_scr_en && os_data == 0 && os_k == 0, "scrambled logical idle");
    rx_id = 8'h00;
    wait_state(LT_U0, 20);
    check(link_active && !tx_elecidle, "U0: link owns the transmitter");
    check(bad_words == 0, $sformatf("ordered-set contents (%0d bad words)", bad_words));
    // U1, exit by the partner
    pulse(go_u1);
    check(state == LT_U1 && txpd == 2'b01 && rxpd == 2'b01 && tx_elecidle && !link_active, "U1");
    repeat (10) @(negedge clk);
    rx_wake_det = 1;
    @(negedge clk);
    rx_wake_det = 0;
    check(state == LT_U_EXIT && use_lfps && txpd == 2'b01 && rxpd == 2'b01 && !tx_elecidle,
          "answering the partner's wake-up: LFPS requested by txpd/rxpd 01, TXELECIDLE low");
    repeat (20) @(negedge clk);
    pulse(lfps_burst_done);
    check(state == LT_U0, "U0 after the wake-up burst");
    // U2, exit by the device
    pulse(go_u2);
    check(state == LT_U2, "U2");
    fork
      begin
        wake_req = 1;
        @(negedge clk);
        wake_req = 0;
      end
      begin
        @(posedge clk);
        #1 check(txpd == 2'b01 && rxpd == 2'b01 && !tx_elecidle && !txdetectrx, "wake-up burst requested");
      end
    join
    check(state == LT_U_EXIT, "U2 exit started");
    pulse(lfps_burst_done);
    repeat (3) @(negedge clk);
    check(state == LT_U_EXIT, "waits for the partner's LFPS");
    pulse(rx_wake_det);
    pulse(lfps_burst_done);
    check(state == LT_U0, "U0 after handshake");
    pulse(go_u3);
    check(state == LT_U3, "U3");
    enable = 0;
    @(negedge clk);
    check(state == LT_INACTIVE, "disable returns to Inactive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
