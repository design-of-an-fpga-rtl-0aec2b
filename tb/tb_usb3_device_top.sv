// tb_usb3_device_top: end-to-end test of the USB 3.0 device controller at its
// default parameters (65536 TSEQ ordered sets, 8 KB FIFOs, 1024-byte
// packets).
//
// The testbench plays the transceiver and the USB 3.0 host. It answers
// receiver detection, exchanges Polling LFPS on the electrical-idle signals,
// runs TS1/TS2 training, and then in U0 frames packets with its own
// scrambler and CRC models (tb_usb3_ref_pkg). It checks:
//   * the LFPS waveform: 2 high words, 2 low words (32 ns), 128-word bursts
//     repeating every 1250 words;
//   * the number of TSEQ ordered sets and the Polling -> U0 sequence;
//   * enumeration: GET_DESCRIPTOR (device, truncated configuration),
//     SET_ADDRESS, SET_CONFIGURATION;
//   * bulk-in: NRDY with an empty FIFO, ERDY once data arrives, packets split
//     at 1024 bytes, data order, and a sustained rate above 320 MB/s;
//   * bulk-out: ACK sequence numbers, a sustained rate above 320 MB/s,
//     retry on a bad CRC (and the bad
//     payload kept out of the FIFO), NRDY on a full FIFO and ERDY after it
//     drains;
//   * a link-credit stall when the host withholds LCRD;
//   * U1, U2 and U3 entry and LFPS wake-up from either side, after which
//     the address, configuration and header sequence numbers still hold and
//     a bulk-out packet goes through.
// Each of these mechanisms is counted and a failure is counted for any that
// never happened.
`timescale 1ns/1ps
module tb_usb3_device_top;
  import usb3_pkg::*;
  import tb_usb3_ref_pkg::*;

  localparam int WATCHDOG = 2_500_000;

  logic clk = 1'b0, user_clk = 1'b0;
  always #4 clk = ~clk;          // 125 MHz word clock
  always #5 user_clk = ~user_clk; // 100 MHz user clock

  logic         rst_n, enable, user_rst_n;
  logic [39:0]  gt_txdata;
  logic [7:0]   gt_tx8b10bbypass;
  logic         gt_txelecidle, gt_txdetectrx;
  logic [1:0]   gt_txpd, gt_rxpd;
  logic [31:0]  gt_rxdata;
  logic [3:0]   gt_rxcharisk;
  logic         gt_rxelecidle, gt_phystatus;
  logic         go_u1, go_u2, go_u3, wake_req;
  logic         in_wr_en, in_full, out_rd_en, out_empty;
  logic [31:0]  in_wr_data, out_rd_data;
  ltssm_state_e ltssm_state;
  logic [6:0]   dev_addr;
  logic         configured;
  usb3_status_t status;

  usb3_device_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // mechanism counters
  int m_polling = 0, m_nrdy_in = 0, m_erdy_in = 0, m_split = 0, m_nrdy_out = 0,
      m_erdy_out = 0, m_retry = 0, m_stall = 0, m_u1 = 0, m_u2 = 0, m_u3 = 0,
      m_wake_host = 0, m_wake_dev = 0, m_trunc = 0, m_addr = 0;

  initial begin
    #(WATCHDOG * 8);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host TX
  localparam logic [31:0] HPSTART = 32'hF7FBFBFB, LCSTART = 32'hF7DCDCDC,
                          DPPSTART = 32'hF75C5C5C, DPPEND = 32'hF7FDFDFD,
                          COM4 = 32'hBCBCBCBC;
  logic [36:0] txq[$];            // {scramble, k[3:0], data}
  logic [15:0] htx_lfsr = 16'hFFFF;
  bit          host_gt_on = 0;
  bit          host_lfps_on = 0;
  logic [2:0]  host_hseq = 0;

  always @(negedge clk) begin
    logic [36:0] w;
    logic [47:0] r;
    if (host_gt_on) begin
      // in the low-power states the host sends COM words, which hold both
      // scramblers at the seed until U0 resumes
      if (ltssm_state inside {LT_U1, LT_U2, LT_U3, LT_U_EXIT}) w = {1'b0, 4'hF, COM4};
      else w = (txq.size() > 0) ? txq.pop_front() : {1'b1, 4'h0, 32'h0};
      r = ref_scr(htx_lfsr, w[31:0], w[35:32], w[36]);
      htx_lfsr     = r[47:32];
      gt_rxdata    <= r[31:0];
      gt_rxcharisk <= w[35:32];
    end else begin
      gt_rxdata    <= 32'h0;
      gt_rxcharisk <= 4'h0;
    end
  end

  // host Polling LFPS: 128-word bursts every 1250 words
  initial begin
    gt_rxelecidle = 1'b1;
    forever begin
      @(negedge clk);
      if (host_lfps_on) begin
        gt_rxelecidle = 1'b0;
        repeat (128) @(negedge clk);
        gt_rxelecidle = 1'b1;
        repeat (1250 - 128 - 1) @(negedge clk);
      end
    end
  end

  function automatic logic [95:0] tp(input logic [6:0] a, input logic [3:0] sub, input logic dir,
                                     input logic [3:0] ep, input logic [4:0] nump,
                                     input logic [4:0] seq);
    logic [31:0] d0, d1;
    d0 = {a, 20'd0, 5'h04};
    d1 = {6'd0, seq, nump, 4'd0, ep, dir, 1'b0, 2'b00, sub};
    return {32'd0, d1, d0};
  endfunction

  function automatic logic [95:0] dph(input logic [6:0] a, input logic [4:0] seq, input logic dir,
                                      input logic [3:0] ep, input logic setup,
                                      input logic [15:0] len);
    logic [31:0] d0, d1;
    d0 = {a, 20'd0, 5'h08};
    d1 = {len, setup, 3'd0, ep, dir, 2'b00, seq};
    return {32'd0, d1, d0};
  endfunction

  task automatic push_hdr(input logic [95:0] h);
    txq.push_back({1'b1, 4'hF, HPSTART});
    txq.push_back({1'b1, 4'h0, h[31:0]});
    txq.push_back({1'b1, 4'h0, h[63:32]});
    txq.push_back({1'b1, 4'h0, h[95:64]});
    txq.push_back({1'b1, 4'h0, ref_lcw({8'd0, host_hseq}), ref_crc16(h)});
    host_hseq++;
  endtask

  task automatic push_dp(input logic [95:0] h, input logic [31:0] words[$], input bit bad);
    logic [31:0] c;
    push_hdr(h);
    txq.push_back({1'b1, 4'hF, DPPSTART});
    foreach (words[i]) txq.push_back({1'b1, 4'h0, words[i]});
    c = ref_crc32(words);
    if (bad) c = c ^ 32'h1;
    txq.push_back({1'b1, 4'h0, c});
    txq.push_back({1'b1, 4'hF, DPPEND});
  endtask

  task automatic push_lc(input logic [10:0] info);
    logic [15:0] w;
    w = ref_lcw(info);
    txq.push_back({1'b1, 4'hF, LCSTART});
    txq.push_back({1'b1, 4'h0, w, w});
  endtask

  // ------------------------------------------------------------ host RX
  logic [15:0] hrx_lfsr = 16'hFFFF;
  bit          hrx_scr_on = 0;
  int          os_pos = 0;
  logic [7:0]  os_id;
  bit          os_ok;
  int          dev_tseq = 0, dev_ts1_run = 0, dev_ts2_run = 0, dev_ts2_total = 0;
  int          pstate = 0, pidx = 0;
  logic [31:0] pw[$];
  logic [95:0] dev_hdr_q[$];
  logic [31:0] dev_pl_q[$][$];
  logic [2:0]  dev_hseq_exp = 0, lgood_n = 0;
  logic [1:0]  lcrd_x = 0;
  bit          hold_lcrd = 0;
  int          lcrd_owed = 0, dev_lgood = 0, dev_lcrd = 0, idle_bad = 0;

  task automatic mon_word(input logic [31:0] d, input logic [3:0] k);
    if (!hrx_scr_on) begin
      // training ordered sets
      if (k == 4'hF && d == COM4) begin
        os_pos = 1;
        os_ok  = 1;
      end else if (k == 4'h1 && d == 32'hC017FFBC) begin
        dev_tseq++;
        os_pos = 0;
      end else if (os_pos == 1) begin
        os_id  = d[31:24];
        os_ok  = (k == 0) && d[23:0] == {os_id, 16'h0000};
        os_pos = 2;
      end else if (os_pos == 2) begin
        os_ok  = os_ok && k == 0 && d == {4{os_id}};
        os_pos = 3;
      end else if (os_pos == 3) begin
        os_ok  = os_ok && k == 0 && d == {4{os_id}};
        os_pos = 0;
        if (os_ok && os_id == 8'h4A) begin dev_ts1_run++; dev_ts2_run = 0; end
        else if (os_ok && os_id == 8'h45) begin dev_ts2_run++; dev_ts2_total++; dev_ts1_run = 0; end
        else begin dev_ts1_run = 0; dev_ts2_run = 0; end
      end else if (dev_ts2_total > 0) begin
        hrx_scr_on = 1;   // first logical-idle word after the TS2 ordered sets
      end
      return;
    end
    unique case (pstate)
      0: begin
        if (k == 4'hF && d == HPSTART) begin pstate = 1; pw.delete(); end
        else if (k == 4'hF && d == LCSTART) pstate = 2;
        else if (k == 4'hF && d == DPPSTART) begin pstate = 3; pw.delete(); end
        else if (!(k == 0 && d == 0) && !(k == 4'hF && d == COM4)) idle_bad++;
      end
      1: begin
        pw.push_back(d);
        if (pw.size() == 4) begin
          logic [95:0] h;
          h = {pw[2], pw[1], pw[0]};
          check(k == 0 && pw[3][15:0] == ref_crc16(h), "device header CRC-16");
          check(pw[3][31:16] == ref_lcw({8'd0, dev_hseq_exp}), "device header sequence / LCW");
          dev_hseq_exp++;
          dev_hdr_q.push_back(h);
          push_lc({2'b00, 2'b00, 3'b000, 1'b0, lgood_n});
          lgood_n++;
          if (hold_lcrd) lcrd_owed++;
          else begin
            push_lc({2'b00, 2'b01, 3'b000, 2'b00, lcrd_x});
            lcrd_x++;
          end
          pstate = 0;
        end
      end
      2: begin
        check(k == 0 && d[31:16] == d[15:0] && d[15:0] == ref_lcw(d[10:0]), "device link command");
        if (d[8:7] == 2'b00) dev_lgood++;
        if (d[8:7] == 2'b01) dev_lcrd++;
        pstate = 0;
      end
      default: begin
        if (k == 4'hF && d == DPPEND) begin
          logic [31:0] c;
          logic [31:0] body[$];
          c = pw[$];
          body = pw[0:$-1];
          check(c == ref_crc32(body), "device payload CRC-32");
          dev_pl_q.push_back(body);
          pstate = 0;
        end else pw.push_back(d);
      end
    endcase
  endtask

  always @(negedge clk) begin
    logic [47:0] r;
    if (host_gt_on && gt_tx8b10bbypass == 8'h00 && !gt_txelecidle) begin
      r = ref_scr(hrx_lfsr, gt_txdata[31:0], gt_txdata[35:32], hrx_scr_on);
      hrx_lfsr = r[47:32];
      mon_word(r[31:0], gt_txdata[35:32]);
    end
  end

  task automatic release_lcrd();
    hold_lcrd = 0;
    while (lcrd_owed > 0) begin
      push_lc({2'b00, 2'b01, 3'b000, 2'b00, lcrd_x});
      lcrd_x++;
      lcrd_owed--;
    end
  endtask

  task automatic get_hdr(output logic [95:0] h, input int max_cycles, output bit got);
    got = 0;
    h   = '0;
    for (int i = 0; i < max_cycles; i++) begin
      @(negedge clk);
      if (dev_hdr_q.size() > 0) begin
        h   = dev_hdr_q.pop_front();
        got = 1;
        return;
      end
    end
  endtask

  task automatic get_pl(output logic [31:0] w[$], input int max_cycles, output bit got);
    got = 0;
    w.delete();
    for (int i = 0; i < max_cycles; i++) begin
      if (dev_pl_q.size() > 0) begin
        w   = dev_pl_q.pop_front();
        got = 1;
        return;
      end
      @(negedge clk);
    end
  endtask

  // expect a transaction packet: returns the header
  task automatic expect_tp(input logic [3:0] sub, input logic [3:0] ep, input string what,
                           output logic [95:0] h);
    bit got;
    get_hdr(h, 2000, got);
    check(got, {what, ": header arrived"});
    check(h[4:0] == 5'h04 && h[35:32] == sub && h[43:40] == ep, {what, ": TP type/subtype/endpoint"});
  endtask

  // ------------------------------------------------------------ user side
  int          user_wr_left = 0;
  logic [31:0] user_wr_next = 32'h1000_0000;
  bit          user_drain = 0;
  logic [31:0] out_expect[$];
  int          out_bad = 0, out_got = 0;

  always @(negedge user_clk) begin
    in_wr_en  <= 1'b0;
    out_rd_en <= 1'b0;
    if (user_rst_n) begin
      if (user_wr_left > 0 && !in_full) begin
        in_wr_en     <= 1'b1;
        in_wr_data   <= user_wr_next;
        user_wr_next = user_wr_next + 32'h0101_0001;
        user_wr_left--;
      end
      if (user_drain && !out_empty) begin
        out_rd_en <= 1'b1;
        if (out_expect.size() == 0 || out_rd_data != out_expect[0]) begin
          if (out_bad < 3) $display("out word %08h expected %08h", out_rd_data, out_expect.size() != 0 ? out_expect[0] : 0);
          out_bad++;
        end
        if (out_expect.size() > 0) void'(out_expect.pop_front());
        out_got++;
      end
    end
  end

  // ------------------------------------------------------------ sequences
  logic [6:0] haddr = 0;
  logic [31:0] in_expect = 32'h1000_0000;

  task automatic setup_stage(input logic [7:0] bm, input logic [7:0] br, input logic [15:0] wv,
                             input logic [15:0] wl);
    logic [31:0] w[$];
    logic [95:0] h;
    w = '{{wv, br, bm}, {wl, 16'h0000}};
    push_dp(dph(haddr, 5'd0, 1'b0, 4'd0, 1'b1, 16'd8), w, 0);
    expect_tp(4'h1, 4'd0, "SETUP ack", h);
    check(h[57:53] == 5'd1 && h[38] == 1'b0, "SETUP ack sequence 1, no retry");
  endtask

  task automatic status_stage();
    logic [95:0] h;
    push_hdr(tp(haddr, 4'h4, 1'b0, 4'd0, 5'd0, 5'd0));
    expect_tp(4'h1, 4'd0, "STATUS ack", h);
  endtask

  task automatic in_data_stage(input logic [7:0] exp_bytes[$], output int len);
    logic [95:0] h;
    logic [31:0] w[$];
    bit got;
    push_hdr(tp(haddr, 4'h1, 1'b1, 4'd0, 5'd1, 5'd0));
    get_hdr(h, 2000, got);
    check(got && h[4:0] == 5'h08 && h[43:40] == 4'd0 && h[39], "EP0 data packet header");
    len = int'(h[63:48]);
    check(len == exp_bytes.size(), $sformatf("EP0 data length %0d (expected %0d)", len, exp_bytes.size()));
    get_pl(w, 2000, got);
    check(got && w.size() == (exp_bytes.size() + 3) / 4, "EP0 payload word count");
    foreach (exp_bytes[i])
      if (got && i / 4 < w.size())
        check(w[i/4][8*(i%4) +: 8] == exp_bytes[i], $sformatf("descriptor byte %0d", i));
  endtask

  // bulk-in request; returns number of payload words
  task automatic bulk_in(input logic [4:0] seq, output int nwords, output logic [95:0] h);
    logic [31:0] w[$];
    bit got;
    push_hdr(tp(haddr, 4'h1, 1'b1, 4'd1, 5'd1, seq));
    get_hdr(h, 2000, got);
    check(got, "bulk-in answer");
    nwords = 0;
    if (got && h[4:0] == 5'h08) begin
      check(h[4:0] == 5'h08 && h[4+32:32] == seq && h[39] && h[43:40] == 4'd1, "bulk-in DPH fields");
      get_pl(w, 4000, got);
      check(got && w.size() * 4 == int'(h[63:48]), "bulk-in payload length matches header");
      foreach (w[i]) begin
        if (w[i] != in_expect) begin
          check(0, $sformatf("bulk-in data word %08h expected %08h", w[i], in_expect));
        end
        in_expect = in_expect + 32'h0101_0001;
      end
      nwords = w.size();
    end
  endtask

  int          out_seq = 0;
  logic [31:0] out_pat = 32'hA000_0000;
  // bulk-out packet of n words; returns the device's answer
  task automatic bulk_out(input int n, input bit bad, input bit expect_keep, output logic [95:0] h,
                          output bit got);
    logic [31:0] w[$];
    logic [31:0] p;
    p = out_pat;
    for (int i = 0; i < n; i++) begin w.push_back(p); p = p * 32'd1664525 + 32'd1013904223; end
    if (expect_keep) begin
      foreach (w[i]) out_expect.push_back(w[i]);
      out_pat = p;
    end
    push_dp(dph(haddr, 5'(out_seq), 1'b0, 4'd2, 1'b0, 16'(4 * n)), w, bad);
    get_hdr(h, 3000, got);
  endtask

  initial begin : main
    logic [95:0] h;
    bit got;
    int n, len, t0, total, stalled;
    logic [7:0] devdesc[$];
    logic [7:0] cfg9[$];

    rst_n = 0; user_rst_n = 0; enable = 0; gt_phystatus = 0;
    go_u1 = 0; go_u2 = 0; go_u3 = 0; wake_req = 0;
    in_wr_en = 0; in_wr_data = 0; out_rd_en = 0;
    repeat (10) @(negedge clk);
    rst_n = 1; user_rst_n = 1;
    repeat (5) @(negedge clk);
    check(ltssm_state == LT_INACTIVE && gt_txelecidle, "Inactive after reset, electrical idle");
    enable = 1;

    // ---------------- Rx.Detect
    n = 0;
    while (!gt_txdetectrx && n < 100) begin @(negedge clk); n++; end
    check(gt_txdetectrx && ltssm_state == LT_RX_DETECT && gt_txpd == 2'b10, "Rx.Detect asserts TXDETECTRX in P2");
    repeat (20) @(negedge clk);
    gt_phystatus = 1;
    @(negedge clk);
    gt_phystatus = 0;
    @(negedge clk);
    check(ltssm_state == LT_POLL_LFPS && gt_txpd == 2'b00 && gt_rxpd == 2'b00, "Polling after PhyStatus");

    // ---------------- Polling LFPS waveform of the device
    host_lfps_on = 1;
    n = 0;
    while (!(gt_tx8b10bbypass == 8'h0F && !gt_txelecidle) && n < 100) begin @(negedge clk); n++; end
    begin
      int hi_ok = 1, burst = 0, gap = 0;
      while (!gt_txelecidle) begin
        logic [39:0] expw;
        expw = ((burst % 4) < 2) ? 40'hFF_FFFF_FFFF : 40'h0;
        if (gt_txdata != expw || gt_tx8b10bbypass != 8'h0F) hi_ok = 0;
        if (gt_txdetectrx || gt_txpd != 2'b00 || gt_rxpd != 2'b00) hi_ok = 0;
        burst++;
        @(negedge clk);
      end
      check(hi_ok == 1, "LFPS square wave: 2 words high, 2 words low (tPeriod 32 ns), P0, no TXDETECTRX");
      check(burst == 128, $sformatf("LFPS tBurst = 128 words (1.024 us), got %0d", burst));
      while (gt_txelecidle && gap < 5000) begin gap++; @(negedge clk); end
      check(burst + gap == 1250, $sformatf("LFPS tRepeat = 1250 words (10 us), got %0d", burst + gap));
    end

    // ---------------- Polling.RxEQ / Active / Configuration / Idle
    n = 0;
    while (!(gt_tx8b10bbypass == 8'h00 && !gt_txelecidle) && n < 20000) begin @(negedge clk); n++; end
    check(ltssm_state == LT_POLL_RXEQ, "Polling LFPS handshake done, TSEQ started");
    m_polling++;
    host_lfps_on = 0;
    gt_rxelecidle = 0;
    host_gt_on = 1;
    begin
      int hs = 1, ts2_sent = 0, guard = 0;
      while (hs != 0 && guard < 1_000_000) begin
        @(negedge clk);
        guard++;
        if (hs == 1 && dev_ts1_run >= 8) hs = 2;
        if (hs == 2 && dev_ts2_run >= 8 && ts2_sent >= 16) hs = 0;
        if (hs != 0 && txq.size() < 8) begin
          logic [7:0] id;
          id = (hs == 1) ? 8'h4A : 8'h45;
          txq.push_back({1'b0, 4'hF, COM4});
          txq.push_back({1'b0, 4'h0, id, id, 16'h0000});
          txq.push_back({1'b0, 4'h0, {4{id}}});
          txq.push_back({1'b0, 4'h0, {4{id}}});
          if (hs == 2) ts2_sent++;
        end
      end
    end
    check(dev_tseq == 65536, $sformatf("TSEQ ordered sets sent: %0d", dev_tseq));
    n = 0;
    while (ltssm_state != LT_U0 && n < 1000) begin @(negedge clk); n++; end
    check(ltssm_state == LT_U0, "U0 reached");
    repeat (20) @(negedge clk);
    check(hrx_scr_on && idle_bad == 0, "scrambled logical idle received from device");

    // ---------------- enumeration
    devdesc = '{8'h12, 8'h01, 8'h00, 8'h03, 8'h00, 8'h00, 8'h00, 8'h09, 8'h00, 8'h00,
                8'h00, 8'h00, 8'h00, 8'h01, 8'h00, 8'h00, 8'h00, 8'h01};
    setup_stage(8'h80, 8'h06, 16'h0100, 16'd64);
    in_data_stage(devdesc, len);
    status_stage();
    setup_stage(8'h00, 8'h05, 16'd5, 16'd0);           // SET_ADDRESS 5
    check(dev_addr == 7'd0, "address not applied before status stage");
    status_stage();
    repeat (2) @(negedge clk);
    check(dev_addr == 7'd5, "SET_ADDRESS applied after status stage");
    if (dev_addr == 7'd5) m_addr++;
    haddr = 7'd5;
    cfg9 = '{8'h09, 8'h02, 8'h2C, 8'h00, 8'h01, 8'h01, 8'h00, 8'h80, 8'h32};
    setup_stage(8'h80, 8'h06, 16'h0200, 16'd9);        // configuration, wLength 9
    in_data_stage(cfg9, len);
    if (len == 9) m_trunc++;
    status_stage();
    setup_stage(8'h00, 8'h09, 16'd1, 16'd0);           // SET_CONFIGURATION 1
    status_stage();
    repeat (2) @(negedge clk);
    check(configured, "configured");

    // ---------------- bulk-in: NRDY, ERDY
    bulk_in(5'd0, n, h);
    check(h[4:0] == 5'h04 && h[35:32] == 4'h2 && h[43:40] == 4'd1, "NRDY on empty bulk-in FIFO");
    check(h[31:25] == 7'd5, "device packets carry the new address");
    if (h[35:32] == 4'h2) m_nrdy_in++;
    user_wr_left = 600;
    expect_tp(4'h3, 4'd1, "ERDY for bulk-in", h);
    check(h[39] == 1'b1, "ERDY direction IN");
    if (h[35:32] == 4'h3) m_erdy_in++;
    while (user_wr_left > 0) @(negedge clk);
    repeat (20) @(negedge clk);
    total = 0;
    for (int s = 0; s < 3; s++) begin
      bulk_in(5'(s), n, h);
      total += n;
      if (s < 2) begin
        check(n == 256, $sformatf("bulk-in packet %0d is 1024 bytes", s));
        if (n == 256) m_split++;
      end
    end
    check(total == 600, $sformatf("bulk-in moved 600 words (%0d)", total));

    // ---------------- bulk-in rate
    user_wr_left = 8192;
    while (user_wr_left > 8192 - 2048) @(negedge clk);
    repeat (20) @(negedge clk);
    t0 = 0;
    total = 0;
    begin
      int c0, seq;
      c0  = int'($time / 8);
      seq = 3;
      while (total < 8192) begin
        bulk_in(5'(seq), n, h);
        total += n;
        seq++;
        if (seq > 100) break;
      end
      t0 = int'($time / 8) - c0;
    end
    check(total == 8192, $sformatf("bulk-in stream 8192 words (%0d)", total));
    // MB/s = bytes / (cycles * 8 ns)
    $display("bulk-in: %0d bytes in %0d cycles = %0d MB/s", total * 4, t0, (total * 4 * 1000) / (t0 * 8));
    check((total * 4 * 1000) / (t0 * 8) > 320, "bulk-in rate above 320 MB/s");

    // ---------------- bulk-out
    user_drain = 1;
    for (int i = 0; i < 3; i++) begin
      bulk_out(256, 0, 1, h, got);
      check(got && h[35:32] == 4'h1 && h[43:40] == 4'd2 && h[57:53] == 5'(out_seq + 1) && !h[38],
            "bulk-out ACK with next sequence number");
      out_seq++;
    end
    // ---------------- bulk-out rate: eight back-to-back 1024-byte packets
    begin
      int c0, acks;
      c0   = int'($time / 8);
      acks = 0;
      for (int i = 0; i < 8; i++) begin
        bulk_out(256, 0, 1, h, got);
        if (got && h[35:32] == 4'h1 && !h[38] && h[57:53] == 5'(out_seq + 1)) acks++;
        out_seq++;
      end
      t0 = int'($time / 8) - c0;
      check(acks == 8, $sformatf("bulk-out stream: 8 packets acknowledged (%0d)", acks));
      $display("bulk-out: %0d bytes in %0d cycles = %0d MB/s", 8 * 1024, t0, (8 * 1024 * 1000) / (t0 * 8));
      check((8 * 1024 * 1000) / (t0 * 8) > 320, "bulk-out rate above 320 MB/s");
    end
    bulk_out(64, 1, 0, h, got);                        // corrupted CRC
    check(got && h[35:32] == 4'h1 && h[38] && h[57:53] == 5'(out_seq), "retry ACK on bad CRC");
    if (got && h[38]) m_retry++;
    bulk_out(64, 0, 1, h, got);                        // resent
    check(got && h[35:32] == 4'h1 && !h[38] && h[57:53] == 5'(out_seq + 1), "ACK after resend");
    out_seq++;
    for (int i = 0; i < 20000 && out_expect.size() != 0; i++) @(negedge clk);
    repeat (400) @(negedge clk);
    check(out_got == 11 * 256 + 64 && out_bad == 0 && out_expect.size() == 0,
          $sformatf("bulk-out data delivered in order, bad packet dropped (%0d words, %0d bad)",
                    out_got, out_bad));
    // fill the FIFO
    user_drain = 0;
    for (int i = 0; i < 8; i++) begin
      bulk_out(256, 0, 1, h, got);
      check(got && h[35:32] == 4'h1 && !h[38], "bulk-out fill ACK");
      out_seq++;
    end
    bulk_out(256, 0, 0, h, got);
    check(got && h[35:32] == 4'h2 && h[43:40] == 4'd2, "NRDY on full bulk-out FIFO");
    if (got && h[35:32] == 4'h2) m_nrdy_out++;
    user_drain = 1;
    expect_tp(4'h3, 4'd2, "ERDY for bulk-out", h);
    if (h[35:32] == 4'h3) m_erdy_out++;
    bulk_out(256, 0, 1, h, got);
    check(got && h[35:32] == 4'h1 && !h[38], "bulk-out accepted after ERDY");
    out_seq++;
    repeat (3000) @(negedge clk);
    check(out_bad == 0 && out_expect.size() == 0, "bulk-out FIFO data after NRDY/ERDY");

    // ---------------- link credit stall
    hold_lcrd = 1;
    for (int i = 0; i < 4; i++) begin
      bulk_out(16, 0, 1, h, got);
      check(got && h[35:32] == 4'h1, "ACK while credits last");
      out_seq++;
    end
    stalled = status.credit_stall;
    bulk_out(16, 0, 1, h, got);
    check(!got, "no header sent without a link credit");
    check(status.credit_stall > stalled, "credit stall counted");
    if (!got) m_stall++;
    release_lcrd();
    if (!got) get_hdr(h, 500, got);
    check(got && h[35:32] == 4'h1, "ACK sent once credits return");
    out_seq++;
    repeat (200) @(negedge clk);

    // ---------------- U1, host-initiated exit
    @(negedge clk) go_u1 = 1;
    @(negedge clk) go_u1 = 0;
    @(negedge clk);
    check(ltssm_state == LT_U1 && gt_txpd == 2'b01 && gt_rxpd == 2'b01 && gt_txelecidle, "U1 entry");
    if (ltssm_state == LT_U1) m_u1++;
    gt_rxelecidle = 1;
    repeat (50) @(negedge clk);
    gt_rxelecidle = 0;                                  // host wake-up LFPS
    n = 0;
    while (!(gt_tx8b10bbypass == 8'h0F && !gt_txelecidle) && n < 500) begin @(negedge clk); n++; end
    check(ltssm_state == LT_U_EXIT && !gt_txelecidle, "device answers wake-up LFPS");
    n = 0;
    while (ltssm_state != LT_U0 && n < 20000) begin @(negedge clk); n++; end
    check(ltssm_state == LT_U0, "back in U0 after U1 exit");
    check(n > 9000, $sformatf("device wake burst lasted 80 us (%0d words)", n));
    if (ltssm_state == LT_U0) m_wake_host++;
    gt_rxelecidle = 1;
    repeat (20) @(negedge clk);

    // ---------------- U2, device-initiated exit
    @(negedge clk) go_u2 = 1;
    @(negedge clk) go_u2 = 0;
    @(negedge clk);
    check(ltssm_state == LT_U2 && gt_txelecidle, "U2 entry");
    if (ltssm_state == LT_U2) m_u2++;
    repeat (30) @(negedge clk);
    @(negedge clk) wake_req = 1;
    @(negedge clk) wake_req = 0;
    n = 0;
    while (gt_txelecidle && n < 50) begin @(negedge clk); n++; end
    check(!gt_txelecidle && gt_tx8b10bbypass == 8'h0F, "device sends wake-up LFPS");
    repeat (100) @(negedge clk);
    check(ltssm_state == LT_U_EXIT, "waiting for the host's LFPS");
    gt_rxelecidle = 0;
    repeat (200) @(negedge clk);
    gt_rxelecidle = 1;
    n = 0;
    while (ltssm_state != LT_U0 && n < 20000) begin @(negedge clk); n++; end
    check(ltssm_state == LT_U0, "back in U0 after U2 exit");
    if (ltssm_state == LT_U0) m_wake_dev++;

    // ---------------- U3
    @(negedge clk) go_u3 = 1;
    @(negedge clk) go_u3 = 0;
    @(negedge clk);
    check(ltssm_state == LT_U3 && gt_txelecidle, "U3 entry");
    if (ltssm_state == LT_U3) m_u3++;
    gt_rxelecidle = 0;
    n = 0;
    while (ltssm_state != LT_U0 && n < 20000) begin @(negedge clk); n++; end
    check(ltssm_state == LT_U0, "back in U0 after U3 exit");
    gt_rxelecidle = 1;
    repeat (20) @(negedge clk);

    // ---------------- device state and link sequence kept through U1..U3
    check(dev_addr == 7'd5 && configured, "address and configuration kept through U1, U2 and U3");
    bulk_out(16, 0, 1, h, got);
    check(got && h[35:32] == 4'h1 && h[43:40] == 4'd2 && h[57:53] == 5'(out_seq + 1) && !h[38],
          "bulk-out after the low-power states");
    out_seq++;
    n = 0;
    while (out_expect.size() != 0 && n < 5000) begin @(negedge clk); n++; end
    check(out_expect.size() == 0 && out_bad == 0, "bulk-out data after the low-power states delivered");

    // ---------------- link command bookkeeping
    check(dev_lgood > 0 && dev_lcrd > 0, "device returned LGOOD and LCRD");
    check(status.hdr_err == 0, "no host header rejected by the device");

    // ---------------- mechanisms
    $display("mechanisms: polling=%0d nrdy_in=%0d erdy_in=%0d split=%0d nrdy_out=%0d erdy_out=%0d retry=%0d stall=%0d u1=%0d u2=%0d u3=%0d wake_host=%0d wake_dev=%0d trunc=%0d addr=%0d",
             m_polling, m_nrdy_in, m_erdy_in, m_split, m_nrdy_out, m_erdy_out, m_retry, m_stall,
             m_u1, m_u2, m_u3, m_wake_host, m_wake_dev, m_trunc, m_addr);
    check(m_polling > 0, "mechanism: Polling LFPS handshake");
    check(m_nrdy_in > 0 && m_nrdy_out > 0, "mechanism: NRDY");
    check(m_erdy_in > 0 && m_erdy_out > 0, "mechanism: ERDY");
    check(m_split > 0, "mechanism: max packet split");
    check(m_retry > 0, "mechanism: retry on bad CRC");
    check(m_stall > 0, "mechanism: credit stall");
    check(m_u1 > 0 && m_u2 > 0 && m_u3 > 0, "mechanism: U1/U2/U3 entry");
    check(m_wake_host > 0 && m_wake_dev > 0, "mechanism: LFPS wake-up both ways");
    check(m_trunc > 0 && m_addr > 0, "mechanism: descriptor truncation, address change");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
