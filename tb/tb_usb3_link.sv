// tb_usb3_link: link layer.
// The testbench plays the protocol layer on one side and the (already
// descrambled) link partner on the other. Checks: header packet framing with
// CRC-16 and link control word (sequence numbers 0, 1, 2 ...), data packet
// payload framing with CRC-32 (reference models in tb_usb3_ref_pkg);
// received headers delivered only with good CRC and expected sequence
// number, each answered by LGOOD_n and LCRD_x; received payloads with good
// and bad CRC; header credit accounting (a fifth header waits until an LCRD
// arrives, counted as a stall); received LGOOD counting; sequence numbers
// and credits kept through a low-power state (active low, link_up high) and
// cleared by retraining (link_up low).
`timescale 1ns/1ps
module tb_usb3_link;
  import usb3_pkg::*;
  import tb_usb3_ref_pkg::*;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, active = 0, link_up = 0;
  logic tx_hdr_valid = 0, tx_hdr_has_dpp = 0, tx_hdr_ack, tx_pl_last, tx_pl_rd;
  hdr_t tx_hdr = '0, rx_hdr;
  logic [31:0] tx_pl_data;
  logic rx_hdr_valid, rx_pl_valid, rx_pl_end, rx_pl_good;
  logic [31:0] rx_pl_data, tx_data, rx_data = 0;
  logic [3:0] tx_k, rx_k = 0;
  logic [2:0] tx_credits;
  logic [31:0] tx_stall_cnt, rx_lgood_cnt, rx_hdr_err_cnt, tx_lc_cnt;

  usb3_link dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #(8 * 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] HPSTART = 32'hF7FBFBFB, LCSTART = 32'hF7DCDCDC,
                          DPPSTART = 32'hF75C5C5C, DPPEND = 32'hF7FDFDFD;

  // payload source
  logic [31:0] pl[$];
  int pl_i = 0;
  assign tx_pl_data = (pl_i < pl.size()) ? pl[pl_i] : 32'h0;
  assign tx_pl_last = (pl_i == pl.size() - 1);
  always @(posedge clk) if (tx_pl_rd) pl_i <= pl_i + 1;

  // transmit-side parser
  int ps = 0;
  logic [31:0] pw[$];
  logic [95:0] got_hdr[$];
  logic [15:0] got_lcw[$];
  logic [31:0] got_pl[$][$];
  logic [15:0] got_lc[$];
  always @(negedge clk) if (active) begin
    unique case (ps)
      0: begin
        if (tx_k == 4'hF && tx_data == HPSTART) begin ps = 1; pw.delete(); end
        else if (tx_k == 4'hF && tx_data == LCSTART) ps = 2;
        else if (tx_k == 4'hF && tx_data == DPPSTART) begin ps = 3; pw.delete(); end
        else check(tx_k == 0 && tx_data == 0, "logical idle between packets");
      end
      1: begin
        pw.push_back(tx_data);
        if (pw.size() == 4) begin
          check(pw[3][15:0] == ref_crc16({pw[2], pw[1], pw[0]}), "header CRC-16");
          got_hdr.push_back({pw[2], pw[1], pw[0]});
          got_lcw.push_back(pw[3][31:16]);
          ps = 0;
        end
      end
      2: begin
        check(tx_data[31:16] == tx_data[15:0], "link command word repeated");
        got_lc.push_back(tx_data[15:0]);
        ps = 0;
      end
      default: begin
        if (tx_k == 4'hF && tx_data == DPPEND) begin
          logic [31:0] body[$];
          body = pw[0:$-1];
          check(pw[$] == ref_crc32(body), "payload CRC-32");
          got_pl.push_back(body);
          ps = 0;
        end else pw.push_back(tx_data);
      end
    endcase
  end

  // receive-side capture
  logic [95:0] rx_hdrs[$];
  logic [31:0] rx_words[$];
  int pl_ends = 0, pl_goods = 0;
  always @(negedge clk) begin
    if (rx_hdr_valid) rx_hdrs.push_back(rx_hdr);
    if (rx_pl_valid) rx_words.push_back(rx_pl_data);
    if (rx_pl_end) begin pl_ends++; if (rx_pl_good) pl_goods++; end
  end

  task automatic send_hdr(input logic [95:0] h, input bit dpp, input int max_wait, output bit acked);
    tx_hdr = h;
    tx_hdr_has_dpp = dpp;
    tx_hdr_valid = 1;
    acked = 0;
    for (int i = 0; i < max_wait; i++) begin
      #1;
      if (tx_hdr_ack) begin acked = 1; break; end
      @(negedge clk);
    end
    @(negedge clk);
    tx_hdr_valid = 0;
  endtask

  task automatic rx_word(input logic [31:0] d, input logic [3:0] k);
    rx_data = d;
    rx_k = k;
    @(negedge clk);
    rx_data = 0;
    rx_k = 0;
  endtask

  task automatic rx_hdr_pkt(input logic [95:0] h, input logic [2:0] seq, input bit bad);
    logic [15:0] c;
    c = ref_crc16(h) ^ (bad ? 16'h0100 : 16'h0);
    rx_word(HPSTART, 4'hF);
    rx_word(h[31:0], 0);
    rx_word(h[63:32], 0);
    rx_word(h[95:64], 0);
    rx_word({ref_lcw({8'd0, seq}), c}, 0);
  endtask

  task automatic rx_lc(input logic [10:0] info);
    rx_word(LCSTART, 4'hF);
    rx_word({ref_lcw(info), ref_lcw(info)}, 0);
  endtask

  initial begin
    bit acked;
    logic [95:0] h;
    logic [31:0] w[$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    active = 1;
    link_up = 1;
    repeat (3) @(negedge clk);
    check(tx_credits == 4, "four header credits at start");
    // header only
    h = {32'h0, 32'h0010_0101, 32'h0A00_0004};
    send_hdr(h, 0, 20, acked);
    repeat (10) @(negedge clk);
    check(acked && got_hdr.size() == 1 && got_hdr[0] == h, "header packet sent");
    check(got_lcw.size() == 1 && got_lcw[0] == ref_lcw(11'd0), "link control word, sequence 0");
    // header with payload
    pl = '{32'h11111111, 32'h22222222, 32'h0, 32'hDEADBEEF, 32'h12345678};
    pl_i = 0;
    h = {32'h0, 32'h0014_0181, 32'h0A00_0008};
    send_hdr(h, 1, 20, acked);
    repeat (20) @(negedge clk);
    check(got_hdr.size() == 2 && got_hdr[1] == h, "data packet header sent");
    check(got_lcw.size() == 2 && got_lcw[1] == ref_lcw(11'd1), "sequence 1");
    check(got_pl.size() == 1 && got_pl[0] == pl, "payload words sent in order");
    check(tx_credits == 2, "two credits used");
    // received header: delivered and answered with LGOOD_0, LCRD_A
    h = {32'h0, 32'h0000_0181, 32'h0000_0004};
    rx_hdr_pkt(h, 3'd0, 0);
    repeat (12) @(negedge clk);
    check(rx_hdrs.size() == 1 && rx_hdrs[0] == h, "received header delivered");
    check(got_lc.size() == 2 && got_lc[0] == ref_lcw({2'b00, 2'b00, 3'b000, 4'd0})
          && got_lc[1] == ref_lcw({2'b00, 2'b01, 3'b000, 4'd0}), "LGOOD_0 and LCRD_A sent");
    // bad CRC and wrong sequence number: dropped, no link command
    rx_hdr_pkt(h, 3'd1, 1);
    rx_hdr_pkt(h, 3'd3, 0);
    repeat (12) @(negedge clk);
    check(rx_hdrs.size() == 1 && rx_hdr_err_cnt == 2 && got_lc.size() == 2, "bad headers dropped");
    rx_hdr_pkt(h, 3'd1, 0);
    repeat (12) @(negedge clk);
    check(rx_hdrs.size() == 2 && got_lc.size() == 4 && got_lc[2] == ref_lcw(11'd1)
          && got_lc[3] == ref_lcw({2'b00, 2'b01, 3'b000, 4'd1}), "LGOOD_1 and LCRD_B");
    // received payloads
    w = '{32'hCAFEF00D, 32'h01020304, 32'h0};
    rx_word(DPPSTART, 4'hF);
    foreach (w[i]) rx_word(w[i], 0);
    rx_word(ref_crc32(w), 0);
    rx_word(DPPEND, 4'hF);
    repeat (3) @(negedge clk);
    check(rx_words == w && pl_ends == 1 && pl_goods == 1, "received payload, good CRC");
    rx_word(DPPSTART, 4'hF);
    foreach (w[i]) rx_word(w[i], 0);
    rx_word(ref_crc32(w) ^ 32'h8000_0000, 0);
    rx_word(DPPEND, 4'hF);
    repeat (3) @(negedge clk);
    check(pl_ends == 2 && pl_goods == 1, "received payload, bad CRC flagged");
    // credits: two left; use them, then a third header stalls
    send_hdr({32'h0, 32'h1, 32'h4}, 0, 20, acked);
    check(acked, "third header sent");
    send_hdr({32'h0, 32'h2, 32'h4}, 0, 20, acked);
    check(acked, "fourth header sent");
    repeat (8) @(negedge clk);
    check(tx_credits == 0, "no credits left");
    fork
      send_hdr({32'h0, 32'h3, 32'h4}, 0, 200, acked);
      begin
        repeat (60) @(negedge clk);
        check(tx_stall_cnt > 0, "stall counted while waiting for a credit");
        check(got_hdr.size() == 4, "fifth header held back without a credit");
        check(tx_credits == 0, "credit count stays at zero while waiting");
        rx_lc({2'b00, 2'b01, 3'b000, 4'd0});      // LCRD_A
      end
    join
    check(acked, "header sent after LCRD");
    repeat (10) @(negedge clk);
    check(got_hdr.size() == 5 && got_lcw[4] == ref_lcw(11'd4), "fifth header, sequence 4");
    rx_lc({2'b00, 2'b00, 3'b000, 4'd0});          // LGOOD_0
    repeat (3) @(negedge clk);
    check(rx_lgood_cnt == 1, "received LGOOD counted");
    // low-power state: nothing sent, sequence numbers and credits kept
    active = 0;
    repeat (20 + $urandom_range(0, 30)) @(negedge clk);
    check(tx_k == 0 && tx_data == 0, "nothing sent while not in U0");
    active = 1;
    repeat (3) @(negedge clk);
    check(tx_credits == 0, "credit count kept through a low-power state");
    rx_lc({2'b00, 2'b01, 3'b000, 4'd1});      // LCRD_B
    send_hdr({32'h0, 32'h5, 32'h4}, 0, 40, acked);
    repeat (10) @(negedge clk);
    check(acked && got_hdr.size() == 6 && got_lcw[5] == ref_lcw(11'd5),
          "header sequence continues after a low-power state");
    // retraining clears sequence numbers and credits
    active = 0; link_up = 0;
    repeat (5) @(negedge clk);
    active = 1; link_up = 1;
    repeat (3) @(negedge clk);
    check(tx_credits == 4, "credits restored after retraining");
    send_hdr({32'h0, 32'h6, 32'h4}, 0, 40, acked);
    repeat (10) @(negedge clk);
    check(acked && got_hdr.size() == 7 && got_lcw[6] == ref_lcw(11'd0),
          "header sequence restarts at 0 after retraining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
