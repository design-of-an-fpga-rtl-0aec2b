// tb_usb3_protocol: device protocol layer.
// The testbench plays the link layer (taking headers after a few cycles and
// pulling payload words), the two FIFOs and the endpoint block's outputs.
// Checks: NRDY on an empty bulk-in FIFO; a bulk-in data packet header with
// the requested sequence number and min(FIFO, 256) words, payload read from
// the FIFO in order; bulk-out payload written to the FIFO and committed with
// an ACK carrying the next sequence number; retry ACK and discard on a bad
// CRC or an unexpected sequence number; NRDY and no FIFO write without room;
// SETUP capture and ACK; STATUS answered and status_done; EP0 descriptor
// data stage; ERDY sent on request.
`timescale 1ns/1ps
module tb_usb3_protocol;
  import usb3_pkg::*;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, active = 0;
  logic rx_hdr_valid = 0, rx_pl_valid = 0, rx_pl_end = 0, rx_pl_good = 0;
  hdr_t rx_hdr = '0, tx_hdr;
  logic [31:0] rx_pl_data = 0, tx_pl_data, in_fifo_data, out_fifo_data, desc_word;
  logic tx_hdr_valid, tx_hdr_has_dpp, tx_hdr_ack = 0, tx_pl_last, tx_pl_rd = 0;
  logic [15:0] in_fifo_count, out_fifo_free = 16'd2048, desc_len = 0;
  logic in_fifo_rd, out_fifo_wr, out_fifo_commit, out_fifo_discard;
  logic setup_valid, status_done, in_nrdy_sent, out_accepted, out_nrdy_sent, erdy_sent;
  logic [63:0] setup_pkt;
  logic [5:0] desc_idx;
  logic [6:0] dev_addr = 7'd9;
  logic [4:0] ep2_seq = 0;
  logic erdy_valid = 0, erdy_dir_in = 0;
  logic [3:0] erdy_ep = 0;
  logic [31:0] in_pkt_cnt, out_pkt_cnt, nrdy_cnt, erdy_cnt, retry_cnt, setup_cnt;

  usb3_protocol dut (.*);

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

  // bulk-in FIFO model
  logic [31:0] inq[$];
  assign in_fifo_count = 16'(inq.size());
  assign in_fifo_data  = inq.size() ? inq[0] : 32'h0;
  always @(posedge clk) if (in_fifo_rd) void'(inq.pop_front());
  assign desc_word = {26'h0, desc_idx} * 32'h01010101;

  // bulk-out FIFO model with commit / discard
  logic [31:0] spec[$], committed[$];
  int commits = 0, discards = 0, setups = 0, statuses = 0, accepts = 0;
  always @(posedge clk) begin
    if (out_fifo_wr) spec.push_back(out_fifo_data);
    if (out_fifo_commit) begin foreach (spec[i]) committed.push_back(spec[i]); spec.delete(); commits++; end
    if (out_fifo_discard) begin spec.delete(); discards++; end
  end
  // registered pulses are sampled between clock edges
  always @(negedge clk) begin
    if (setup_valid) setups++;
    if (status_done) statuses++;
    if (out_accepted) accepts++;
  end

  // link model: take a header 3 cycles after it is offered, then pull payload
  hdr_t sent[$];
  logic sent_dpp[$];
  logic [31:0] sent_pl[$];
  initial begin
    forever begin
      @(negedge clk);
      if (tx_hdr_valid) begin
        repeat (2) @(negedge clk);
        tx_hdr_ack = 1;
        sent.push_back(tx_hdr);
        sent_dpp.push_back(tx_hdr_has_dpp);
        @(negedge clk);
        tx_hdr_ack = 0;
        if (sent_dpp[$]) begin
          bit last;
          do begin
            last = tx_pl_last;
            sent_pl.push_back(tx_pl_data);
            tx_pl_rd = 1;
            @(negedge clk);
            tx_pl_rd = 0;
          end while (!last);
        end
      end
    end
  end

  function automatic hdr_t tp(input logic [3:0] sub, input logic dir, input logic [3:0] ep,
                              input logic [4:0] seq);
    return '{dw2: 32'h0, dw1: {6'd0, seq, 5'd1, 4'd0, ep, dir, 3'd0, sub}, dw0: {7'd9, 20'd0, 5'h04}};
  endfunction
  function automatic hdr_t dph(input logic [4:0] seq, input logic [3:0] ep, input logic setup,
                               input logic [15:0] len);
    return '{dw2: 32'h0, dw1: {len, setup, 3'd0, ep, 1'b0, 2'b00, seq}, dw0: {7'd9, 20'd0, 5'h08}};
  endfunction

  task automatic give_hdr(input hdr_t h);
    rx_hdr = h;
    rx_hdr_valid = 1;
    @(negedge clk);
    rx_hdr_valid = 0;
  endtask

  task automatic give_pl(input logic [31:0] w[$], input bit good);
    foreach (w[i]) begin
      rx_pl_data = w[i];
      rx_pl_valid = 1;
      @(negedge clk);
      rx_pl_valid = 0;
      @(negedge clk);
    end
    rx_pl_end = 1;
    rx_pl_good = good;
    @(negedge clk);
    rx_pl_end = 0;
  endtask

  task automatic wait_sent(input int n);
    for (int i = 0; i < 3000 && sent.size() < n; i++) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [31:0] w[$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    active = 1;
    // bulk-in, empty FIFO -> NRDY
    give_hdr(tp(TP_ACK, 1, 1, 5'd3));
    wait_sent(1);
    check(sent[0].dw1[3:0] == TP_NRDY && sent[0].dw1[11:8] == 1 && sent[0].dw1[7] && !sent_dpp[0],
          "NRDY for empty bulk-in");
    check(sent[0].dw0[31:25] == 7'd9 && sent[0].dw0[4:0] == PT_TP, "device address and TP type");
    check(nrdy_cnt == 1, "NRDY counted");
    // bulk-in with 300 words: packet of 256
    for (int i = 0; i < 300; i++) inq.push_back(32'h5000_0000 + i);
    give_hdr(tp(TP_ACK, 1, 1, 5'd3));
    wait_sent(2);
    repeat (300) @(negedge clk);
    check(sent[1].dw0[4:0] == PT_DP && sent[1].dw1[4:0] == 5'd3 && sent[1].dw1[31:16] == 16'd1024
          && sent[1].dw1[7] && sent[1].dw1[11:8] == 1 && sent_dpp[1], "bulk-in DPH 1024 bytes, seq 3");
    check(sent_pl.size() == 256 && sent_pl[0] == 32'h5000_0000 && sent_pl[255] == 32'h5000_00FF,
          "bulk-in payload from FIFO");
    check(inq.size() == 44, "256 words taken from the FIFO");
    sent_pl.delete();
    give_hdr(tp(TP_ACK, 1, 1, 5'd4));
    wait_sent(3);
    repeat (60) @(negedge clk);
    check(sent[2].dw1[31:16] == 16'd176 && sent_pl.size() == 44 && inq.size() == 0,
          "short bulk-in packet with the rest");
    // bulk-out good
    w = '{32'hA1, 32'hA2, 32'hA3};
    give_hdr(dph(5'd0, 4'd2, 0, 16'd12));
    give_pl(w, 1);
    wait_sent(4);
    check(sent[3].dw1[3:0] == TP_ACK && sent[3].dw1[25:21] == 5'd1 && !sent[3].dw1[6]
          && sent[3].dw1[11:8] == 2, "bulk-out ACK with sequence 1");
    check(committed == w && commits == 1 && accepts == 1, $sformatf("bulk-out payload committed (%0d words, %0d commits, %0d accepts)", committed.size(), commits, accepts));
    ep2_seq = 1;
    // bad CRC -> retry, discard
    give_hdr(dph(5'd1, 4'd2, 0, 16'd12));
    give_pl(w, 0);
    wait_sent(5);
    check(sent[4].dw1[3:0] == TP_ACK && sent[4].dw1[6] && sent[4].dw1[25:21] == 5'd1, "retry ACK");
    check(discards == 1 && committed.size() == 3, "bad payload discarded");
    // unexpected sequence number -> retry
    give_hdr(dph(5'd7, 4'd2, 0, 16'd12));
    give_pl(w, 1);
    wait_sent(6);
    check(sent[5].dw1[6] && discards == 2 && retry_cnt == 2, "wrong sequence number retried");
    // no room -> NRDY, nothing written
    out_fifo_free = 2;
    give_hdr(dph(5'd1, 4'd2, 0, 16'd12));
    give_pl(w, 1);
    wait_sent(7);
    check(sent[6].dw1[3:0] == TP_NRDY && sent[6].dw1[11:8] == 2 && spec.size() == 0 && commits == 1,
          "NRDY without room, payload dropped");
    out_fifo_free = 2048;
    // SETUP
    give_hdr(dph(5'd0, 4'd0, 1, 16'd8));
    give_pl('{32'h0001_0680, 32'h0040_0000}, 1);
    wait_sent(8);
    check(setups == 1 && setup_pkt == 64'h0040_0000_0001_0680, $sformatf("SETUP packet captured %0d %h", setups, setup_pkt));
    check(sent[7].dw1[3:0] == TP_ACK && sent[7].dw1[11:8] == 0 && sent[7].dw1[25:21] == 5'd1,
          "SETUP acknowledged");
    // EP0 data stage of 10 bytes
    desc_len = 16'd10;
    sent_pl.delete();
    give_hdr(tp(TP_ACK, 1, 0, 5'd0));
    wait_sent(9);
    repeat (10) @(negedge clk);
    check(sent[8].dw0[4:0] == PT_DP && sent[8].dw1[31:16] == 16'd10 && sent[8].dw1[11:8] == 0,
          "EP0 data packet header");
    check(sent_pl.size() == 3 && sent_pl[0] == 32'h0 && sent_pl[2] == 32'h02020202,
          "EP0 payload words from the descriptor table");
    // STATUS
    give_hdr(tp(TP_STATUS, 0, 0, 5'd0));
    wait_sent(10);
    check(sent[9].dw1[3:0] == TP_ACK && statuses == 1, "STATUS answered, status_done");
    // ERDY request
    erdy_valid = 1; erdy_ep = 4'd1; erdy_dir_in = 1;
    wait_sent(11);
    erdy_valid = 0;
    check(sent[10].dw1[3:0] == TP_ERDY && sent[10].dw1[11:8] == 1 && sent[10].dw1[7] && erdy_cnt == 1,
          "ERDY sent on request");
    check(in_pkt_cnt == 2 && out_pkt_cnt == 1 && setup_cnt == 1, "event counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
