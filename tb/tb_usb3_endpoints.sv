// tb_usb3_endpoints: endpoint management.
// Feeds SETUP packets and checks: GET_DESCRIPTOR lengths (device 18,
// configuration 44 or wLength if smaller, BOS 22, unknown 0) and descriptor
// words against byte tables written here; SET_ADDRESS and
// SET_CONFIGURATION taking effect only at status_done; EP2 sequence numbers;
// ERDY requests after NRDY once data or room appears, and their release;
// everything cleared when the link leaves U0.
`timescale 1ns/1ps
module tb_usb3_endpoints;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, active = 0, setup_valid = 0, status_done = 0;
  logic [63:0] setup_pkt = 0;
  logic [5:0] desc_idx = 0;
  logic [15:0] desc_len;
  logic [31:0] desc_word;
  logic [6:0] dev_addr;
  logic configured;
  logic in_nrdy_sent = 0, out_accepted = 0, out_nrdy_sent = 0, erdy_sent = 0;
  logic [15:0] in_fifo_count = 0, out_fifo_free = 0;
  logic [4:0] ep2_seq;
  logic erdy_valid, erdy_dir_in;
  logic [3:0] erdy_ep;

  usb3_endpoints dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #(8 * 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(ref logic s);
    s = 1;
    @(negedge clk);
    s = 0;
    @(negedge clk);
  endtask

  task automatic setup(input logic [7:0] bm, input logic [7:0] br, input logic [15:0] wv,
                       input logic [15:0] wl);
    setup_pkt = {wl, 16'h0000, wv, br, bm};
    pulse(setup_valid);
  endtask

  task automatic check_desc(input logic [7:0] b[$], input string name);
    for (int i = 0; i < b.size(); i += 4) begin
      logic [31:0] e;
      e = 0;
      for (int j = 0; j < 4; j++) if (i + j < b.size()) e[8*j +: 8] = b[i+j];
      desc_idx = 6'(i / 4);
      #1;
      if (i + 4 <= b.size()) check(desc_word == e, $sformatf("%s word %0d", name, i / 4));
      else begin
        logic [31:0] m;
        m = '0;
        for (int j = 0; j < b.size() - i; j++) m[8*j +: 8] = 8'hFF;
        check((desc_word & m) == e, $sformatf("%s last word", name));
      end
    end
    @(negedge clk);
  endtask

  initial begin
    logic [7:0] dev[$], cfg[$], bos[$];
    dev = '{8'h12, 8'h01, 8'h00, 8'h03, 8'h00, 8'h00, 8'h00, 8'h09, 8'h00, 8'h00, 8'h00, 8'h00,
            8'h00, 8'h01, 8'h00, 8'h00, 8'h00, 8'h01};
    cfg = '{8'h09, 8'h02, 8'h2C, 8'h00, 8'h01, 8'h01, 8'h00, 8'h80, 8'h32,
            8'h09, 8'h04, 8'h00, 8'h00, 8'h02, 8'hFF, 8'h00, 8'h00, 8'h00,
            8'h07, 8'h05, 8'h81, 8'h02, 8'h00, 8'h04, 8'h00, 8'h06, 8'h30, 8'h00, 8'h00, 8'h00, 8'h00,
            8'h07, 8'h05, 8'h02, 8'h02, 8'h00, 8'h04, 8'h00, 8'h06, 8'h30, 8'h00, 8'h00, 8'h00, 8'h00};
    bos = '{8'h05, 8'h0F, 8'h16, 8'h00, 8'h02, 8'h07, 8'h10, 8'h02, 8'h02, 8'h00, 8'h00, 8'h00,
            8'h0A, 8'h10, 8'h03, 8'h00, 8'h0E, 8'h00, 8'h03, 8'h00, 8'h00, 8'h00};
    repeat (2) @(negedge clk);
    rst_n = 1;
    active = 1;
    @(negedge clk);
    check(dev_addr == 0 && !configured && !erdy_valid, "reset state");
    setup(8'h80, 8'h06, 16'h0100, 16'd64);
    check(desc_len == 18, "device descriptor length 18");
    check_desc(dev, "device descriptor");
    setup(8'h80, 8'h06, 16'h0200, 16'd255);
    check(desc_len == 44, "configuration descriptor length 44");
    check_desc(cfg, "configuration descriptor");
    setup(8'h80, 8'h06, 16'h0200, 16'd9);
    check(desc_len == 9, "configuration descriptor capped by wLength");
    setup(8'h80, 8'h06, 16'h0F00, 16'd100);
    check(desc_len == 22, "BOS descriptor length 22");
    check_desc(bos, "BOS descriptor");
    setup(8'h80, 8'h06, 16'h0300, 16'd100);
    check(desc_len == 0, "string descriptor not provided");
    // SET_ADDRESS
    setup(8'h00, 8'h05, 16'd42, 16'd0);
    check(dev_addr == 0, "address pending until status");
    pulse(status_done);
    check(dev_addr == 42, "address applied at status_done");
    // SET_CONFIGURATION and EP2 sequence
    pulse(out_accepted);
    pulse(out_accepted);
    check(ep2_seq == 2, "EP2 sequence advances");
    setup(8'h00, 8'h09, 16'd1, 16'd0);
    check(!configured && ep2_seq == 2, "configuration pending until status");
    pulse(status_done);
    check(configured && ep2_seq == 0, "configured, EP2 sequence cleared");
    for (int i = 0; i < 33; i++) pulse(out_accepted);
    check(ep2_seq == 1, "EP2 sequence wraps at 32");
    // ERDY for bulk-in
    pulse(in_nrdy_sent);
    check(!erdy_valid, "no ERDY while bulk-in FIFO empty");
    in_fifo_count = 1;
    #1;
    check(erdy_valid && erdy_ep == 1 && erdy_dir_in, "ERDY for EP1 IN once data arrives");
    pulse(erdy_sent);
    check(!erdy_valid, "ERDY request cleared when sent");
    // ERDY for bulk-out
    out_fifo_free = 100;
    pulse(out_nrdy_sent);
    check(!erdy_valid, "no ERDY while bulk-out FIFO lacks room for a packet");
    out_fifo_free = 256;
    #1;
    check(erdy_valid && erdy_ep == 2 && !erdy_dir_in, "ERDY for EP2 OUT once there is room");
    pulse(erdy_sent);
    check(!erdy_valid, "EP2 ERDY cleared");
    // leaving U0 clears the device state
    active = 0;
    @(negedge clk);
    check(dev_addr == 0 && !configured, "state cleared outside U0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
