// tb_usb3_pipe: PIPE scrambling module.
// The transmit side is fed random words with random K symbols (COM, SKP,
// framing symbols) and compared, one cycle later, with the reference
// scrambler of tb_usb3_ref_pkg. The known start of the USB 3.0 scrambling
// sequence (FF 17 C0 14 B2 E7 02 82 ...) is checked after a COM. The
// transmit output is looped into the receive side, which must return the
// original words, and words sent with scrambling off must pass unchanged.
`timescale 1ns/1ps
module tb_usb3_pipe;
  import tb_usb3_ref_pkg::*;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, tx_scr_en = 0, rx_scr_en = 0;
  logic [31:0] tx_data = 0, rx_data, gt_txdata, gt_rxdata;
  logic [3:0] tx_k = 0, rx_k, gt_txcharisk, gt_rxcharisk;

  assign gt_rxdata    = gt_txdata;     // loopback
  assign gt_rxcharisk = gt_txcharisk;

  usb3_pipe dut (.*);

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

  logic [15:0] lfsr = 16'hFFFF;
  logic [31:0] exp_tx, exp_rx, exp_tx2, exp_rx2;
  logic [3:0]  exp_k, exp_k2;
  bit          have = 0, have2 = 0;
  logic        last_en = 0;

  // drive at negedge, check the registered outputs at the following negedges
  task automatic send(input logic [31:0] d, input logic [3:0] k, input logic en);
    logic [47:0] r;
    tx_data   = d;
    tx_k      = k;
    tx_scr_en = en;
    rx_scr_en = last_en;   // the receive side sees this word one cycle later
    last_en   = en;
    r = ref_scr(lfsr, d, k, en);
    lfsr = r[47:32];
    @(negedge clk);
    check(gt_txdata == r[31:0] && gt_txcharisk == k, $sformatf("tx word %08h k=%h", d, k));
    // loopback result one more cycle later
    exp_rx = d;
    exp_k  = k;
    have   = 1;
  endtask

  always @(negedge clk) begin
    if (have2) check(rx_data == exp_rx2 && rx_k == exp_k2, "loopback returns the original word");
    have2   = have;
    exp_rx2 = exp_rx;
    exp_k2  = exp_k;
    have    = 0;
  end

  initial begin
    logic [7:0] ks[4];
    ks = '{8'hBC, 8'h3C, 8'hFB, 8'hF7};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // COM then zeros: the published scrambling sequence
    send(32'hBCBCBCBC, 4'hF, 1);
    send(32'h0, 4'h0, 1);
    send(32'h0, 4'h0, 1);
    send(32'h0, 4'h0, 1);
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] d;
      logic [3:0] k;
      d = $urandom;
      k = 4'h0;
      for (int b = 0; b < 4; b++)
        if ($urandom_range(0, 9) == 0) begin
          k[b] = 1'b1;
          d[8*b +: 8] = ks[$urandom_range(0, 3)];
        end
      send(d, k, (i % 500) < 400);
    end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // independent check of the absolute sequence: after a COM word the first
  // scrambled zero symbols must be FF 17 C0 14 B2 E7 02 82 72 6E 28 A6
  logic [7:0] seq_exp[12] = '{8'hFF, 8'h17, 8'hC0, 8'h14, 8'hB2, 8'hE7, 8'h02, 8'h82,
                              8'h72, 8'h6E, 8'h28, 8'hA6};
  int zc = -1;
  always @(negedge clk) begin
    if (rst_n && gt_txcharisk == 4'hF && gt_txdata == 32'hBCBCBCBC && zc < 0) zc = 0;
    else if (zc >= 0 && zc < 3) begin
      for (int b = 0; b < 4; b++)
        check(gt_txdata[8*b +: 8] == seq_exp[4*zc + b], $sformatf("sequence byte %0d", 4*zc + b));
      zc++;
    end
  end
endmodule
