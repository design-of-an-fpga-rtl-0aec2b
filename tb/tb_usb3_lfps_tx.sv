// tb_usb3_lfps_tx: LFPS generator at its default timing.
// The generator is commanded with PIPE-style requests. Checks: the Polling
// combination (txpd = rxpd = 00, TXDETECTRX = 1, TXELECIDLE = 1) gives the
// Polling waveform word by word (two all-ones words, two all-zero words,
// i.e. tPeriod = 32 ns at 8 ns per word), the burst length (128 words =
// 32 periods = 1.024 us), the repeat time (1250 words = 10 us, measured
// burst start to burst start), the burst_done pulse and the 8b/10b bypass
// value 8'h0F; TXDETECTRX is not passed on while it means LFPS; a burst
// finishes when the request drops; the wake-up combination (txpd = rxpd =
// 01, TXELECIDLE = 0) gives a single burst of 2500 periods with no repeat;
// near-miss combinations (receiver detection in P2, data path in P0) give
// no LFPS and pass TXDETECTRX on.
`timescale 1ns/1ps
module tb_usb3_lfps_tx;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0;
  logic [1:0] req_txpd = 2'b00, req_rxpd = 2'b00;
  logic req_txdetectrx = 0, req_txelecidle = 1;
  logic [39:0] tx_data;
  logic tx_elecidle, tx_detectrx, active, burst_done;
  logic [7:0] tx_8b10b_bypass;

  usb3_lfps_tx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #(8 * 40000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic request(input logic [1:0] pd, input logic det, input logic eidle);
    req_txpd = pd; req_rxpd = pd; req_txdetectrx = det; req_txelecidle = eidle;
  endtask

  // measure one burst starting now (tx_elecidle low); returns its length
  task automatic burst(output int len, output bit shape_ok, output int done_at);
    len = 0; shape_ok = 1; done_at = -1;
    while (!tx_elecidle) begin
      if (tx_data != (((len % 4) < 2) ? 40'hFF_FFFF_FFFF : 40'h0)) shape_ok = 0;
      if (tx_8b10b_bypass != 8'h0F) shape_ok = 0;
      if (tx_detectrx) shape_ok = 0;
      if (burst_done) done_at = len;
      len++;
      @(negedge clk);
    end
  endtask

  initial begin
    int len, gap, done_at, t;
    bit ok, any;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(tx_elecidle && !active, "idle after reset");
    // receiver detection (P2) and an active data path (P0) are not LFPS
    request(2'b10, 1'b1, 1'b1);
    any = 0;
    repeat (200) begin @(negedge clk); if (!tx_elecidle || !tx_detectrx) any = 1; end
    check(!any, "receiver detection in P2: no LFPS, TXDETECTRX passed on");
    request(2'b00, 1'b0, 1'b0);
    any = 0;
    repeat (200) begin @(negedge clk); if (!tx_elecidle) any = 1; end
    check(!any, "P0 with TXELECIDLE low: no LFPS");
    request(2'b01, 1'b1, 1'b1);
    any = 0;
    repeat (200) begin @(negedge clk); if (!tx_elecidle) any = 1; end
    check(!any, "P1 with TXELECIDLE high: no LFPS");
    // Polling combination
    request(2'b00, 1'b1, 1'b1);
    @(negedge clk);
    check(!tx_elecidle, "burst starts one cycle after the Polling request");
    for (int b = 0; b < 3; b++) begin
      burst(len, ok, done_at);
      check(ok, "square wave 2 words high / 2 low, TXDETECTRX held back");
      check(len == 128, $sformatf("tBurst 128 words, got %0d", len));
      check(done_at == 127, "burst_done in the last burst word");
      gap = 0;
      while (tx_elecidle && gap < 3000) begin gap++; @(negedge clk); end
      check(len + gap == 1250, $sformatf("tRepeat 1250 words, got %0d", len + gap));
    end
    // drop the request in the middle of a burst: the burst completes
    repeat (10) @(negedge clk);
    request(2'b00, 1'b0, 1'b1);
    t = 10;
    while (!tx_elecidle) begin t++; @(negedge clk); end
    check(t == 128, "burst completes after the request drops");
    repeat (2000) @(negedge clk);
    check(tx_elecidle, "no further burst once the request is gone");
    // wake-up combination, held
    request(2'b01, 1'b0, 1'b1);
    repeat (5) @(negedge clk);
    request(2'b01, 1'b0, 1'b0);
    @(negedge clk);
    burst(len, ok, done_at);
    check(ok && len == 10000, $sformatf("wake-up burst 2500 periods, got %0d words", len));
    repeat (3000) @(negedge clk);
    check(tx_elecidle, "wake-up burst is not repeated while the request stays");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
