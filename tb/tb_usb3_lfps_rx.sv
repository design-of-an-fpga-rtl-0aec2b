// tb_usb3_lfps_rx: received-LFPS classifier.
// Drives rx_elecidle with bursts of chosen length and spacing (8 ns words)
// and checks: a Polling burst train (128-word bursts every 1250 words) is
// reported from its second burst on; a train with too-short bursts (50
// words), too-long bursts (200 words) or too-long spacing (2000 words) is
// not; the limits 75/175 words and 750/1750 words are accepted; wake_det
// pulses once, 75 words into a burst; last_burst_len reports the length.
`timescale 1ns/1ps
module tb_usb3_lfps_rx;
  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0, rx_elecidle = 1;
  logic lfps_present, polling_det, wake_det;
  logic [31:0] last_burst_len;

  usb3_lfps_rx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #(8 * 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int det = 0, wake = 0, wake_at = -1, cyc = 0, burst_start = 0;
  always @(negedge clk) begin
    cyc++;
    if (polling_det) det++;
    if (wake_det) begin wake++; wake_at = cyc - burst_start; end
  end

  // a train of n bursts of blen words repeating every rep words
  task automatic train(input int n, input int blen, input int rep);
    for (int i = 0; i < n; i++) begin
      rx_elecidle = 0;
      burst_start = cyc;
      repeat (blen) @(negedge clk);
      rx_elecidle = 1;
      repeat (rep - blen) @(negedge clk);
    end
    repeat (5) @(negedge clk);
  endtask

  task automatic reset_dut();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    det = 0;
    wake = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    train(1, 128, 1250);
    check(det == 0, "one burst is not enough");
    check(last_burst_len == 128, "burst length measured");
    train(3, 128, 1250);
    check(det == 3, $sformatf("Polling detected on bursts 2..4 (%0d)", det));
    check(wake == 4 && wake_at == 76, $sformatf("wake_det registered after the 75th burst word (%0d, at %0d)", wake, wake_at));
    reset_dut();
    train(4, 50, 1250);
    check(det == 0, "50-word bursts rejected (< 0.6 us)");
    check(wake == 0, "50-word bursts do not wake");
    check(lfps_present == 0, "lfps_present follows rx_elecidle");
    reset_dut();
    train(4, 200, 1250);
    check(det == 0, "200-word bursts rejected (> 1.4 us)");
    reset_dut();
    train(4, 128, 2000);
    check(det == 0, "2000-word repeat rejected (> 14 us)");
    reset_dut();
    train(3, 75, 750);
    check(det == 2, "limits 75 words / 750 words accepted");
    reset_dut();
    train(3, 175, 1750);
    check(det == 2, "limits 175 words / 1750 words accepted");
    reset_dut();
    train(3, 128, 700);
    check(det == 0, "700-word repeat rejected (< 6 us)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
