// tb_usb3_async_fifo: dual-clock FIFO test with unrelated write (10 ns) and
// read (8 ns) clocks and a small depth (ADDR_W = 4, 16 words).
// Checks: data order against a queue model, full at exactly 16 words, empty
// flag, fill levels, and that words written before wr_discard never reach the
// reader while committed words do.
`timescale 1ns/1ps
module tb_usb3_async_fifo;
  localparam int AW = 4;
  logic wclk = 0, rclk = 0;
  always #5 wclk = ~wclk;
  always #4 rclk = ~rclk;
  logic wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, wr_commit = 1, wr_discard = 0, rd_en = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic wr_full, rd_empty;
  logic [AW:0] wr_count, rd_count;

  usb3_async_fifo #(.DATA_W(32), .ADDR_W(AW)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en, .wr_data, .wr_commit, .wr_discard,
    .wr_full, .wr_count, .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en, .rd_data,
    .rd_empty, .rd_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model[$];
  bit reading = 0;
  int nread = 0;

  // reader: pops whenever not empty and enabled, compares with the model
  always @(negedge rclk) begin
    rd_en <= 1'b0;
    if (reading && !rd_empty) begin
      rd_en <= 1'b1;
      check(model.size() > 0 && rd_data == model[0], $sformatf("read order %08h", rd_data));
      if (model.size() > 0) void'(model.pop_front());
      nread++;
    end
  end

  task automatic wr(input logic [31:0] d);
    @(negedge wclk);
    wr_en   = 1;
    wr_data = d;
    @(negedge wclk);
    wr_en   = 0;
  endtask

  initial begin
    repeat (3) @(negedge wclk);
    wrst_n = 1; rrst_n = 1;
    repeat (3) @(negedge wclk);
    check(rd_empty && !wr_full && wr_count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < 20; i++) begin
      @(negedge wclk);
      wr_en = !wr_full;
      wr_data = 32'h100 + i;
      if (!wr_full) model.push_back(wr_data);
    end
    @(negedge wclk) wr_en = 0;
    check(wr_full && wr_count == 16 && model.size() == 16, "full at 16 words");
    repeat (6) @(negedge rclk);
    check(rd_count == 16 && !rd_empty, "read side sees 16 words");
    reading = 1;
    repeat (40) @(negedge rclk);
    check(rd_empty && nread == 16 && model.size() == 0, "drained");
    // streaming with random gaps
    for (int i = 0; i < 300; i++) begin
      @(negedge wclk);
      wr_en = !wr_full && ($urandom_range(0, 3) != 0);
      wr_data = $urandom;
      if (wr_en) model.push_back(wr_data);
    end
    @(negedge wclk) wr_en = 0;
    repeat (60) @(negedge rclk);
    check(model.size() == 0, "stream drained in order");
    // discard / commit
    reading = 0;
    wr_commit = 0;
    for (int i = 0; i < 5; i++) wr(32'hDEAD_0000 + i);
    repeat (8) @(negedge rclk);
    check(rd_empty, "uncommitted words invisible to the reader");
    check(wr_count == 5, "uncommitted words occupy space");
    @(negedge wclk) wr_discard = 1;
    @(negedge wclk) wr_discard = 0;
    check(wr_count == 0, "discard frees the space");
    for (int i = 0; i < 4; i++) begin
      model.push_back(32'hC0DE_0000 + i);
      wr(32'hC0DE_0000 + i);
    end
    @(negedge wclk) wr_commit = 1;
    @(negedge wclk);
    repeat (8) @(negedge rclk);
    check(rd_count == 4, "committed words visible");
    reading = 1;
    repeat (20) @(negedge rclk);
    check(model.size() == 0 && rd_empty, "committed words read, discarded ones never");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
