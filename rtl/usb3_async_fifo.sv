// usb3_async_fifo: dual-clock FIFO between user logic and the controller.
//
// The controller runs on a clock derived from the transceiver (TXOUTCLK
// through a PLL), so user logic in its own clock domain exchanges bulk data
// with it through FIFOs; the paper states that need but not the FIFO design.
// This one is the usual Gray-coded pointer FIFO: binary pointers with one
// extra wrap bit, Gray copies synchronised through two flip-flops into the
// other domain, full/empty computed from the synchronised Gray pointers.
// The read side is show-ahead: rd_data is the oldest word whenever rd_empty
// is low, and rd_en removes it. Fill levels are given in each domain
// (conservative: they lag the other side by the synchroniser delay).
// The write side can hold back words it has written: wr_commit makes all
// words written so far, including one written in the same cycle, visible to
// the reader; wr_discard drops the words written since the last commit. A
// writer that does not need this ties wr_commit high and wr_discard low.
// The controller uses it to keep a bulk-out packet that fails its CRC out of
// the FIFO.
// DEPTH = 2**ADDR_W words; ADDR_W = 11 (8 KB of 32-bit words) is this
// design's choice.
module usb3_async_fifo #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned ADDR_W = 11
) (
  input  logic              wr_clk,
  input  logic              wr_rst_n,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              wr_commit,
  input  logic              wr_discard,
  output logic              wr_full,
  output logic [ADDR_W:0]   wr_count,
  input  logic              rd_clk,
  input  logic              rd_rst_n,
  input  logic              rd_en,
  output logic [DATA_W-1:0] rd_data,
  output logic              rd_empty,
  output logic [ADDR_W:0]   rd_count
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  logic [ADDR_W:0] wbin, wcom, wgray, rbin, rgray;
  logic [ADDR_W:0] wbin_next;
  logic [ADDR_W:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [ADDR_W:0] bin2gray(input logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [ADDR_W:0] gray2bin(input logic [ADDR_W:0] g);
    logic [ADDR_W:0] b;
    b[ADDR_W] = g[ADDR_W];
    for (int i = int'(ADDR_W) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ------------------------------------------------------------ write side
  logic [ADDR_W:0] rbin_w;
  assign rbin_w   = gray2bin(rgray_w2);
  assign wr_count = wbin - rbin_w;
  assign wr_full  = (wr_count == (ADDR_W+1)'(DEPTH));

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[ADDR_W-1:0]] <= wr_data;
  end

  // wbin: next write address (speculative); wcom: last committed pointer
  assign wbin_next = (wr_en && !wr_full) ? wbin + 1 : wbin;

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wcom     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_discard) begin
        wbin <= wcom;
      end else begin
        wbin <= wbin_next;
        if (wr_commit) begin
          wcom  <= wbin_next;
          wgray <= bin2gray(wbin_next);
        end
      end
    end
  end

  // ------------------------------------------------------------- read side
  logic [ADDR_W:0] wbin_r;
  assign wbin_r   = gray2bin(wgray_r2);
  assign rd_count = wbin_r - rbin;
  assign rd_empty = (rd_count == '0);
  assign rd_data  = mem[rbin[ADDR_W-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1;
        rgray <= bin2gray(rbin + 1);
      end
    end
  end

endmodule
