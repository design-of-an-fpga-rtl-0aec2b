// usb3_scrambler: 32-bit (four-symbol) scrambler / descrambler, one word per
// clock with one cycle of latency.
//
// Scrambling and descrambling are the same operation, so the PIPE module uses
// one instance per direction. The LFSR is the USB 3.0 one,
// G(X) = X^16 + X^5 + X^4 + X^3 + 1, seeded with 16'hFFFF. Symbols are handled
// in wire order (byte 0 first) with these rules:
//   * a COM (K28.5) symbol reseeds the LFSR and is passed unchanged;
//   * a SKP (K28.1) symbol is passed unchanged and does not advance the LFSR;
//   * any other K symbol is passed unchanged and advances the LFSR by 8 bits;
//   * a data symbol advances the LFSR by 8 bits and, when scr_en is high, is
//     XORed with the eight LFSR output bits (bit 0 first).
// Both ends therefore stay in step through unscrambled training sequences,
// whose COM symbols realign them. Only the polynomial and seed are from the
// USB 3.0 specification; the paper gives just the module's function.
module usb3_scrambler
  import usb3_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        scr_en,
  input  logic [31:0] in_data,
  input  logic [3:0]  in_k,
  output logic [31:0] out_data,
  output logic [3:0]  out_k
);

  logic [15:0] lfsr;
  logic [15:0] lfsr_next;
  logic [31:0] data_next;

  always_comb begin
    logic [15:0] l;
    logic [7:0]  sym;
    logic        fb;
    l         = lfsr;
    fb        = 1'b0;
    sym       = '0;
    data_next = in_data;
    for (int b = 0; b < 4; b++) begin
      sym = in_data[8*b +: 8];
      if (in_k[b] && sym == K_COM) begin
        l = 16'hFFFF;
      end else if (!(in_k[b] && sym == K_SKP)) begin
        for (int i = 0; i < 8; i++) begin
          if (!in_k[b] && scr_en) data_next[8*b + i] = sym[i] ^ l[15];
          fb = l[15];
          l  = {l[14:0], 1'b0} ^ (fb ? 16'h0039 : 16'h0000);
        end
      end
    end
    lfsr_next = l;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr     <= 16'hFFFF;
      out_data <= '0;
      out_k    <= '0;
    end else begin
      lfsr     <= lfsr_next;
      out_data <= data_next;
      out_k    <= in_k;
    end
  end

endmodule
