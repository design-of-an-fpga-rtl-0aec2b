// tb_usb3_ref_pkg: reference models used by the testbenches, written apart
// from the RTL so that the checks do not reuse the code they check.
//   ref_scr     scrambles or descrambles one 32-bit word, returning the new
//               LFSR state in bits [47:32]; its first 15 output bytes from the
//               seed are the well-known FF 17 C0 14 B2 E7 02 82 72 6E 28 A6
//               BE 6D BF (the data symbols of TSEQ).
//   ref_crc5 / ref_crc16 / ref_crc32   CRCs as this controller defines them.
//   ref_lcw     link command / link control word with CRC-5.
package tb_usb3_ref_pkg;

  function automatic logic [47:0] ref_scr(input logic [15:0] lfsr_in, input logic [31:0] d,
                                          input logic [3:0] k, input logic en);
    logic [15:0] s;
    logic [31:0] o;
    s = lfsr_in;
    o = d;
    for (int b = 0; b < 4; b++) begin
      logic [7:0] sym;
      sym = d[8*b +: 8];
      if (k[b] && sym == 8'hBC) s = 16'hFFFF;
      else if (k[b] && sym == 8'h3C) s = s;
      else begin
        for (int i = 0; i < 8; i++) begin
          logic top;
          top = s[15];
          if (!k[b] && en) o[8*b+i] = o[8*b+i] ^ top;
          // x^16 + x^5 + x^4 + x^3 + 1
          s = {s[14:5], s[4] ^ top, s[3] ^ top, s[2] ^ top, s[1:0], top};
        end
      end
    end
    return {s, o};
  endfunction

  function automatic logic [4:0] ref_crc5(input logic [10:0] d);
    logic [4:0] r;
    r = '1;
    for (int i = 0; i < 11; i++) begin
      logic m;
      m = r[4] ^ d[i];
      r = {r[3], r[2], r[1] ^ m, r[0], m};
    end
    return ~r;
  endfunction

  function automatic logic [15:0] ref_lcw(input logic [10:0] info);
    return {ref_crc5(info), info};
  endfunction

  function automatic logic [15:0] ref_crc16(input logic [95:0] d);
    logic [15:0] r;
    r = '1;
    for (int i = 0; i < 96; i++) begin
      logic m;
      m = r[15] ^ d[i];
      r = r << 1;
      if (m) r = r ^ 16'b0001_0000_0000_1011;
    end
    return ~r;
  endfunction

  function automatic logic [31:0] ref_crc32(input logic [31:0] words[$]);
    logic [31:0] r;
    r = '1;
    foreach (words[j]) begin
      for (int i = 0; i < 32; i++) begin
        logic m;
        m = r[0] ^ words[j][i];
        r = r >> 1;
        if (m) r = r ^ 32'hEDB88320;
      end
    end
    return ~r;
  endfunction

endpackage
