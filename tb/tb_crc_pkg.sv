// tb_crc_pkg -- reference models shared by the testbenches.
//
// Bit-serial CRC-16-CCITT (x^16 + x^12 + x^5 + 1, initial 0, MSB first) and
// the CRC footer layout: 8-bit frames carry CRC[15:8] in footer pixel 0 and
// CRC[7:0] in pixel 1, 16- and 24-bit frames carry the CRC in the low 16 bits
// of pixel 0; all other footer pixels are zero.
package tb_crc_pkg;

  function automatic logic [15:0] crc_bits(logic [15:0] c, logic [23:0] d, int n);
    for (int i = n - 1; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ d[i];
      c  = c << 1;
      if (fb) begin
        c[12] = ~c[12];
        c[5]  = ~c[5];
        c[0]  = ~c[0];
      end
    end
    return c;
  endfunction

  // bpp: 0 = 8 bit, 1 = 16 bit, 2 = 24 bit
  function automatic int bits_of(int bpp);
    return (bpp == 0) ? 8 : (bpp == 1) ? 16 : 24;
  endfunction

  function automatic logic [23:0] mask_of(int bpp);
    return (bpp == 0) ? 24'h0000ff : (bpp == 1) ? 24'h00ffff : 24'hffffff;
  endfunction

  function automatic logic [15:0] frame_crc(logic [23:0] px [], int bpp);
    logic [15:0] c = 16'h0;
    foreach (px[i]) c = crc_bits(c, px[i], bits_of(bpp));
    return c;
  endfunction

  function automatic logic [23:0] footer_px(int bpp, logic [15:0] crc, int idx);
    if (bpp == 0) return (idx == 0) ? {16'h0, crc[15:8]} : (idx == 1) ? {16'h0, crc[7:0]} : 24'h0;
    return (idx == 0) ? {8'h0, crc} : 24'h0;
  endfunction

endpackage
