// crc16_par -- CRC-16-CCITT over one DW-bit word per clock.
//
// The calculator is the serial linear-feedback shift register of the
// polynomial x^16 + x^12 + x^5 + 1 (0x1021) unrolled DW times, so a whole
// pixel is absorbed in one clock. The word enters MSB first and the register
// is neither reflected nor complemented (CRC-16/XMODEM convention); the
// polynomial and the initial value 0x0000 follow the paper, the bit order is
// this design's choice. The link instantiates it three times, with DW = 8,
// 16 and 24, one per frame bit depth.
//
// Interface: clr reloads the initial value (priority over en); en absorbs
// din. crc is the register itself, so the CRC of a word stream is visible
// one clock after its last word.
module crc16_par
  import ft_pkg::*;
#(
  parameter int unsigned DW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [DW-1:0] din,
  output logic [15:0]   crc
);

  // Next register value after shifting in all DW bits, MSB first.
  function automatic logic [15:0] crc_next(logic [15:0] c, logic [DW-1:0] d);
    logic [15:0] r = c;
    for (int i = DW - 1; i >= 0; i--) begin
      logic fb;
      fb = r[15] ^ d[i];
      r  = {r[14:0], 1'b0} ^ (fb ? CRC_POLY : 16'h0000);
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   crc <= CRC_INIT;
    else if (clr) crc <= CRC_INIT;
    else if (en)  crc <= crc_next(crc, din);
  end

endmodule
