// ft_pkg -- types and constants shared by the fault-tolerant FPGA-VPU link
// and the TMR accelerator.
//
// Pixels travel on a 24-bit bus whatever the frame's bit depth; an 8- or
// 16-bit frame uses the low bits. Every frame is protected by a CRC-16-CCITT
// (polynomial 0x1021, initial value 0x0000) carried in one extra footer row.
// The 24-bit bus, the three bit depths and the CRC parameters follow the
// paper; the enum encoding, the 12-bit frame dimensions (up to 4095, enough
// for the 2048x2048 frames the link is meant for) and the status-register
// layout are this design's own choices.
package ft_pkg;

  localparam int unsigned PIX_W = 24;        // pixel bus width
  localparam logic [15:0] CRC_POLY = 16'h1021;
  localparam logic [15:0] CRC_INIT = 16'h0000;
  localparam int unsigned DIM_W = 12;        // width / height counters

  typedef logic [PIX_W-1:0] pixel_t;
  typedef logic [DIM_W-1:0] dim_t;

  // Frame bit depth.
  typedef enum logic [1:0] {
    BPP8  = 2'd0,
    BPP16 = 2'd1,
    BPP24 = 2'd2
  } bpp_e;

  // Run-time frame geometry. height counts active rows only: every frame
  // on the wire has height+1 rows, the last one being the CRC footer.
  typedef struct packed {
    dim_t width;
    dim_t height;
    bpp_e bpp;
  } frame_cfg_t;

  // Status registers of the LCD receive path.
  typedef struct packed {
    logic [15:0] crc_calc;     // CRC computed over the last frame
    logic [15:0] crc_rx;       // CRC found in the last footer
    logic        last_ok;      // last comparison matched
    logic [15:0] frames_ok;    // frames whose CRC matched
    logic [15:0] frames_bad;   // frames whose CRC did not match or were cut short
  } lcd_status_t;

  // Number of footer pixels that carry the CRC for a bit depth.
  function automatic int unsigned crc_pixels(bpp_e bpp);
    return (bpp == BPP8) ? 2 : 1;
  endfunction

  // Footer pixel number idx (0-based) for a CRC value: 8-bit frames send the
  // high byte first, 16- and 24-bit frames send the CRC in pixel 0's low
  // 16 bits; every other footer pixel is zero.
  function automatic pixel_t footer_pixel(bpp_e bpp, logic [15:0] crc, dim_t idx);
    pixel_t p = '0;
    if (bpp == BPP8) begin
      if (idx == 0) p[7:0] = crc[15:8];
      else if (idx == 1) p[7:0] = crc[7:0];
    end else if (idx == 0) begin
      p[15:0] = crc;
    end
    return p;
  endfunction

endpackage
