// tb_ft_pkg -- self-checking test of the shared package.
//
// Checks the constants (24-bit pixel bus, CRC-16-CCITT polynomial 0x1021
// with initial value 0), the bit-depth encoding, the sizes of the packed
// structs, and the footer layout functions for every bit depth against the
// layout written out by hand: 8-bit frames carry the CRC high byte in
// footer pixel 0 and the low byte in pixel 1, 16- and 24-bit frames carry
// the whole CRC in the low 16 bits of pixel 0, all other footer bits are 0.
module tb_ft_pkg;
  import ft_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] crc;
    @(posedge clk);
    check("PIX_W", PIX_W, 24);
    check("CRC_POLY", CRC_POLY, 16'h1021);
    check("CRC_INIT", CRC_INIT, 16'h0000);
    check("pixel_t width", $bits(pixel_t), 24);
    check("frame_cfg_t width", $bits(frame_cfg_t), 2 * DIM_W + 2);
    check("lcd_status_t width", $bits(lcd_status_t), 16 + 16 + 1 + 16 + 16);
    check("BPP8", BPP8, 0);
    check("BPP16", BPP16, 1);
    check("BPP24", BPP24, 2);
    check("crc pixels 8", crc_pixels(BPP8), 2);
    check("crc pixels 16", crc_pixels(BPP16), 1);
    check("crc pixels 24", crc_pixels(BPP24), 1);
    for (int t = 0; t < 200; t++) begin
      crc = 16'($urandom);
      for (int idx = 0; idx < 6; idx++) begin
        int unsigned e8, e16;
        e8  = (idx == 0) ? crc[15:8] : (idx == 1) ? crc[7:0] : 0;
        e16 = (idx == 0) ? crc : 0;
        check("footer 8-bit", footer_pixel(BPP8, crc, dim_t'(idx)), e8);
        check("footer 16-bit", footer_pixel(BPP16, crc, dim_t'(idx)), e16);
        check("footer 24-bit", footer_pixel(BPP24, crc, dim_t'(idx)), e16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
