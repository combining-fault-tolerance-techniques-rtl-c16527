// tb_lcd_crc -- self-checking test of the LCD CRC checker.
//
// Frames are fed pixel by pixel (with random idle clocks) as the LCD
// receiver would deliver them: width x height active pixels and a footer row
// built with the reference CRC. For each bit depth the testbench sends a
// good frame, a frame with one active pixel corrupted, a frame whose footer
// CRC is corrupted, a frame cut short by the next start of frame and one cut
// short by the end of frame (VSYNC falling) in its footer row. It
// checks that only the active pixels are forwarded to the pixel FIFO, the
// crc_done / crc_cmp result, the CRCs in the status registers and the
// good/bad frame counters.
module tb_lcd_crc;
  import ft_pkg::*;
  import tb_crc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  frame_cfg_t cfg;
  logic sof, eof, in_wr_en, out_wr_en, crc_done, crc_cmp;
  pixel_t in_data, out_data;
  lcd_status_t status;
  pixel_t fwd_q [$];
  int n_done = 0, n_ok = 0, n_bad = 0;
  bit cut_pending = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lcd_crc dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_wr_en) fwd_q.push_back(out_data);
    if (crc_done) begin
      n_done++;
      if (crc_cmp) n_ok++; else n_bad++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(pixel_t p);
    while ($urandom % 3 == 0) @(negedge clk);
    in_wr_en = 1; in_data = p;
    @(negedge clk);
    in_wr_en = 0; in_data = $urandom;   // junk while idle
  endtask

  // kind: 0 good, 1 corrupted pixel, 2 corrupted footer, 3 cut short by
  // the next sof, 4 cut short by eof in the footer row
  task automatic frame(int w, int h, int bpp, int kind);
    logic [23:0] px [];
    logic [15:0] crc;
    int ok0 = n_ok, bad0 = n_bad;
    px = new[w * h];
    foreach (px[i]) px[i] = $urandom & mask_of(bpp);
    crc = frame_crc(px, bpp);
    cfg = '{width: dim_t'(w), height: dim_t'(h), bpp: bpp_e'(bpp)};
    sof = 1; @(negedge clk); sof = 0;
    @(negedge clk);
    if (cut_pending) begin
      // this start of frame cut the previous frame short: counted as bad
      check("cut frame bad", n_bad, bad0 + 1);
      check("cut frame last_ok", status.last_ok, 0);
      cut_pending = 0;
      bad0 = n_bad;
    end
    fwd_q.delete();
    foreach (px[i]) begin
      pixel_t p = px[i];
      if (kind == 1 && i == (w * h) / 2) p ^= 24'h000001;
      push(p);
      if (kind == 3 && i == w) break;
    end
    if (kind == 3) begin
      cut_pending = 1;   // the next frame's start of frame will cut it
      return;
    end
    for (int c = 0; c < w; c++) begin
      pixel_t f = footer_px(bpp, crc, c);
      if (kind == 2 && c == 0) f ^= 24'h000010;
      if (kind == 4 && c == w - 1) break;
      push(f);
    end
    if (kind == 4) begin
      eof = 1; @(negedge clk); eof = 0;
    end
    repeat (3) @(negedge clk);
    check("forwarded count", fwd_q.size(), w * h);
    foreach (fwd_q[i]) if (i < w * h) check("forwarded pixel", fwd_q[i], (kind == 1 && i == (w * h) / 2) ? px[i] ^ 24'h1 : px[i]);
    check("ok count", n_ok, ok0 + (kind == 0));
    check("bad count", n_bad, bad0 + (kind != 0));
    check("verdicts", n_ok + n_bad, ok0 + bad0 + 1);
    check("status ok reg", status.frames_ok, n_ok);
    check("status bad reg", status.frames_bad, n_bad);
    check("last_ok", status.last_ok, kind == 0);
    if (kind == 0 || kind == 2) check("crc_calc", status.crc_calc, crc);
    if (kind == 0) check("crc_rx", status.crc_rx, crc);
  endtask

  initial begin
    sof = 0; eof = 0; in_wr_en = 0; in_data = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int bpp = 0; bpp < 3; bpp++) begin
      frame(6, 4, bpp, 0);
      frame(6, 4, bpp, 1);
      frame(5, 3, bpp, 2);
      frame(4, 3, bpp, 3);
      frame(7, 2, bpp, 0);
      frame(6, 3, bpp, 4);
      frame(3, 2, bpp, 0);
    end
    check("frames compared", n_done, 21);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
