// tb_ft_pl_top_full -- full-size frames through the design at its defaults.
//
// ft_pl_top with every parameter at its default (2048-deep FIFOs, 16-tap
// accelerator, one-second watchdog) exchanges with the behavioural VPU the
// two frame formats the link is meant for: 2048 x 2048 frames of 24-bit
// pixels and 1024 x 1024 frames of 16-bit pixels. Each frame goes out over
// CIF, the VPU checks its footer CRC and returns the bit-inverted frame over
// LCD. The testbench checks the CRC seen by the VPU, the LCD CRC verdict,
// every returned pixel, the CIF transfer time (two clocks per pixel plus
// blanking) and that no FIFO overflowed.
module tb_ft_pl_top_full;
  import ft_pkg::*;
  import tb_crc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  frame_cfg_t cfg;
  logic tx_start, txp_wr_en, txp_full, txp_overflow, tx_busy, tx_done;
  pixel_t txp_data, cif_data, lcd_data, rxp_data;
  logic [15:0] tx_crc;
  logic cif_pclk, cif_vsync, cif_href, lcd_pclk, lcd_vsync, lcd_de;
  logic rxp_rd_en, rxp_empty, rxp_overflow, crc_done, crc_cmp;
  lcd_status_t lcd_status;
  logic [2:0] acc_in_valid, acc_in_mismatch, acc_out_mismatch, dpr_req, dpr_done;
  logic [2:0][15:0] acc_in_data;
  logic acc_out_valid;
  logic signed [35:0] acc_out_data;
  logic [15:0] acc_masked_count, vpu_wd_count;
  logic vpu_heartbeat, vpu_reset, vpu_wd_expired;

  ft_pl_top dut (.*);

  vpu_model #(.HP(2), .HB_PERIOD(1000)) vpu (
    .clk, .cfg, .cif_pclk, .cif_vsync, .cif_href, .cif_data,
    .lcd_pclk, .lcd_vsync, .lcd_de, .lcd_data, .heartbeat(vpu_heartbeat)
  );

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Pixel n of a test frame: a cheap hash, so no table is needed.
  function automatic pixel_t pix(int n, logic [23:0] mask);
    return pixel_t'((n * 32'h9E3779B1) ^ (n >> 7)) & mask;
  endfunction

  int n_total = 0, n_sent = 0, n_rx = 0, n_rx_bad = 0;
  logic [23:0] mask = '1;

  always @(negedge clk) begin
    txp_wr_en = 0;
    if (rst_n && n_sent < n_total && !txp_full) begin
      txp_wr_en = 1;
      txp_data  = pix(n_sent, mask);
      n_sent++;
    end
  end

  always @(negedge clk) begin
    rxp_rd_en = 0;
    if (rst_n && !rxp_empty) begin
      rxp_rd_en = 1;
      if (rxp_data != (~pix(n_rx, mask) & mask)) n_rx_bad++;
      n_rx++;
    end
  end

  initial begin
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int w, int h, int bpp);
    longint cycles;
    logic [23:0] px [];
    int ok0 = vpu.cif_ok, good0 = int'(lcd_status.frames_ok);
    mask = mask_of(bpp);
    cfg = '{width: dim_t'(w), height: dim_t'(h), bpp: bpp_e'(bpp)};
    n_sent = 0; n_rx = 0; n_rx_bad = 0; n_total = w * h;
    repeat (10) @(negedge clk);
    tx_start = 1;
    @(negedge clk); tx_start = 0;
    cycles = 1;
    while (!tx_done) begin @(negedge clk); cycles++; end
    // 2 clocks per pixel slot, 4 + 4 VSYNC blanking and 4 HREF blanking slots per row
    check("CIF frame clocks", cycles, 2 * (8 + (h + 1) * (w + 4)) + 2);
    px = new[w * h];
    foreach (px[i]) px[i] = pix(i, mask);
    check("tx crc", tx_crc, frame_crc(px, bpp));
    while (!crc_done) @(negedge clk);
    check("lcd crc verdict", crc_cmp, 1);
    repeat (4) @(negedge clk);
    check("vpu CRC check ok", vpu.cif_ok, ok0 + 1);
    check("vpu CRC check bad", vpu.cif_bad, 0);
    check("good frames", lcd_status.frames_ok, good0 + 1);
    check("pixels returned", n_rx, w * h);
    check("pixels wrong", n_rx_bad, 0);
    check("no overflow", {txp_overflow, rxp_overflow}, 0);
    $display("frame %0dx%0d, %0d-bit: CIF %0d clocks, CRC %h", w, h, bits_of(bpp), cycles, tx_crc);
  endtask

  initial begin
    tx_start = 0; acc_in_valid = 0; acc_in_data = '0; dpr_done = 0;
    txp_wr_en = 0; txp_data = 0; rxp_rd_en = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2048, 2048, 2);
    run(1024, 1024, 1);
    check("VPU never reset", vpu_wd_count, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
