// tb_cif_crc -- self-checking test of the CIF CRC footer generator.
//
// The pixel FIFO and the CIF transmitter are modelled by the testbench: the
// FIFO side offers pixels from a queue (with random gaps), the transmitter
// side takes them with random back-pressure. For each bit depth and several
// frame sizes the stream leaving the module must equal the frame's pixels
// followed by one footer row carrying the independently computed CRC. With
// no gaps and no back-pressure a W x H frame must take exactly W*(H+1)
// clocks from start to done (one pixel per clock).
module tb_cif_crc;
  import ft_pkg::*;
  import tb_crc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  frame_cfg_t cfg;
  logic start, fifo_empty, fifo_rd_en, tx_wr_en, tx_rd_en, busy, done;
  pixel_t fifo_data, tx_data;
  logic [15:0] crc_out;
  pixel_t src [$];
  logic gap;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cif_crc dut (.*);

  assign fifo_empty = (src.size() == 0) || gap;
  assign fifo_data  = (src.size() != 0) ? src[0] : '0;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int w, int h, int bpp, bit stress);
    logic [23:0] px [];
    logic [15:0] crc;
    int n_out, cycles;
    px = new[w * h];
    foreach (px[i]) begin
      px[i] = $urandom & mask_of(bpp);
      src.push_back(px[i]);
    end
    crc = frame_crc(px, bpp);
    cfg = '{width: dim_t'(w), height: dim_t'(h), bpp: bpp_e'(bpp)};
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n_out = 0; cycles = 1;
    while (!done) begin
      gap      = stress && ($urandom % 3 == 0);
      tx_rd_en = stress ? ($urandom % 2 == 0) : 1'b1;
      #1;
      if (tx_wr_en && tx_rd_en) begin
        if (n_out < w * h) check("active pixel", tx_data, px[n_out]);
        else               check("footer pixel", tx_data, footer_px(bpp, crc, n_out - w * h));
        check("fifo pop", fifo_rd_en, n_out < w * h);
        n_out++;
      end
      @(posedge clk);
      #1;
      if (fifo_rd_en_q) void'(src.pop_front());
      @(negedge clk);
      if (!done) cycles++;
    end
    check("pixel count", n_out, w * (h + 1));
    check("crc_out", crc_out, crc);
    if (!stress) check("cycles", cycles, w * (h + 1));
    gap = 0; tx_rd_en = 0;
  endtask

  // Remember whether a pop happened in the clock that just ended.
  logic fifo_rd_en_q;
  always_ff @(posedge clk) fifo_rd_en_q <= fifo_rd_en;

  initial begin
    start = 0; tx_rd_en = 0; gap = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int bpp = 0; bpp < 3; bpp++) begin
      run_frame(8, 4, bpp, 0);
      run_frame(5, 3, bpp, 1);
      run_frame(16, 6, bpp, 1);
    end
    check("idle at end", busy, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
