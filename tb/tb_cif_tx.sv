// tb_cif_tx -- self-checking test of the CIF transmitter.
//
// Pixels are offered from a queue, with random gaps in one pass. A pin-level
// monitor samples cif_data on every rising edge of cif_pclk while HREF is
// high and VSYNC is high, splits the stream into rows at HREF's falling edge
// and checks: number of rows (height + 1, the footer row included), pixels
// per row, every pixel value, VSYNC low outside the frame, and, without
// gaps, the frame duration of 2 * (2*V_BLANK + (H+1)*(W+H_BLANK)) + 2 clocks.
module tb_cif_tx;
  import ft_pkg::*;

  localparam int HB = 3, VB = 2;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  frame_cfg_t cfg;
  logic start, px_valid, px_ready, cif_pclk, cif_vsync, cif_href, busy, done;
  pixel_t px_data, cif_data;
  pixel_t src [$];
  logic gap;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cif_tx #(.H_BLANK(HB), .V_BLANK(VB)) dut (.*);

  assign px_valid = (src.size() != 0) && !gap;
  assign px_data  = (src.size() != 0) ? src[0] : '0;

  // The transmitter takes the head at a rising clock edge; the queue is
  // popped half a clock later so the head stays stable around the edge.
  logic take_q = 1'b0;
  always @(posedge clk) take_q <= px_valid && px_ready;
  always @(negedge clk) if (take_q) void'(src.pop_front());

  // Pin monitor.
  pixel_t got [$];
  int row_len [$];
  int cur_len = 0;
  logic href_d = 0;
  always @(posedge cif_pclk) begin
    if (cif_href && cif_vsync) begin
      got.push_back(cif_data);
      cur_len++;
    end
  end
  always @(posedge clk) begin
    href_d <= cif_href;
    if (href_d && !cif_href) begin
      row_len.push_back(cur_len);
      cur_len = 0;
    end
  end

  task automatic check(string what, logic [31:0] got_v, logic [31:0] exp);
    checks++;
    if (got_v !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got_v, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int w, int h, bit stress);
    pixel_t px [$];
    int cycles;
    got.delete(); row_len.delete();
    for (int i = 0; i < w * (h + 1); i++) begin
      px.push_back($urandom);
      src.push_back(px[i]);
    end
    cfg = '{width: dim_t'(w), height: dim_t'(h), bpp: BPP24};
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check("vsync rises later", cif_vsync, 0);
    cycles = 1;
    while (!done) begin
      gap = stress && ($urandom % 4 == 0);
      @(negedge clk);
      cycles++;
    end
    check("vsync low at end", cif_vsync, 0);
    check("rows", row_len.size(), h + 1);
    foreach (row_len[r]) check("row length", row_len[r], w);
    check("pixels", got.size(), w * (h + 1));
    foreach (got[i]) if (i < px.size()) check("pixel", got[i], px[i]);
    if (!stress) check("frame clocks", cycles, 2 * (2 * VB + (h + 1) * (w + HB)) + 2);
    gap = 0;
  endtask

  initial begin
    start = 0; gap = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle pins", {cif_vsync, cif_href, cif_pclk}, 0);
    run_frame(6, 3, 0);
    run_frame(7, 4, 1);
    run_frame(1, 1, 0);
    check("queue drained", src.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
