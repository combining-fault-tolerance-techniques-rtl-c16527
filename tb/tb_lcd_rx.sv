// tb_lcd_rx -- self-checking test of the LCD receiver.
//
// The testbench drives the LCD pins like the VPU does: data and DE change
// with the falling pixel-clock edge, the pixel clock runs at a quarter or a
// sixth of the system clock, VSYNC frames the rows. Every pixel delivered on
// px_wr_en must be the next one sent, no pixel may be delivered outside
// DE, and sof/eof must pulse once per frame.
module tb_lcd_rx;
  import ft_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic lcd_pclk, lcd_vsync, lcd_de, px_wr_en, sof, eof;
  pixel_t lcd_data, px_data;
  pixel_t exp_q [$];
  int n_sof = 0, n_eof = 0, n_px = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lcd_rx dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && sof) n_sof++;
    if (rst_n && eof) n_eof++;
    if (rst_n && px_wr_en) begin
      n_px++;
      if (exp_q.size() == 0) check("unexpected pixel", 1, 0);
      else check("pixel", px_data, exp_q.pop_front());
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One pixel-clock period: low half with new pin values, then high half.
  task automatic slot(int hp, logic vs, logic de, pixel_t d);
    lcd_pclk = 0; lcd_vsync = vs; lcd_de = de; lcd_data = d;
    repeat (hp) @(negedge clk);
    lcd_pclk = 1;
    repeat (hp) @(negedge clk);
  endtask

  task automatic frame(int w, int h, int hp);
    for (int i = 0; i < 3; i++) slot(hp, 1, 0, $urandom);   // junk data outside DE
    for (int r = 0; r < h; r++) begin
      for (int c = 0; c < w; c++) begin
        pixel_t p = $urandom;
        exp_q.push_back(p);
        slot(hp, 1, 1, p);
      end
      for (int i = 0; i < 2; i++) slot(hp, 1, 0, $urandom);
    end
    slot(hp, 0, 0, 0);
    repeat (8) @(negedge clk);
  endtask

  initial begin
    lcd_pclk = 0; lcd_vsync = 0; lcd_de = 0; lcd_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(5, 3, 2);
    frame(4, 4, 3);
    frame(1, 1, 2);
    check("sof count", n_sof, 3);
    check("eof count", n_eof, 3);
    check("pixel count", n_px, 5 * 3 + 4 * 4 + 1);
    check("nothing left", exp_q.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
