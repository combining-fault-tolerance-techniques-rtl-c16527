// lcd_rx -- LCD-interface receiver for frames coming from the VPU.
//
// The VPU's LCD port drives a pixel clock, a frame strobe (VSYNC), a data
// enable (DE) and 24 data lines. All pins are brought into the system clock
// domain through a two-flop synchroniser; a rising edge of the synchronised
// pixel clock with DE high yields one pixel on px_data with a one-clock
// px_wr_en (the "wr_en" that feeds the LCD CRC module). VSYNC edges give sof
// and eof pulses. Because the pins are oversampled, the pixel clock must stay
// at or below a third of the system clock and data must be stable around its
// rising edge. The paper names the LCD receiver and states that it follows
// the same principles as the CIF link; this pin set and the oversampling
// scheme are this design's choice.
//
// Timing: px_wr_en, sof and eof come three system clocks after the pin edge.
module lcd_rx
  import ft_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   lcd_pclk,
  input  logic   lcd_vsync,
  input  logic   lcd_de,
  input  pixel_t lcd_data,
  output logic   px_wr_en,
  output pixel_t px_data,
  output logic   sof,
  output logic   eof
);

  typedef struct packed {
    logic   pclk;
    logic   vsync;
    logic   de;
    pixel_t data;
  } pins_t;

  pins_t s1, s2;
  logic  pclk_d, vsync_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1       <= '0;
      s2       <= '0;
      pclk_d   <= 1'b0;
      vsync_d  <= 1'b0;
      px_wr_en <= 1'b0;
      px_data  <= '0;
      sof      <= 1'b0;
      eof      <= 1'b0;
    end else begin
      s1       <= '{pclk: lcd_pclk, vsync: lcd_vsync, de: lcd_de, data: lcd_data};
      s2       <= s1;
      pclk_d   <= s2.pclk;
      vsync_d  <= s2.vsync;
      px_wr_en <= s2.pclk && !pclk_d && s2.de && s2.vsync;
      px_data  <= s2.data;
      sof      <= s2.vsync && !vsync_d;
      eof      <= !s2.vsync && vsync_d;
    end
  end

endmodule
