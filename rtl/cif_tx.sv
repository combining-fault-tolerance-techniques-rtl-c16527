// cif_tx -- camera-interface (CIF) transmitter towards the VPU.
//
// Sends one frame of width x (height+1) pixels -- the active rows followed
// by the CRC footer row -- as a parallel video stream: a pixel clock
// (cif_pclk), a frame strobe (cif_vsync), a row strobe (cif_href) and a
// 24-bit data bus, of which 8- and 16-bit frames use the low bits. Each pixel
// slot lasts two system clocks: data and href change while pclk goes low,
// and pclk rises one clock later, where the receiver samples. VSYNC rises
// V_BLANK pixel-clock periods before the first row and falls V_BLANK periods
// after the last; H_BLANK periods with href low follow every row. If no pixel
// is offered when a row needs one, pclk simply stays low until it comes, so
// the stream never carries a stale pixel. The paper only names the CIF
// transmitter and its 8/16/24-bit depths; the timing above is this design's
// choice. H_BLANK and V_BLANK must be at least 1.
//
// Interface: start (when idle) samples cfg. px_valid/px_data/px_ready is a
// valid/ready stream (px_ready is the "rd_en" of the CIF CRC module);
// px_ready is high only in the launch clock of a row slot. done pulses when
// VSYNC has fallen. Peak rate is one pixel per two system clocks.
// Only the width and height of cfg are used: the pin timing is the same
// for every bit depth, and the whole 24-bit bus is driven as received (the
// receiver reads only the bits of the frame's depth).
module cif_tx
  import ft_pkg::*;
#(
  parameter int unsigned H_BLANK = 4,
  parameter int unsigned V_BLANK = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  frame_cfg_t cfg,
  input  logic       start,
  input  logic       px_valid,
  input  pixel_t     px_data,
  output logic       px_ready,
  output logic       cif_pclk,
  output logic       cif_vsync,
  output logic       cif_href,
  output pixel_t     cif_data,
  output logic       busy,
  output logic       done
);

  typedef enum logic [2:0] {S_IDLE, S_VFRONT, S_ROW, S_HBLANK, S_VBACK, S_END} state_e;

  localparam int unsigned BW = (H_BLANK > V_BLANK) ? $clog2(H_BLANK + 1) : $clog2(V_BLANK + 1);

  state_e     state;
  dim_t       width_q, height_q;   // geometry of the frame being sent
  dim_t       col, row;
  logic [BW-1:0] cnt;
  logic       launch;          // this clock starts a new pixel slot (pclk goes/stays low)

  assign busy     = (state != S_IDLE);
  assign px_ready = launch && (state == S_ROW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      width_q   <= '0;
      height_q  <= '0;
      col       <= '0;
      row       <= '0;
      cnt       <= '0;
      launch    <= 1'b0;
      cif_pclk  <= 1'b0;
      cif_vsync <= 1'b0;
      cif_href  <= 1'b0;
      cif_data  <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == S_IDLE) begin
        cif_pclk <= 1'b0;
        if (start) begin
          width_q  <= cfg.width;
          height_q <= cfg.height;
          col    <= '0;
          row    <= '0;
          cnt    <= '0;
          launch <= 1'b1;
          state  <= S_VFRONT;
        end
      end else if (!launch) begin
        // second half of a slot: rising edge, receiver samples
        cif_pclk <= 1'b1;
        launch   <= 1'b1;
      end else begin
        // first half of a slot: pclk low, drive the slot's content
        cif_pclk <= 1'b0;
        unique case (state)
          S_VFRONT: begin
            cif_vsync <= 1'b1;
            cif_href  <= 1'b0;
            cif_data  <= '0;
            launch    <= 1'b0;
            if (cnt == BW'(V_BLANK - 1)) begin
              cnt   <= '0;
              state <= S_ROW;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          S_ROW: if (px_valid) begin
            cif_href <= 1'b1;
            cif_data <= px_data;
            launch   <= 1'b0;
            if (col == width_q - 1'b1) begin
              col   <= '0;
              state <= S_HBLANK;
            end else begin
              col <= col + 1'b1;
            end
          end
          S_HBLANK: begin
            cif_href <= 1'b0;
            cif_data <= '0;
            launch   <= 1'b0;
            if (cnt == BW'(H_BLANK - 1)) begin
              cnt <= '0;
              if (row == height_q) begin   // footer row was the last
                row   <= '0;
                state <= S_VBACK;
              end else begin
                row   <= row + 1'b1;
                state <= S_ROW;
              end
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          S_VBACK: begin
            cif_href <= 1'b0;
            launch   <= 1'b0;
            if (cnt == BW'(V_BLANK - 1)) begin
              cnt   <= '0;
              state <= S_END;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          S_END: begin
            cif_vsync <= 1'b0;
            launch    <= 1'b0;
            done      <= 1'b1;
            state     <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
