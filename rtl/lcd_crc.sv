// lcd_crc -- checks the CRC-16 footer of every frame received over LCD.
//
// Pixels from the LCD receiver arrive one per clock (in_wr_en). During the
// active part of the frame (width x height pixels) each pixel is written on
// to the receive pixel FIFO and absorbed by three CRC16 calculators in
// parallel (8-, 16- and 24-bit, fed with pixel[7:0], [15:0] and [23:0]). The
// counter-based Frame Footer FSM then takes the footer row, which is not
// forwarded: it extracts the received CRC from the first pixel(s) of the
// row for the configured bit depth (same layout as ft_pkg::footer_pixel),
// and one clock after the row's last pixel compares it with the computed
// CRC. The result is given on crc_cmp with a one-clock crc_done strobe and
// is kept in the status registers. The three calculators, the footer FSM,
// the comparison and its report to status registers are the paper's; the
// register contents and the treatment of a frame cut short (VSYNC falling, or
// a new sof, before its footer is complete: counted as a bad frame, with a
// crc_done strobe and crc_cmp low) are this design's choice.
//
// Interface: sof samples cfg and restarts the FSM, eof ends the frame;
// pixels outside a frame are ignored. out_data is in_data itself, unregistered:
// the module decides only which pixels are written on (out_wr_en), so the
// footer check adds no latency to the pixel stream. out_wr_en has no
// back-pressure (the FIFO must keep up; its overflow flag tells if not).
module lcd_crc
  import ft_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  frame_cfg_t  cfg,
  input  logic        sof,
  input  logic        eof,
  input  logic        in_wr_en,
  input  pixel_t      in_data,
  output logic        out_wr_en,
  output pixel_t      out_data,
  output logic        crc_done,
  output logic        crc_cmp,
  output lcd_status_t status
);

  typedef enum logic [1:0] {S_IDLE, S_ACTIVE, S_FOOTER, S_CHECK} state_e;

  state_e      state;
  frame_cfg_t  cfg_q;
  dim_t        col, row;
  logic        crc_en;
  logic [15:0] crc8, crc16, crc24, crc_sel, crc_rx;

  assign crc_en    = (state == S_ACTIVE) && in_wr_en && !sof;
  assign out_wr_en = crc_en;
  assign out_data  = in_data;

  crc16_par #(.DW(8))  u_crc8  (.clk, .rst_n, .clr(sof), .en(crc_en), .din(in_data[7:0]),  .crc(crc8));
  crc16_par #(.DW(16)) u_crc16 (.clk, .rst_n, .clr(sof), .en(crc_en), .din(in_data[15:0]), .crc(crc16));
  crc16_par #(.DW(24)) u_crc24 (.clk, .rst_n, .clr(sof), .en(crc_en), .din(in_data),       .crc(crc24));

  always_comb begin
    unique case (cfg_q.bpp)
      BPP8:    crc_sel = crc8;
      BPP16:   crc_sel = crc16;
      default: crc_sel = crc24;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg_q    <= '0;
      col      <= '0;
      row      <= '0;
      crc_rx   <= '0;
      crc_done <= 1'b0;
      crc_cmp  <= 1'b0;
      status   <= '0;
    end else begin
      crc_done <= 1'b0;
      if (sof) begin
        if (state != S_IDLE) begin      // previous frame cut short
          crc_done          <= 1'b1;
          crc_cmp           <= 1'b0;
          status.last_ok    <= 1'b0;
          status.frames_bad <= status.frames_bad + 1'b1;
        end
        cfg_q  <= cfg;
        col    <= '0;
        row    <= '0;
        crc_rx <= '0;
        state  <= S_ACTIVE;
      end else if (eof && (state == S_ACTIVE || state == S_FOOTER)) begin
        // VSYNC fell before the footer row was complete
        crc_done          <= 1'b1;
        crc_cmp           <= 1'b0;
        status.last_ok    <= 1'b0;
        status.frames_bad <= status.frames_bad + 1'b1;
        state             <= S_IDLE;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_ACTIVE: if (in_wr_en) begin
            if (col == cfg_q.width - 1'b1) begin
              col <= '0;
              if (row == cfg_q.height - 1'b1) begin
                row   <= '0;
                state <= S_FOOTER;
              end else begin
                row <= row + 1'b1;
              end
            end else begin
              col <= col + 1'b1;
            end
          end
          S_FOOTER: if (in_wr_en) begin
            if (cfg_q.bpp == BPP8) begin
              if (col == 0)      crc_rx[15:8] <= in_data[7:0];
              else if (col == 1) crc_rx[7:0]  <= in_data[7:0];
            end else if (col == 0) begin
              crc_rx <= in_data[15:0];
            end
            if (col == cfg_q.width - 1'b1) begin
              col   <= '0;
              state <= S_CHECK;
            end else begin
              col <= col + 1'b1;
            end
          end
          S_CHECK: begin
            crc_done        <= 1'b1;
            crc_cmp         <= (crc_rx == crc_sel);
            status.crc_calc <= crc_sel;
            status.crc_rx   <= crc_rx;
            status.last_ok  <= (crc_rx == crc_sel);
            if (crc_rx == crc_sel) status.frames_ok  <= status.frames_ok + 1'b1;
            else                   status.frames_bad <= status.frames_bad + 1'b1;
            state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
