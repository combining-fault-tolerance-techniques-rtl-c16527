// cif_crc -- appends a CRC-16 footer row to every frame sent over CIF.
//
// While a frame is active the module takes one pixel per clock from the
// transmit pixel FIFO and forwards it to the CIF transmitter. Three CRC16
// calculators (8-, 16- and 24-bit wide, fed with pixel[7:0], pixel[15:0] and
// pixel[23:0]) absorb every forwarded pixel in parallel, so the CRC is ready
// the clock after the last active pixel, for whichever bit depth the frame
// has. The counter-based Frame Footer FSM then selects the CRC of the
// configured depth and sends one extra row of width pixels: the CRC in the
// first pixel(s), zeros elsewhere (see ft_pkg::footer_pixel). This structure
// -- three parallel calculators, a counter-based footer FSM, footer row of
// zero-padded pixels -- is the paper's; the pixel ordering of the CRC inside
// the footer and the handshakes are this design's choice.
//
// Interface: start (in IDLE) samples cfg and begins a frame. The output
// side is valid/ready: tx_wr_en says tx_data holds a pixel, the transmitter's
// tx_rd_en says it takes it this clock. fifo_rd_en pops the FIFO in the same
// clock a pixel is taken, so a pixel moves FIFO -> transmitter without
// latency. A frame of W x H pixels takes W*(H+1) transfers; done pulses one
// clock after the last footer pixel and crc_out then holds the CRC sent.
module cif_crc
  import ft_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  frame_cfg_t cfg,
  input  logic       start,
  // transmit pixel FIFO (first-word-fall-through)
  input  logic       fifo_empty,
  input  pixel_t     fifo_data,
  output logic       fifo_rd_en,
  // CIF transmitter
  output pixel_t     tx_data,
  output logic       tx_wr_en,
  input  logic       tx_rd_en,
  // status
  output logic       busy,
  output logic       done,
  output logic [15:0] crc_out
);

  typedef enum logic [1:0] {S_IDLE, S_ACTIVE, S_FOOTER} state_e;

  state_e     state;
  frame_cfg_t cfg_q;
  dim_t       col, row;
  logic       take;            // transmitter takes the offered pixel
  logic       crc_clr, crc_en;
  logic [15:0] crc8, crc16, crc24, crc_sel;

  crc16_par #(.DW(8))  u_crc8  (.clk, .rst_n, .clr(crc_clr), .en(crc_en), .din(fifo_data[7:0]),  .crc(crc8));
  crc16_par #(.DW(16)) u_crc16 (.clk, .rst_n, .clr(crc_clr), .en(crc_en), .din(fifo_data[15:0]), .crc(crc16));
  crc16_par #(.DW(24)) u_crc24 (.clk, .rst_n, .clr(crc_clr), .en(crc_en), .din(fifo_data),       .crc(crc24));

  always_comb begin
    unique case (cfg_q.bpp)
      BPP8:    crc_sel = crc8;
      BPP16:   crc_sel = crc16;
      default: crc_sel = crc24;
    endcase
  end

  always_comb begin
    tx_wr_en = 1'b0;
    tx_data  = '0;
    unique case (state)
      S_ACTIVE: begin
        tx_wr_en = !fifo_empty;
        tx_data  = fifo_data;
      end
      S_FOOTER: begin
        tx_wr_en = 1'b1;
        tx_data  = footer_pixel(cfg_q.bpp, crc_sel, col);
      end
      default: ;
    endcase
  end

  assign take       = tx_wr_en && tx_rd_en;
  assign fifo_rd_en = (state == S_ACTIVE) && take;
  assign crc_en     = fifo_rd_en;
  assign crc_clr    = (state == S_IDLE) && start;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cfg_q   <= '0;
      col     <= '0;
      row     <= '0;
      done    <= 1'b0;
      crc_out <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          col   <= '0;
          row   <= '0;
          state <= S_ACTIVE;
        end
        S_ACTIVE: if (take) begin
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
        S_FOOTER: if (take) begin
          if (col == cfg_q.width - 1'b1) begin
            col     <= '0;
            state   <= S_IDLE;
            done    <= 1'b1;
            crc_out <= crc_sel;
          end else begin
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
