// ft_pl_top -- programmable-logic side of the fault-tolerant FPGA-VPU node.
//
// The FPGA sends payload frames to the VPU over CIF and gets the VPU's
// results back over LCD. Both directions carry one extra footer row per
// frame holding a CRC-16-CCITT of the frame, so either end can tell a
// corrupted transfer:
//
//   txp_* -> pixel_fifo -> cif_crc (3 x crc16_par + footer FSM) -> cif_tx -> CIF pins
//   LCD pins -> lcd_rx -> lcd_crc (3 x crc16_par + footer FSM) -> pixel_fifo -> rxp_*
//
// Beside the link sit the benchmark accelerator under triple modular
// redundancy (tmr_fir: input voter, three FIR replicas, output voter, with a
// request for partial reconfiguration of a replica that keeps failing) and
// a watchdog that resets the VPU when its status messages stop. The
// configuration-memory scrubber, the ICAP/HWICAP reconfiguration path, the
// AXI and UART peripherals and the ARM software are vendor parts or
// software; their signals are ports of this module: the accelerator's
// three input copies and voted output (AXI side), dpr_req/dpr_done
// (reconfiguration handshake) and vpu_heartbeat (one strobe per status
// message received over UART).
//
// Timing: one pixel per clock through the CRC modules, one pixel per two
// clocks on the CIF pins, LCD pixel clock at most a third of clk. tx_start
// starts a CIF frame of cfg.width x (cfg.height+1) pixels; the same cfg
// describes frames received on LCD. The structure follows the paper; widths,
// depths, blanking and timeouts are this design's choices.
module ft_pl_top
  import ft_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH  = 2048,
  parameter int unsigned H_BLANK     = 4,
  parameter int unsigned V_BLANK     = 4,
  parameter int unsigned ACC_DW      = 16,
  parameter int unsigned ACC_CW      = 16,
  parameter int unsigned ACC_TAPS    = 16,
  parameter int unsigned PERM_THRESH = 32,
  parameter int unsigned WD_TIMEOUT  = 100_000_000,
  parameter int unsigned WD_RST_LEN  = 16,
  localparam int unsigned ACC_OW     = ACC_DW + ACC_CW + $clog2(ACC_TAPS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  frame_cfg_t                 cfg,
  // frames to the VPU
  input  logic                       tx_start,
  input  logic                       txp_wr_en,
  input  pixel_t                     txp_data,
  output logic                       txp_full,
  output logic                       txp_overflow,
  output logic                       tx_busy,
  output logic                       tx_done,
  output logic [15:0]                tx_crc,
  output logic                       cif_pclk,
  output logic                       cif_vsync,
  output logic                       cif_href,
  output pixel_t                     cif_data,
  // frames from the VPU
  input  logic                       lcd_pclk,
  input  logic                       lcd_vsync,
  input  logic                       lcd_de,
  input  pixel_t                     lcd_data,
  input  logic                       rxp_rd_en,
  output pixel_t                     rxp_data,
  output logic                       rxp_empty,
  output logic                       rxp_overflow,
  output logic                       crc_done,
  output logic                       crc_cmp,
  output lcd_status_t                lcd_status,
  // TMR accelerator
  input  logic [2:0]                 acc_in_valid,
  input  logic [2:0][ACC_DW-1:0]     acc_in_data,
  output logic                       acc_out_valid,
  output logic signed [ACC_OW-1:0]   acc_out_data,
  output logic [2:0]                 acc_in_mismatch,
  output logic [2:0]                 acc_out_mismatch,
  output logic [15:0]                acc_masked_count,
  output logic [2:0]                 dpr_req,
  input  logic [2:0]                 dpr_done,
  // watchdog of the VPU
  input  logic                       vpu_heartbeat,
  output logic                       vpu_reset,
  output logic                       vpu_wd_expired,
  output logic [15:0]                vpu_wd_count
);

  // ---------------- transmit path ----------------
  pixel_t fifo_tx_data;
  logic   fifo_tx_empty, fifo_tx_rd_en;
  pixel_t crc_tx_data;
  logic   crc_tx_wr_en, crc_tx_rd_en;
  logic   crc_busy, crc_done_tx, cif_busy;
  logic   start_ok;

  pixel_fifo #(.DW(PIX_W), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk, .rst_n,
    .wr_en(txp_wr_en), .wr_data(txp_data), .full(txp_full),
    .rd_en(fifo_tx_rd_en), .rd_data(fifo_tx_data), .empty(fifo_tx_empty),
    .count(), .overflow(txp_overflow)
  );

  // Start only when both the footer FSM and the transmitter are idle.
  assign start_ok = tx_start && !crc_busy && !cif_busy;

  cif_crc u_cif_crc (
    .clk, .rst_n, .cfg, .start(start_ok),
    .fifo_empty(fifo_tx_empty), .fifo_data(fifo_tx_data), .fifo_rd_en(fifo_tx_rd_en),
    .tx_data(crc_tx_data), .tx_wr_en(crc_tx_wr_en), .tx_rd_en(crc_tx_rd_en),
    .busy(crc_busy), .done(crc_done_tx), .crc_out(tx_crc)
  );

  cif_tx #(.H_BLANK(H_BLANK), .V_BLANK(V_BLANK)) u_cif_tx (
    .clk, .rst_n, .cfg, .start(start_ok),
    .px_valid(crc_tx_wr_en), .px_data(crc_tx_data), .px_ready(crc_tx_rd_en),
    .cif_pclk, .cif_vsync, .cif_href, .cif_data,
    .busy(cif_busy), .done(tx_done)
  );

  assign tx_busy = crc_busy || cif_busy;

  // ---------------- receive path ----------------
  pixel_t rx_px;
  logic   rx_px_wr_en, rx_sof, rx_eof;
  pixel_t rx_fifo_wdata;
  logic   rx_fifo_wr_en;

  lcd_rx u_lcd_rx (
    .clk, .rst_n, .lcd_pclk, .lcd_vsync, .lcd_de, .lcd_data,
    .px_wr_en(rx_px_wr_en), .px_data(rx_px), .sof(rx_sof), .eof(rx_eof)
  );

  lcd_crc u_lcd_crc (
    .clk, .rst_n, .cfg, .sof(rx_sof), .eof(rx_eof),
    .in_wr_en(rx_px_wr_en), .in_data(rx_px),
    .out_wr_en(rx_fifo_wr_en), .out_data(rx_fifo_wdata),
    .crc_done, .crc_cmp, .status(lcd_status)
  );

  pixel_fifo #(.DW(PIX_W), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .clk, .rst_n,
    .wr_en(rx_fifo_wr_en), .wr_data(rx_fifo_wdata), .full(),
    .rd_en(rxp_rd_en), .rd_data(rxp_data), .empty(rxp_empty),
    .count(), .overflow(rxp_overflow)
  );

  // ---------------- TMR accelerator ----------------
  tmr_fir #(.DW(ACC_DW), .CW(ACC_CW), .TAPS(ACC_TAPS), .PERM_THRESH(PERM_THRESH)) u_tmr_fir (
    .clk, .rst_n,
    .in_valid(acc_in_valid), .in_data(acc_in_data),
    .out_valid(acc_out_valid), .out_data(acc_out_data),
    .in_mismatch(acc_in_mismatch), .out_mismatch(acc_out_mismatch),
    .dpr_req, .dpr_done, .masked_count(acc_masked_count)
  );

  // ---------------- watchdog of the VPU ----------------
  watchdog_timer #(.TIMEOUT(WD_TIMEOUT), .RST_LEN(WD_RST_LEN)) u_vpu_wd (
    .clk, .rst_n, .kick(vpu_heartbeat),
    .dev_reset(vpu_reset), .expired(vpu_wd_expired), .expire_count(vpu_wd_count)
  );

endmodule
