// vpu_model -- behavioural model of the VPU's side of the link (testbench only).
//
// Not synthesizable. It stands for the Myriad2 VPU's CIF receiver, its
// LEON-side CRC check and its LCD transmitter:
//  * CIF receive: samples cif_data on each rising cif_pclk edge while VSYNC
//    and HREF are high; when VSYNC falls, the frame's active part
//    (width x height) is checked against the CRC found in the footer row
//    (cif_ok / cif_bad counters, per bit depth in cif_ok_bpp).
//  * Processing: every good frame is answered with a result frame whose
//    pixels are the bit-inverted input pixels (masked to the bit depth), or
//    with nothing if reply is 0.
//  * LCD transmit: the result frame, followed by its CRC footer row, is sent
//    on the LCD pins with a pixel clock of 2*HP system clocks; data and DE
//    change on the falling pixel-clock edge. corrupt_next flips one bit of
//    one active pixel of the next result frame after its CRC was computed,
//    like an upset on the wires.
//  * Heartbeat: while alive is 1, a one-clock status strobe every HB_PERIOD
//    clocks, standing for the VPU's status message over UART.
module vpu_model
  import ft_pkg::*;
  import tb_crc_pkg::*;
#(
  parameter int HP        = 2,
  parameter int HB_PERIOD = 500
) (
  input  logic       clk,
  input  frame_cfg_t cfg,
  input  logic       cif_pclk,
  input  logic       cif_vsync,
  input  logic       cif_href,
  input  pixel_t     cif_data,
  output logic       lcd_pclk,
  output logic       lcd_vsync,
  output logic       lcd_de,
  output pixel_t     lcd_data,
  output logic       heartbeat
);

  int  cif_ok = 0, cif_bad = 0;
  int  cif_ok_bpp [3] = '{0, 0, 0};
  int  lcd_sent = 0;
  bit  reply = 1;
  bit  corrupt_next = 0;
  bit  alive = 1;

  pixel_t rx [$];
  pixel_t tx_q [$];      // result frames waiting, active pixels only, back to back
  int     tx_frames = 0;
  logic   vsync_d = 0;

  // ---------------- CIF receive ----------------
  always @(posedge cif_pclk) if (cif_vsync && cif_href) rx.push_back(cif_data);

  always @(posedge clk) begin
    vsync_d <= cif_vsync;
    if (vsync_d && !cif_vsync && rx.size() != 0) begin   // ignore pin noise before reset
      int w, h, b;
      logic [23:0] act [];
      logic [15:0] crc, got;
      w = int'(cfg.width); h = int'(cfg.height); b = int'(cfg.bpp);
      if (rx.size() != w * (h + 1)) begin
        cif_bad++;
      end else begin
        act = new[w * h];
        foreach (act[i]) act[i] = rx[i];
        crc = frame_crc(act, b);
        got = (b == 0) ? {rx[w * h][7:0], rx[w * h + 1][7:0]} : rx[w * h][15:0];
        if (crc == got) begin
          cif_ok++;
          cif_ok_bpp[b]++;
          if (reply) begin
            foreach (act[i]) tx_q.push_back(~act[i] & mask_of(b));
            tx_frames++;
          end
        end else begin
          cif_bad++;
        end
      end
      rx.delete();
    end
  end

  // ---------------- LCD transmit ----------------
  task automatic slot(logic vs, logic de, pixel_t d);
    lcd_pclk = 0; lcd_vsync = vs; lcd_de = de; lcd_data = d;
    repeat (HP) @(negedge clk);
    lcd_pclk = 1;
    repeat (HP) @(negedge clk);
  endtask

  initial begin
    lcd_pclk = 0; lcd_vsync = 0; lcd_de = 0; lcd_data = 0;
    forever begin
      @(negedge clk);
      if (tx_frames > 0) begin
        int w, h, b, bad_i;
        logic [23:0] act [];
        logic [15:0] crc;
        w = int'(cfg.width); h = int'(cfg.height); b = int'(cfg.bpp);
        act = new[w * h];
        foreach (act[i]) act[i] = tx_q.pop_front();
        tx_frames--;
        crc = frame_crc(act, b);
        bad_i = -1;
        if (corrupt_next) begin
          bad_i = (w * h) / 2;
          corrupt_next = 0;
        end
        for (int i = 0; i < 3; i++) slot(1, 0, 0);
        for (int r = 0; r <= h; r++) begin
          for (int c = 0; c < w; c++) begin
            pixel_t p;
            if (r < h) p = act[r * w + c] ^ ((r * w + c == bad_i) ? 24'h1 : 24'h0);
            else       p = footer_px(b, crc, c);
            slot(1, 1, p);
          end
          for (int i = 0; i < 2; i++) slot(1, 0, 0);
        end
        slot(0, 0, 0);
        lcd_sent++;
      end
    end
  end

  // ---------------- heartbeat ----------------
  int hb_cnt = 0;
  always @(posedge clk) begin
    heartbeat <= 1'b0;
    if (alive) begin
      if (hb_cnt == HB_PERIOD - 1) begin
        hb_cnt    <= 0;
        heartbeat <= 1'b1;
      end else begin
        hb_cnt <= hb_cnt + 1;
      end
    end
  end

endmodule
