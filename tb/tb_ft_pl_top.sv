// tb_ft_pl_top -- end-to-end test of the programmable-logic design.
//
// The design is connected to a behavioural VPU (vpu_model) through its CIF
// and LCD pins. The testbench
//  * sends frames of 8-, 16- and 24-bit depth through the transmit FIFO, the
//    CIF CRC module and the CIF transmitter; the VPU checks each footer CRC
//    and answers with a result frame over LCD;
//  * reads the result pixels out of the receive FIFO and compares them with
//    the expected result, and checks the LCD CRC verdict, including a result
//    frame corrupted on the wires, which must be reported as bad;
//  * feeds one frame slowly so that the CIF side stalls on an empty FIFO,
//    and the others fast enough to fill the FIFO (back-pressure);
//  * drives the TMR accelerator with upsets on its input copies, a transient
//    and a permanent replica fault, and completes the reconfiguration
//    handshake;
//  * silences the VPU's heartbeat so that the watchdog resets it.
// Every mechanism is counted and a mechanism that never occurred is a
// failure. Parameters are reduced (FIFO depth 32, watchdog timeout 3000).
module tb_ft_pl_top;
  import ft_pkg::*;
  import tb_crc_pkg::*;

  localparam int DEPTH = 32, WD_TO = 3000, TAPS = 16, PT = 32, ADW = 16;
  localparam int AOW = ADW + 16 + $clog2(TAPS);

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
  logic [2:0][ADW-1:0] acc_in_data;
  logic acc_out_valid;
  logic signed [AOW-1:0] acc_out_data;
  logic [15:0] acc_masked_count, vpu_wd_count;
  logic vpu_heartbeat, vpu_reset, vpu_wd_expired;

  ft_pl_top #(
    .FIFO_DEPTH(DEPTH), .ACC_TAPS(TAPS), .PERM_THRESH(PT), .WD_TIMEOUT(WD_TO)
  ) dut (.*);

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

  // mechanism counters
  int n_stall = 0, n_full = 0, n_crc_ok = 0, n_crc_bad = 0, n_in_mask = 0, n_rep_mask = 0;
  int n_dpr = 0, n_wd = 0, n_vpu_reset_clk = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_cif_crc.state == dut.u_cif_crc.S_ACTIVE && dut.fifo_tx_empty) n_stall++;
    if (txp_full) n_full++;
    if (crc_done && crc_cmp) n_crc_ok++;
    if (crc_done && !crc_cmp) n_crc_bad++;
    if (acc_in_valid != 0 && acc_in_mismatch != 0) n_in_mask++;
    if (acc_out_valid && acc_out_mismatch != 0) n_rep_mask++;
    if (vpu_wd_expired) n_wd++;
    if (vpu_reset) n_vpu_reset_clk++;
  end

  // ---------------- transmit pixel writer ----------------
  pixel_t to_send [$];
  bit slow = 0;
  always @(negedge clk) begin
    txp_wr_en = 0;
    if (rst_n && to_send.size() != 0 && !txp_full && !(slow && ($urandom % 8 != 0))) begin
      txp_wr_en = 1;
      txp_data  = to_send.pop_front();
    end
  end

  // ---------------- receive pixel reader ----------------
  pixel_t exp_rx [$];
  int n_rx = 0;
  always @(negedge clk) begin
    rxp_rd_en = 0;
    if (rst_n && !rxp_empty) begin
      rxp_rd_en = 1;
      n_rx++;
      if (exp_rx.size() == 0) check("unexpected rx pixel", 1, 0);
      else check("rx pixel", rxp_data, exp_rx.pop_front());
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One frame out and its result back.
  task automatic frame(int w, int h, int bpp, bit slow_feed, bit corrupt);
    logic [23:0] px [];
    int ok0 = vpu.cif_ok, crc_ok0 = n_crc_ok, crc_bad0 = n_crc_bad;
    px = new[w * h];
    foreach (px[i]) px[i] = $urandom & mask_of(bpp);
    cfg = '{width: dim_t'(w), height: dim_t'(h), bpp: bpp_e'(bpp)};
    slow = slow_feed;
    vpu.corrupt_next = corrupt;
    foreach (px[i]) begin
      to_send.push_back(px[i]);
      exp_rx.push_back((~px[i] & mask_of(bpp)) ^ ((corrupt && i == (w * h) / 2) ? 24'h1 : 24'h0));
    end
    if (!slow_feed) repeat (DEPTH + 4) @(negedge clk);   // let the FIFO fill
    @(negedge clk); tx_start = 1;
    @(negedge clk); tx_start = 0;
    while (!tx_done) @(negedge clk);
    check("tx crc", tx_crc, frame_crc(px, bpp));
    while (!crc_done) @(negedge clk);
    check("lcd crc verdict", crc_cmp, !corrupt);
    repeat (4) @(negedge clk);
    check("vpu got a good CIF frame", vpu.cif_ok, ok0 + 1);
    check("rx pixels all read", exp_rx.size(), 0);
    check("crc ok count", n_crc_ok, crc_ok0 + !corrupt);
    check("crc bad count", n_crc_bad, crc_bad0 + corrupt);
    check("status ok reg", lcd_status.frames_ok, n_crc_ok);
    check("status bad reg", lcd_status.frames_bad, n_crc_bad);
  endtask

  // One accelerator sample: three copies, one optionally corrupted.
  longint hist [$];
  task automatic acc_sample(bit upset);
    logic signed [ADW-1:0] x = $urandom;
    longint expv = 0;
    @(negedge clk);
    acc_in_valid = 3'b111;
    acc_in_data  = {x, x, x};
    if (upset) acc_in_data[$urandom % 3] ^= ADW'($urandom | 1);
    hist.push_back(longint'(x));
    for (int k = 0; k < TAPS; k++)
      if (k < hist.size()) expv += longint'((k + 1) * (TAPS - k)) * hist[hist.size() - 1 - k];
    @(negedge clk);
    acc_in_valid = 0;
    check("acc valid", acc_out_valid, 1);
    check("acc voted result", acc_out_data, expv);
    @(negedge clk);
  endtask

  initial begin
    tx_start = 0; cfg = '0; acc_in_valid = 0; acc_in_data = '0; dpr_done = 0;
    txp_wr_en = 0; txp_data = 0; rxp_rd_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // link
    frame(12, 5, 2, 0, 0);
    frame(9, 4, 1, 0, 0);
    frame(10, 4, 0, 0, 0);
    frame(8, 3, 2, 1, 0);      // slow feed: CIF stalls on the empty FIFO
    frame(7, 6, 1, 0, 1);      // result corrupted on the LCD wires
    frame(40, 3, 0, 0, 0);
    check("no tx overflow", txp_overflow, 0);
    check("no rx overflow", rxp_overflow, 0);
    check("vpu saw no bad CIF frame", vpu.cif_bad, 0);
    // TMR accelerator
    for (int i = 0; i < 50; i++) acc_sample($urandom % 2);
    force dut.u_tmr_fir.g_rep[1].u_fir.out_data = 0;
    for (int i = 0; i < PT + 5; i++) acc_sample(0);
    release dut.u_tmr_fir.g_rep[1].u_fir.out_data;
    check("dpr request for replica 1", dpr_req, 3'b010);
    if (dpr_req != 0) n_dpr++;
    @(negedge clk); dpr_done = dpr_req;
    @(negedge clk); dpr_done = 0;
    check("dpr request cleared", dpr_req, 0);
    for (int i = 0; i < TAPS + 10; i++) acc_sample(0);
    check("replicas agree after reconfiguration", acc_out_mismatch, 0);
    // watchdog: the VPU stops reporting
    check("no expiry while the VPU reports", n_wd, 0);
    vpu.alive = 0;
    repeat (WD_TO + 100) @(negedge clk);
    check("one expiry", vpu_wd_count, 1);
    check("reset pulse length", n_vpu_reset_clk, 16);
    vpu.alive = 1;
    // mechanisms
    $display("mechanisms: footer8=%0d footer16=%0d footer24=%0d crc_ok=%0d crc_bad=%0d tx_stall=%0d fifo_full=%0d tmr_input_masked=%0d tmr_replica_masked=%0d dpr=%0d wd_expiry=%0d",
             vpu.cif_ok_bpp[0], vpu.cif_ok_bpp[1], vpu.cif_ok_bpp[2], n_crc_ok, n_crc_bad, n_stall, n_full,
             n_in_mask, n_rep_mask, n_dpr, n_wd);
    check("mechanism 8-bit footer", vpu.cif_ok_bpp[0] > 0, 1);
    check("mechanism 16-bit footer", vpu.cif_ok_bpp[1] > 0, 1);
    check("mechanism 24-bit footer", vpu.cif_ok_bpp[2] > 0, 1);
    check("mechanism CRC match", n_crc_ok > 0, 1);
    check("mechanism CRC mismatch", n_crc_bad > 0, 1);
    check("mechanism tx stall", n_stall > 0, 1);
    check("mechanism FIFO full", n_full > 0, 1);
    check("mechanism TMR input masked", n_in_mask > 0, 1);
    check("mechanism TMR replica masked", n_rep_mask > 0, 1);
    check("mechanism DPR request", n_dpr > 0, 1);
    check("mechanism watchdog expiry", n_wd > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
