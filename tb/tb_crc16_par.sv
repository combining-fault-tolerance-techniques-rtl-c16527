// tb_crc16_par -- self-checking test of the parallel CRC-16-CCITT calculator.
//
// Three instances (8, 16 and 24 bits per clock) absorb random word streams;
// after every word their register is compared with a bit-serial model that
// applies x^16 + x^12 + x^5 + 1 one bit at a time. The 8-bit instance is also
// checked against the published check value of CRC-16/XMODEM for the ASCII
// string "123456789" (0x31C3). clr and en gaps are exercised.
module tb_crc16_par;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr, en;
  logic [23:0] din;
  logic [15:0] crc8, crc16, crc24;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  crc16_par #(.DW(8))  u8  (.clk, .rst_n, .clr, .en, .din(din[7:0]),  .crc(crc8));
  crc16_par #(.DW(16)) u16 (.clk, .rst_n, .clr, .en, .din(din[15:0]), .crc(crc16));
  crc16_par #(.DW(24)) u24 (.clk, .rst_n, .clr, .en, .din(din),       .crc(crc24));

  // Bit-serial reference: taps at bits 12, 5 and 0.
  function automatic logic [15:0] ser(logic [15:0] c, logic [23:0] d, int n);
    for (int i = n - 1; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ d[i];
      c  = c << 1;
      if (fb) begin
        c[12] = ~c[12];
        c[5]  = ~c[5];
        c[0]  = ~c[0];
      end
    end
    return c;
  endfunction

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] r8, r16, r24;
    byte unsigned msg [9] = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    clr = 1'b0; en = 1'b0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    check("reset value", crc8, 16'h0000);
    // Known check value.
    for (int i = 0; i < 9; i++) begin
      @(negedge clk); en = 1'b1; din = {16'h0, msg[i]};
    end
    @(negedge clk); en = 1'b0;
    check("XMODEM 123456789", crc8, 16'h31C3);
    // Random streams.
    for (int s = 0; s < 20; s++) begin
      @(negedge clk); clr = 1'b1; en = 1'b1; din = $urandom;
      @(negedge clk); clr = 1'b0; en = 1'b0;
      check("clr 8", crc8, 16'h0); check("clr 16", crc16, 16'h0); check("clr 24", crc24, 16'h0);
      r8 = 16'h0; r16 = 16'h0; r24 = 16'h0;
      for (int i = 0; i < 50; i++) begin
        en  = ($urandom % 4) != 0;
        din = $urandom;
        if (en) begin
          r8  = ser(r8, din, 8);
          r16 = ser(r16, din, 16);
          r24 = ser(r24, din, 24);
        end
        @(negedge clk);
        check("crc8", crc8, r8); check("crc16", crc16, r16); check("crc24", crc24, r24);
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
