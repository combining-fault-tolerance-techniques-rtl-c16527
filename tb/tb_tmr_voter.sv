// tb_tmr_voter -- exhaustive/random test of the 2-of-3 majority voter.
//
// Every combination of three 4-bit words, then random 16-bit words with one
// copy corrupted: the output must be the bit-wise majority worked out bit by
// bit with counts, and mismatch[i] must flag exactly the copies that differ
// from it.
module tb_tmr_voter;
  logic [3:0] a4, b4, c4, y4;
  logic [2:0] m4;
  logic [15:0] a, b, c, y;
  logic [2:0] m;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  tmr_voter #(.W(4))  u4  (.a(a4), .b(b4), .c(c4), .y(y4), .mismatch(m4));
  tmr_voter #(.W(16)) u16 (.a, .b, .c, .y, .mismatch(m));

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [15:0] maj(logic [15:0] x0, logic [15:0] x1, logic [15:0] x2, int w);
    logic [15:0] r = '0;
    for (int i = 0; i < w; i++) r[i] = (int'(x0[i]) + int'(x1[i]) + int'(x2[i])) >= 2;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] e;
    for (int i = 0; i < 4096; i++) begin
      {a4, b4, c4} = 12'(i);
      #1;
      e = maj(16'(a4), 16'(b4), 16'(c4), 4);
      check("y4", y4, e);
      check("m4", m4, {c4 != e[3:0], b4 != e[3:0], a4 != e[3:0]});
    end
    for (int i = 0; i < 2000; i++) begin
      int bad;
      a = $urandom; b = a; c = a;
      e = a;
      bad = $urandom % 4;
      case (bad)
        0: a = a ^ 16'($urandom | 1);
        1: b = b ^ 16'($urandom | 1);
        2: c = c ^ 16'($urandom | 1);
        default: ;
      endcase
      #1;
      check("y masks one bad copy", y, e);
      check("mismatch", m, (bad == 3) ? 3'b000 : 3'(1 << bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
