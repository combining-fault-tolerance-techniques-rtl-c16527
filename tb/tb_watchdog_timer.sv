// tb_watchdog_timer -- self-checking test of the watchdog.
//
// With TIMEOUT = 50 and RST_LEN = 6: kicks every 30 clocks must never let it
// expire; when kicks stop, expired must pulse exactly 50 clocks after the
// last kick, dev_reset must then stay high for exactly 6 clocks, and the
// timer must expire again 50 clocks after the reset ends if the device stays
// silent. The expiry counter is checked throughout.
module tb_watchdog_timer;
  localparam int TO = 50, RL = 6;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic kick, dev_reset, expired;
  logic [15:0] expire_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  watchdog_timer #(.TIMEOUT(TO), .RST_LEN(RL)) dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
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
    int t, rlen;
    kick = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // regular heartbeat
    for (int i = 0; i < 20; i++) begin
      repeat (29) begin
        @(negedge clk);
        check("no expiry while kicked", expired || dev_reset, 0);
      end
      @(negedge clk); kick = 1;
      @(negedge clk); kick = 0;
    end
    check("count still 0", expire_count, 0);
    // silence: the last kick was sampled at the clock edge just past
    t = 0;
    while (!expired && t < 200) begin @(negedge clk); t++; end
    check("expiry delay", t, TO);
    check("count 1", expire_count, 1);
    rlen = 0;
    while (dev_reset && rlen < 100) begin rlen++; @(negedge clk); end
    check("reset length", rlen, RL);
    t = 0;
    while (!expired && t < 200) begin @(negedge clk); t++; end
    check("second expiry delay", t, TO);
    check("count 2", expire_count, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
