// watchdog_timer -- resets a device that stops reporting its status.
//
// The monitored device sends status messages (over UART in the paper's
// system); every message arrives here as a one-clock kick, which restarts
// the count. If TIMEOUT clocks pass without a kick, the timer pulses expired,
// counts the event and holds dev_reset high for RST_LEN clocks, after which it
// starts counting again. This is the paper's watchdog policy (the FPGA and
// the VPU watch each other, and an external microcontroller resets the FPGA
// when SEM stops reporting); the timeout of one second at 100 MHz and the
// reset length are this design's choices.
module watchdog_timer #(
  parameter int unsigned TIMEOUT = 100_000_000,
  parameter int unsigned RST_LEN = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        kick,
  output logic        dev_reset,
  output logic        expired,
  output logic [15:0] expire_count
);

  localparam int unsigned TW = $clog2(TIMEOUT + 1);
  localparam int unsigned RW = $clog2(RST_LEN + 1);

  logic [TW-1:0] cnt;
  logic [RW-1:0] rst_cnt;

  assign dev_reset = (rst_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      rst_cnt      <= '0;
      expired      <= 1'b0;
      expire_count <= '0;
    end else begin
      expired <= 1'b0;
      if (dev_reset) begin
        rst_cnt <= rst_cnt - 1'b1;
        cnt     <= '0;
      end else if (kick) begin
        cnt <= '0;
      end else if (cnt == TW'(TIMEOUT - 1)) begin
        cnt          <= '0;
        rst_cnt      <= RW'(RST_LEN);
        expired      <= 1'b1;
        expire_count <= expire_count + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
