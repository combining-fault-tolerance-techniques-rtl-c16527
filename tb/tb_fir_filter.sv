// tb_fir_filter -- self-checking test of the streaming FIR filter.
//
// Random signed samples (full-scale extremes included) are streamed with
// random gaps into a 16-tap filter. Every result must equal the direct-form
// convolution sum_k c[k]*x[n-k] computed by the testbench with
// c[k] = (k+1)*(TAPS-k), and must appear exactly one clock after its sample.
// A clr in mid-stream must restart the filter with an empty history.
module tb_fir_filter;
  localparam int DW = 16, CW = 16, TAPS = 16, OW = DW + CW + $clog2(TAPS);
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr, in_valid, out_valid;
  logic signed [DW-1:0] in_data;
  logic signed [OW-1:0] out_data;
  longint hist [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fir_filter #(.DW(DW), .CW(CW), .TAPS(TAPS)) dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint ref_y();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++)
      if (k < hist.size()) acc += longint'((k + 1) * (TAPS - k)) * hist[hist.size() - 1 - k];
    return acc;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expv;
    clr = 0; in_valid = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n == 1000) begin
        clr = 1; in_valid = 0;
        hist.delete();
        @(negedge clk);
        clr = 0;
      end
      in_valid = ($urandom % 4 != 0);
      case ($urandom % 8)
        0: in_data = 16'sh7fff;
        1: in_data = -16'sh8000;
        default: in_data = $urandom;
      endcase
      if (in_valid) begin
        hist.push_back(longint'(in_data));
        expv = ref_y();
      end
      @(negedge clk);
      check("out_valid", out_valid, in_valid);
      if (in_valid) check("y", out_data, expv);
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
