// tb_pixel_fifo -- self-checking test of the first-word-fall-through FIFO.
//
// A small FIFO (DEPTH 16) is pushed and popped at random, including pushes
// while full, and compared with a queue model: head data, empty, full, count
// and the sticky overflow flag.
module tb_pixel_fifo;
  localparam int DEPTH = 16;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_en, rd_en, full, empty, overflow;
  logic [23:0] wr_data, rd_data;
  logic [$clog2(DEPTH):0] count;
  logic [23:0] q [$];
  logic ovf_model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pixel_fifo #(.DW(24), .DEPTH(DEPTH)) dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0; ovf_model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check("empty", empty, q.size() == 0);
      check("full", full, q.size() == DEPTH);
      check("count", count, q.size());
      check("overflow", overflow, ovf_model);
      if (q.size() != 0) check("head", rd_data, q[0]);
      // phases: fill-biased, drain-biased
      wr_en   = ((i / 300) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      rd_en   = !empty && (((i / 300) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0));
      wr_data = $urandom;
      @(posedge clk);
      #1;
      begin
        int n;
        n = q.size();
        if (rd_en && n != 0) void'(q.pop_front());
        if (wr_en) begin
          if (n < DEPTH) q.push_back(wr_data);   // a full FIFO drops the push
          else ovf_model = 1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
