// pixel_fifo -- synchronous first-word-fall-through pixel buffer.
//
// Buffers pixels in front of the CIF CRC module (the "pixel FIFO" it reads)
// and behind the LCD CRC module (the one it writes). The head of the queue is
// on rd_data whenever empty is low, so a reader can forward a pixel in the
// same clock it pops it, one pixel per clock. DEPTH must be a power of two;
// the default of 2048 holds one row of the largest 2048-pixel-wide frame.
// The FIFO type and its depth are this design's choice: the paper only names
// a pixel FIFO / pixel buffer.
//
// Interface: wr_en pushes wr_data (ignored when full), rd_en pops the head
// (ignored when empty); both may act in the same clock. count is the fill
// level. A push into a full FIFO is dropped and sets the sticky overflow
// flag (cleared by reset); popping an empty FIFO is flagged by an assertion.
// That assertion is disabled while rst_n is low, which is why lint sees
// rst_n used both as an asynchronous reset and as a sampled signal.
module pixel_fifo #(
  parameter int unsigned DW    = 24,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [DW-1:0]            wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [DW-1:0]            rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr;   // one extra wrap bit

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  assign empty   = (wr_ptr == rd_ptr);
  assign full    = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign count   = wr_ptr - rd_ptr;
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_en && full) overflow <= 1'b1;
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // Handshake rule: a reader never pops an empty FIFO.
  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("pixel_fifo: read while empty");

endmodule
