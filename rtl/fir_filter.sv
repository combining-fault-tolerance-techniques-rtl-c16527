// fir_filter -- streaming FIR filter, the accelerator protected by TMR.
//
// y[n] = sum_{k=0}^{TAPS-1} c[k] * x[n-k], computed in transposed form: each
// accepted sample is multiplied by all coefficients at once and added into a
// chain of TAPS-1 partial-sum registers, so the filter takes one sample per
// clock and its result appears one clock after the sample (out_valid
// follows in_valid). The coefficients are a constant table (a ROM that
// synthesis maps onto logic), here the triangular low-pass window
// c[k] = (k+1)*(TAPS-k). The paper uses a pipelined FIR filter with its
// coefficients in a LUT ROM as its benchmark accelerator but gives neither
// the tap count, the widths nor the coefficients: those are this design's.
//
// Interface: in_valid/in_data signed samples; clr synchronously empties the
// partial sums (used after the replica has been reconfigured); full-precision
// signed output of DW+CW+clog2(TAPS) bits.
module fir_filter #(
  parameter int unsigned DW   = 16,
  parameter int unsigned CW   = 16,
  parameter int unsigned TAPS = 16,
  localparam int unsigned OW  = DW + CW + $clog2(TAPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_data
);

  // Coefficient ROM.
  function automatic logic signed [CW-1:0] coef(int unsigned k);
    return CW'((k + 1) * (TAPS - k));
  endfunction

  logic signed [OW-1:0] psum [1:TAPS-1];   // psum[k]: partial sum from tap k on
  logic signed [OW-1:0] prod [TAPS];

  always_comb begin
    for (int unsigned k = 0; k < TAPS; k++) prod[k] = OW'(in_data) * OW'(coef(k));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 1; k < TAPS; k++) psum[k] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clr) begin
      for (int unsigned k = 1; k < TAPS; k++) psum[k] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= prod[0] + psum[1];
        for (int unsigned k = 1; k < TAPS - 1; k++) psum[k] <= prod[k] + psum[k+1];
        psum[TAPS-1] <= prod[TAPS-1];
      end
    end
  end

endmodule
