// tmr_voter -- bit-wise two-out-of-three majority voter.
//
// y takes, bit by bit, the value held by at least two of the three copies,
// so any error confined to one copy is masked. mismatch[i] tells that copy
// i differs from the voted word, which lets the surrounding logic find a
// replica that keeps failing. Purely combinational. Majority voting over
// three copies is the paper's TMR; the mismatch flags are this design's
// addition.
module tmr_voter #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic [2:0]   mismatch
);

  assign y        = (a & b) | (a & c) | (b & c);
  assign mismatch = {c != y, b != y, a != y};

endmodule
