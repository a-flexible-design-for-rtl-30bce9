// comp_4_2: word-wide 4:2 compressor.
//
// It reduces four W-bit operands to a sum word and a carry word:
// x1 + x2 + x3 + x4 == sum_o + carry_o (mod 2^W). Each bit position is the
// classic 4:2 cell, which takes a lateral carry in (cin) from the position
// below and gives a lateral carry out (cout) to the position above:
//   cout  = maj(x1, x2, x3)          s1    = x1 ^ x2 ^ x3
//   sum   = s1 ^ x4 ^ cin            carry = maj(s1, x4, cin)
// cout does not depend on cin, so the lateral carries never ripple. This is
// the "carry in and carry out bits without carry propagation" property the
// compressor layer relies on. carry_o is shifted one place left. The top
// bit's cout and carry are dropped (modulo 2^W). Combinational.
// The cell equations are the standard ones, because the gate-level cells of
// the paper's references are not reproduced.
module comp_4_2 #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] x1_i,
  input  logic [W-1:0] x2_i,
  input  logic [W-1:0] x3_i,
  input  logic [W-1:0] x4_i,
  output logic [W-1:0] sum_o,
  output logic [W-1:0] carry_o
);
  logic [W-1:0] s1, cin;
  logic [W-2:0] cout, cy;  // the top bit's cout and carry are dropped

  always_comb begin
    s1      = x1_i ^ x2_i ^ x3_i;
    cout    = (x1_i[W-2:0] & x2_i[W-2:0]) | (x1_i[W-2:0] & x3_i[W-2:0])
            | (x2_i[W-2:0] & x3_i[W-2:0]);
    cin     = {cout, 1'b0};
    sum_o   = s1 ^ x4_i ^ cin;
    cy      = (s1[W-2:0] & x4_i[W-2:0]) | (s1[W-2:0] & cin[W-2:0]) | (x4_i[W-2:0] & cin[W-2:0]);
    carry_o = {cy, 1'b0};
  end
endmodule
