// comp_3_2: word-wide 3:2 compressor (carry-save adder).
//
// Each bit position is a full adder. It reduces three W-bit operands to a sum
// word and a carry word, with a + b + c == sum_o + carry_o (mod 2^W). The
// carries are already shifted one place left, and the carry out of the top
// bit is dropped, which is exact for two's-complement operands wide enough
// for the result. No carry moves between bit positions. Combinational.
// The 3:2 compressor is one of the basic compressors the compressor layer is
// built from. The full-adder equations are the textbook ones.
module comp_3_2 #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  input  logic [W-1:0] c_i,
  output logic [W-1:0] sum_o,
  output logic [W-1:0] carry_o
);
  logic [W-2:0] maj;  // carry of every bit but the top one, whose carry is dropped

  always_comb begin
    sum_o   = a_i ^ b_i ^ c_i;
    maj     = (a_i[W-2:0] & b_i[W-2:0]) | (a_i[W-2:0] & c_i[W-2:0]) | (b_i[W-2:0] & c_i[W-2:0]);
    carry_o = {maj, 1'b0};
  end
endmodule
