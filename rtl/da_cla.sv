// da_cla: carry-lookahead adder for the final sum of the DA unit.
//
// It adds the compressor's sum and carry words: sum_o = a_i + b_i (mod 2^W).
// Each bit gets a generate g = a & b and a propagate p = a ^ b. The carries
// are computed in lookahead form, as a parallel prefix (Kogge-Stone) over the
// (g, p) pairs: ceil(log2 W) levels of the operator
// (g, p) o (g', p') = (g | p & g', p & p'), so no carry ripples bit by bit.
// Combinational.
// The paper names only a "carry look-ahead adder". The prefix form is this
// design's choice.
module da_cla #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic [W-1:0] sum_o
);
  localparam int unsigned LEVELS = (W > 1) ? $clog2(W) : 1;

  logic [W-1:0] g [LEVELS+1];
  logic [W-1:0] p [LEVELS+1];
  logic [W-1:0] carry;  // carry into each bit

  always_comb begin
    g[0] = a_i & b_i;
    p[0] = a_i ^ b_i;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < W; i++) begin
        if (i >= (1 << l)) begin
          g[l+1][i] = g[l][i] | (p[l][i] & g[l][i - (1 << l)]);
          p[l+1][i] = p[l][i] & p[l][i - (1 << l)];
        end else begin
          g[l+1][i] = g[l][i];
          p[l+1][i] = p[l][i];
        end
      end
    end
    carry = {g[LEVELS][W-2:0], 1'b0};
    sum_o = p[0] ^ carry;
  end
endmodule
