// da_compressor: the h:2 compressor layer of the DA unit.
//
// It reduces H operands of W bits (the m LUT words and the N-k multiplexer
// words) to one sum word and one carry word, with
// sum_o + carry_o == the sum of all operands (mod 2^W). A W-bit carry-lookahead
// adder then adds the two words.
// Structure: a tree of levels. Each level puts its operands through as many
// 4:2 compressors (comp_4_2) as fit. A remainder of three goes through a 3:2
// compressor (comp_3_2), and a remainder of one or two passes straight to the
// next level. Levels repeat until two words are left. With one operand, the
// carry word is zero. This is how the source paper's Fig. 3 builds an h:2
// compressor: a basic compressor sits beside a compound compressor for the
// remaining inputs, and a final compressor merges their outputs. Depth is
// about log2(H) 4:2 levels. Combinational.
// The paper picks the mix of basic compressors (3:2 up to 9:2) with a
// dynamic-programming search over gate delay and power figures it does not
// publish. This balanced 4:2/3:2 tree is this design's own stand-in for that
// search.
module da_compressor #(
  parameter int unsigned H = 95,
  parameter int unsigned W = 24
) (
  input  logic [H-1:0][W-1:0] ops_i,
  output logic [W-1:0]        sum_o,
  output logic [W-1:0]        carry_o
);
  // operands left after one level
  function automatic int unsigned next_count(int unsigned h);
    if (h <= 2) return h;
    return 2 * (h / 4) + ((h % 4 == 3) ? 2 : (h % 4));
  endfunction

  // operands at level l (level 0 is the input)
  function automatic int unsigned level_count(int unsigned h, int unsigned l);
    int unsigned c = h;
    for (int unsigned i = 0; i < l; i++) c = next_count(c);
    return c;
  endfunction

  // number of levels until at most two operands remain
  function automatic int unsigned num_levels(int unsigned h);
    int unsigned c = h;
    int unsigned n = 0;
    while (c > 2) begin
      c = next_count(c);
      n++;
    end
    return n;
  endfunction

  localparam int unsigned NLEV = num_levels(H);

  for (genvar l = 0; l <= NLEV; l++) begin : g_lvl
    localparam int unsigned HC = level_count(H, l);
    logic [HC-1:0][W-1:0] v;

    if (l == 0) begin : g_in
      assign v = ops_i;
    end else begin : g_reduce
      localparam int unsigned HP = level_count(H, l - 1);  // operands coming in
      localparam int unsigned G4 = HP / 4;                 // 4:2 compressors
      localparam int unsigned R  = HP % 4;                 // operands left over

      for (genvar g = 0; g < G4; g++) begin : g_c42
        comp_4_2 #(.W(W)) u_c42 (
          .x1_i(g_lvl[l-1].v[4*g]),   .x2_i(g_lvl[l-1].v[4*g+1]),
          .x3_i(g_lvl[l-1].v[4*g+2]), .x4_i(g_lvl[l-1].v[4*g+3]),
          .sum_o(v[2*g]), .carry_o(v[2*g+1])
        );
      end

      if (R == 3) begin : g_rem3
        comp_3_2 #(.W(W)) u_c32 (
          .a_i(g_lvl[l-1].v[4*G4]), .b_i(g_lvl[l-1].v[4*G4+1]), .c_i(g_lvl[l-1].v[4*G4+2]),
          .sum_o(v[2*G4]), .carry_o(v[2*G4+1])
        );
      end else begin : g_pass
        for (genvar r = 0; r < R; r++) begin : g_r
          assign v[2*G4+r] = g_lvl[l-1].v[4*G4+r];
        end
      end
    end
  end

  if (H == 1) begin : g_one
    assign sum_o   = g_lvl[NLEV].v[0];
    assign carry_o = '0;
  end else begin : g_two
    assign sum_o   = g_lvl[NLEV].v[0];
    assign carry_o = g_lvl[NLEV].v[1];
  end
endmodule
