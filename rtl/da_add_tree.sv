// da_add_tree: adder tree for the compressor-free ("partitioned LUT") form of
// the DA unit.
//
// It adds H operands of W bits with carry-propagating adders, with no
// carry-save compression: sum_o = the sum of all operands (mod 2^W). Each
// level pairs its operands and adds every pair with a carry-lookahead adder
// (da_cla). An odd operand passes to the next level. After ceil(log2 H)
// levels one word is left. Combinational.
// The source paper says its architecture can also run without the compressor
// layer, as a partitioned LUT whose LUT outputs are added directly, but it
// does not say how they are added. This balanced tree of its own CLAs is this
// design's choice.
module da_add_tree #(
  parameter int unsigned H = 16,
  parameter int unsigned W = 24
) (
  input  logic [H-1:0][W-1:0] ops_i,
  output logic [W-1:0]        sum_o
);
  // operands after each level, and the number of levels
  function automatic int unsigned level_count(int unsigned h, int unsigned l);
    int unsigned c = h;
    for (int unsigned i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  function automatic int unsigned num_levels(int unsigned h);
    int unsigned c = h;
    int unsigned n = 0;
    while (c > 1) begin
      c = (c + 1) / 2;
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
    end else begin : g_add
      localparam int unsigned HP = level_count(H, l - 1);
      for (genvar p = 0; p < HP / 2; p++) begin : g_pair
        da_cla #(.W(W)) u_cla (
          .a_i(g_lvl[l-1].v[2*p]), .b_i(g_lvl[l-1].v[2*p+1]), .sum_o(v[p])
        );
      end
      if (HP % 2 == 1) begin : g_odd
        assign v[HP/2] = g_lvl[l-1].v[HP-1];
      end
    end
  end

  assign sum_o = g_lvl[NLEV].v[0];
endmodule
