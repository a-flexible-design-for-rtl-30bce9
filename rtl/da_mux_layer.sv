// da_mux_layer: the 2-1 multiplexer layer of the DA unit.
//
// It serves the NM taps that have no LUT. For each such tap there is a C-bit
// 2-1 multiplexer (C*NM bit multiplexers in all). Its select is the tap's
// bit-plane bit: 1 passes the tap's coefficient, 0 passes zero. Output i is
// that word, sign-extended to the compressor width OW. Purely combinational.
// This follows the paper: "If the selector of the i-th multiplexer becomes 1
// the related coefficient will be added to compressor part."
module da_mux_layer #(
  parameter int unsigned NM = da_pkg::DEF_N - da_pkg::DEF_NUM_LUTS * da_pkg::DEF_LUT_BITS,
  parameter int unsigned C  = da_pkg::C_BITS,
  parameter int unsigned OW = da_pkg::sum_width(C, da_pkg::DEF_N)
) (
  input  logic [NM-1:0]          sel_i,
  input  logic [NM-1:0][C-1:0]   coef_i,
  output logic [NM-1:0][OW-1:0]  data_o
);
  always_comb begin
    for (int i = 0; i < NM; i++) begin
      data_o[i] = sel_i[i] ? OW'($signed(coef_i[i])) : '0;
    end
  end
endmodule
