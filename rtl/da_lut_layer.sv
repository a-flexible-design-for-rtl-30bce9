// da_lut_layer: the LUT layer of the DA unit.
//
// It holds M basic LUTs (da_lut). LUT j has KI[j] address bits, so the layer
// uses K = KI[0] + ... + KI[M-1] of the N bit-plane bits. LUT j is addressed
// by the KI[j] plane bits that start at offset KI[0] + ... + KI[j-1], and
// holds the partial sums of the coefficients of those taps.
// Output j is LUT j's word, sign-extended to the common output width
// OW (by default C + ceil(log2 K); the DA unit sets it to its compressor width). All LUTs fill at once on fill_i, and busy_o is the
// OR of their busy flags, so a fill lasts 2^max(KI) - 1 cycles. Reads are
// combinational.
// Unequal k_i per LUT follow the paper. The default of sixteen 4-bit LUTs,
// and giving the LUTs the first K taps, are this design's own choices.
module da_lut_layer #(
  parameter int unsigned     M  = da_pkg::DEF_NUM_LUTS,
  parameter da_pkg::lut_bits_t KI = da_pkg::DEF_KI,
  parameter int unsigned     C  = da_pkg::C_BITS,
  parameter int unsigned     OW = da_pkg::sum_width(C, da_pkg::lut_offset(KI, M)),
  localparam int unsigned    K  = da_pkg::lut_offset(KI, M)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [K-1:0][C-1:0]  coef_i,
  input  logic                 fill_i,
  output logic                 busy_o,
  input  logic [K-1:0]         addr_i,
  output logic [M-1:0][OW-1:0] data_o
);
  if (M > da_pkg::MAX_LUTS) begin : g_bad_cfg
    $error("da_lut_layer: M exceeds da_pkg::MAX_LUTS");
  end

  logic [M-1:0] busy;

  for (genvar j = 0; j < M; j++) begin : g_lut
    localparam int unsigned KJ  = KI[j];                          // k_j
    localparam int unsigned OFF = da_pkg::lut_offset(KI, j);      // first tap
    localparam int unsigned WW  = da_pkg::sum_width(C, KJ);
    logic [WW-1:0] word;
    da_lut #(.KI(KJ), .C(C)) u_lut (
      .clk    (clk),
      .rst_n  (rst_n),
      .coef_i (coef_i[OFF +: KJ]),
      .fill_i (fill_i),
      .busy_o (busy[j]),
      .addr_i (addr_i[OFF +: KJ]),
      .data_o (word)
    );
    assign data_o[j] = OW'($signed(word));
  end

  assign busy_o = |busy;
endmodule
