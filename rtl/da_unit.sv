// da_unit: the distributed-arithmetic unit (LUT layer, MUX layer,
// compressor layer and carry-lookahead adder).
//
// For one bit plane (plane_i[i] = bit j of sample x[t-i]) it computes
//   sum_o = sum over i = 0..N-1 of coef[i] * plane_i[i]
// as a signed OW-bit word, OW = C + ceil(log2 N).
// Taps 0 .. K-1 (K = KI[0] + ... + KI[M-1]) address the M basic LUTs, KI[j]
// taps for LUT j. Each LUT gives the precomputed sum of its selected
// coefficients. Taps K .. N-1 drive
// the selects of the 2-1 multiplexer layer, which passes each selected
// coefficient. The M + N - K words go into an (N-K+M):2 compressor, and the
// carry-lookahead adder adds its two outputs. Setting M = 0 gives the
// "LUT-less" form, and K = N gives the compressor fed only by LUTs. With
// USE_COMPRESSOR = 0 the words are added by a tree of carry-lookahead adders
// (da_add_tree) instead: the compressor-free "partitioned LUT" form, meant
// for few operands, typically K = N.
// Ports: coef_i is the coefficient register file, and fill_i / busy_o start
// and track the LUT fill (see da_lut). The path from plane_i to sum_o is
// combinational. The enclosing filter registers it in the add/shift
// accumulator.
// The block split and the operand counts follow the paper. Which taps go to
// the LUTs, the default partition, and the compressor tree are this design's
// own choices.
module da_unit #(
  parameter int unsigned     N  = da_pkg::DEF_N,
  parameter int unsigned     M  = da_pkg::DEF_NUM_LUTS,
  parameter da_pkg::lut_bits_t KI = da_pkg::DEF_KI,
  parameter int unsigned     C  = da_pkg::C_BITS,
  parameter bit              USE_COMPRESSOR = 1'b1,
  localparam int unsigned OW = da_pkg::sum_width(C, N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0][C-1:0] coef_i,
  input  logic                fill_i,
  output logic                busy_o,
  input  logic [N-1:0]        plane_i,
  output logic [OW-1:0]       sum_o
);
  localparam int unsigned K  = da_pkg::lut_offset(KI, M);  // LUT address bits, k
  localparam int unsigned NM = N - K;    // taps served by multiplexers
  localparam int unsigned H  = NM + M;   // compressor operands

  if (K > N) begin : g_bad_cfg
    $error("da_unit: the LUT address bits must not exceed N");
  end

  logic [H-1:0][OW-1:0] ops;

  if (M > 0) begin : g_luts
    da_lut_layer #(.M(M), .KI(KI), .C(C), .OW(OW)) u_lut_layer (
      .clk    (clk),
      .rst_n  (rst_n),
      .coef_i (coef_i[K-1:0]),
      .fill_i (fill_i),
      .busy_o (busy_o),
      .addr_i (plane_i[K-1:0]),
      .data_o (ops[M-1:0])
    );
  end else begin : g_no_luts
    assign busy_o = 1'b0;
  end

  if (NM > 0) begin : g_muxes
    da_mux_layer #(.NM(NM), .C(C), .OW(OW)) u_mux_layer (
      .sel_i  (plane_i[N-1:K]),
      .coef_i (coef_i[N-1:K]),
      .data_o (ops[H-1:M])
    );
  end

  if (USE_COMPRESSOR) begin : g_compress
    logic [OW-1:0] csum, ccarry;
    da_compressor #(.H(H), .W(OW)) u_compressor (
      .ops_i   (ops),
      .sum_o   (csum),
      .carry_o (ccarry)
    );

    da_cla #(.W(OW)) u_cla (
      .a_i   (csum),
      .b_i   (ccarry),
      .sum_o (sum_o)
    );
  end else begin : g_adders
    da_add_tree #(.H(H), .W(OW)) u_add_tree (
      .ops_i (ops),
      .sum_o (sum_o)
    );
  end
endmodule
