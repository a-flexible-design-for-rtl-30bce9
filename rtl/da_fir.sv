// da_fir: distributed-arithmetic FIR filter, the top level.
//
// It computes y[t] = sum over i = 0..N-1 of coef[i] * x[t-i] with no
// multiplier. It works one bit plane at a time. For bit j, the DA unit adds
// the coefficients of every tap whose sample has bit j set. Part of that sum
// comes from precomputed LUT words and part from multiplexed coefficients,
// all merged by an (N-K+M):2 compressor and a carry-lookahead adder. The
// add/shift accumulator weights the B plane sums by 2^j, and the sign plane
// by -2^(B-1).
//
// Blocks: da_coef_regs (coefficients), da_shift_reg (sample window and plane
// select), da_unit (LUT layer + MUX layer + compressor + CLA) and
// da_add_shift (accumulator). A small controller sequences them.
//
// Use:
//  1. Write coefficients with coef_we/coef_addr/coef_wdata, one per clock.
//  2. Pulse lut_fill while no sample is in flight (it is ignored otherwise).
//     lut_busy stays high for 2^max(k_i) - 1 cycles while every LUT
//     rebuilds its partial sums from the coefficient registers. Do not write
//     coefficients while lut_busy is high.
//  3. Stream samples with a valid/ready handshake (in_valid, in_ready,
//     in_sample). in_ready is low while the LUTs fill, and in the cycle in
//     which a fill starts (a fill request wins over a waiting sample).
// Timing: a sample accepted in cycle c (in_valid and in_ready both high) is
// shifted into the window at the end of that cycle. Planes B-1 .. 0 are
// processed in cycles c+1 .. c+B, and out_y is valid, with out_valid high
// for one cycle, in cycle c+B+1. A new sample can
// be accepted in the cycle of the last plane, so the filter takes one sample
// every B clocks. At B = 3 that means 120 MHz for the 40 MHz sample rate of
// the paper's filters.
// The handshake, the fill sequencing and the cycle timing are this design's
// own choices. The paper shows the datapath only.
module da_fir #(
  parameter int unsigned     N  = da_pkg::DEF_N,
  parameter int unsigned     M  = da_pkg::DEF_NUM_LUTS,
  parameter da_pkg::lut_bits_t KI = da_pkg::DEF_KI,
  parameter int unsigned     B  = da_pkg::B_BITS,
  parameter int unsigned     C  = da_pkg::C_BITS,
  parameter bit              USE_COMPRESSOR = 1'b1,
  localparam int unsigned OW = da_pkg::sum_width(C, N),
  localparam int unsigned YW = OW + B
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // coefficient load
  input  logic                 coef_we,
  input  logic [$clog2(N)-1:0] coef_addr,
  input  logic [C-1:0]         coef_wdata,
  // LUT fill
  input  logic                 lut_fill,
  output logic                 lut_busy,
  // sample input
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [B-1:0]         in_sample,
  // filter output
  output logic                 out_valid,
  output logic [YW-1:0]        out_y
);
  localparam int unsigned BW = (B > 1) ? $clog2(B) : 1;

  logic [N-1:0][C-1:0] coefs;
  logic [N-1:0]        plane;
  logic [OW-1:0]       plane_sum;
  logic                running;
  logic [BW-1:0]       bit_idx;
  logic                accept;
  logic                fill_start;
  logic                last_plane;

  // ---------------------------------------------------------------- control
  assign last_plane = running && (bit_idx == '0);
  assign fill_start = lut_fill && !lut_busy && !running;
  assign in_ready   = !lut_busy && !fill_start && (!running || last_plane);
  assign accept     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      bit_idx <= '0;
    end else if (accept) begin
      running <= 1'b1;
      bit_idx <= BW'(B - 1);
    end else if (last_plane) begin
      running <= 1'b0;
    end else if (running) begin
      bit_idx <= bit_idx - 1'b1;
    end
  end

  // --------------------------------------------------------------- datapath
  da_coef_regs #(.N(N), .C(C)) u_coef_regs (
    .clk    (clk),
    .rst_n  (rst_n),
    .we     (coef_we),
    .waddr  (coef_addr),
    .wdata  (coef_wdata),
    .coef_o (coefs)
  );

  da_shift_reg #(.N(N), .B(B)) u_shift_reg (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift_en (accept),
    .sample_i (in_sample),
    .bit_sel  (bit_idx),
    .plane_o  (plane)
  );

  da_unit #(.N(N), .M(M), .KI(KI), .C(C), .USE_COMPRESSOR(USE_COMPRESSOR)) u_da_unit (
    .clk     (clk),
    .rst_n   (rst_n),
    .coef_i  (coefs),
    .fill_i  (fill_start),
    .busy_o  (lut_busy),
    .plane_i (plane),
    .sum_o   (plane_sum)
  );

  da_add_shift #(.WI(OW), .B(B)) u_add_shift (
    .clk       (clk),
    .rst_n     (rst_n),
    .en_i      (running),
    .first_i   (bit_idx == BW'(B - 1)),
    .sign_i    (bit_idx == BW'(B - 1)),
    .last_i    (bit_idx == '0),
    .data_i    (plane_sum),
    .y_o       (out_y),
    .y_valid_o (out_valid)
  );

  // ------------------------------------------------------------- assertions
  // The sample window must not move while a plane of it is being processed.
  a_no_shift_mid_sample: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (!running || last_plane));
  // LUTs are never being refilled while a sample is in flight.
  a_no_fill_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    !(lut_busy && running));
endmodule
