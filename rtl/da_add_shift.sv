// da_add_shift: the add/shift accumulator that follows the DA unit.
//
// The filter feeds it one bit-plane sum S_j per clock, most significant
// plane first (j = B-1 down to 0). With B-bit two's-complement samples,
//   y = -2^(B-1) * S_(B-1) + sum over j = 0..B-2 of 2^j * S_j.
// Each enabled cycle computes acc' = (first_i ? 0 : 2*acc) +/- data_i. The
// word is subtracted when sign_i is high, which the controller sets for the
// sign plane. On last_i the finished result is also copied to y_o, and
// y_valid_o pulses high for one cycle. acc and y_o are registers, so y_o
// appears the cycle after the last plane.
// The paper's figure shows a "Sign"-controlled adder/subtractor, an
// accumulator and a shift in the feedback, and Eq. (2) gives the negative
// weight of the sign bit. The MSB-first order (a left shift of the
// accumulator) and the output register are this design's own choices.
module da_add_shift #(
  parameter int unsigned WI = da_pkg::sum_width(da_pkg::C_BITS, da_pkg::DEF_N),
  parameter int unsigned B  = da_pkg::B_BITS,
  localparam int unsigned WO = WI + B
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en_i,
  input  logic          first_i,
  input  logic          sign_i,
  input  logic          last_i,
  input  logic [WI-1:0] data_i,
  output logic [WO-1:0] y_o,
  output logic          y_valid_o
);
  logic signed [WO-1:0] acc, acc_next, addend, base;

  always_comb begin
    addend   = WO'($signed(data_i));
    base     = first_i ? '0 : (acc <<< 1);
    acc_next = sign_i ? (base - addend) : (base + addend);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      y_o       <= '0;
      y_valid_o <= 1'b0;
    end else begin
      y_valid_o <= en_i && last_i;
      if (en_i) begin
        acc <= acc_next;
        if (last_i) y_o <= acc_next;
      end
    end
  end
endmodule
