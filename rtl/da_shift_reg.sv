// da_shift_reg: tap delay line and bit-plane selector of the DA FIR filter.
//
// It holds the last N input samples, x[t] in tap 0 up to x[t-N+1] in tap N-1.
// When shift_en is high, a new sample enters tap 0 and every older sample
// moves one tap further. plane_o is bit number bit_sel of every tap, so it is
// one bit plane x_j[t-i], i = 0..N-1: the N-bit word that addresses the DA unit.
// The filter steps bit_sel through the B planes of one window, one plane per
// clock.
// Following the paper, N bits leave the shift register every cycle.
// The samples sit in a word-wide delay line, and a multiplexer picks the
// plane, instead of a bit-serial shift of each word. That is this design's
// choice. It keeps the window intact, so the window can be read again.
// Timing: plane_o is combinational from the registers and bit_sel. A shift
// takes effect at the clock edge. Reset clears every tap to zero.
module da_shift_reg #(
  parameter int unsigned N = da_pkg::DEF_N,
  parameter int unsigned B = da_pkg::B_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift_en,
  input  logic [B-1:0]         sample_i,
  input  logic [$clog2(B)-1:0] bit_sel,
  output logic [N-1:0]         plane_o
);
  logic [B-1:0] taps [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) taps[i] <= '0;
    end else if (shift_en) begin
      taps[0] <= sample_i;
      for (int i = 1; i < N; i++) taps[i] <= taps[i-1];
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) plane_o[i] = taps[i][bit_sel];
  end
endmodule
