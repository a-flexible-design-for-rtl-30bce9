// da_coef_regs: coefficient register file of the DA FIR filter.
//
// It holds the N filter coefficients coef[0..N-1], each C bits wide in two's
// complement, and outputs all of them in parallel as coef_o. The 2-1
// multiplexers read them, and so does the logic that fills the LUTs.
// Write port: when we is high, wdata is written into coefficient waddr at the
// clock edge. Writes to an address >= N are ignored. Reset clears all
// coefficients to zero.
// The paper shows only a "Coef Registers" box. The write port and the reset
// value are this design's own choices.
module da_coef_regs #(
  parameter int unsigned N = da_pkg::DEF_N,
  parameter int unsigned C = da_pkg::C_BITS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              we,
  input  logic [$clog2(N)-1:0]              waddr,
  input  logic signed [C-1:0]               wdata,
  output logic [N-1:0][C-1:0]               coef_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef_o <= '0;
    end else if (we && (32'(waddr) < N)) begin
      coef_o[waddr] <= wdata;
    end
  end
endmodule
