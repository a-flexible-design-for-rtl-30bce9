// da_lut: one basic look-up table of the DA unit (decoder + memory).
//
// A basic LUT serves KI taps (KI is k_i). It stores all 2^KI partial sums of
// its KI coefficients: word a holds the sum of coef[b] over every bit b set in
// a. Each word is C + ceil(log2 KI) bits wide, two's complement. For a read,
// the KI-bit address is decoded into a 2^KI one-hot select, and the selected
// word is driven out through an AND-OR network. The output is combinational
// from addr_i.
// Fill: the paper says the sums are worked out in advance but not how they
// get into the table. Here a pulse on fill_i starts a fill from the
// coefficient inputs. One word is written per clock, for a = 1 .. 2^KI-1:
// mem[a] = mem[a with its lowest set bit cleared] + coef[index of that bit].
// Word 0 is always zero. busy_o is high for the 2^KI - 1 fill cycles. coef_i
// must stay stable while busy_o is high. Reset clears the memory.
// The structure (decoder, 2^k_i words of C + log2 k_i bits) follows the
// paper. The fill sequencer is this design's own choice.
module da_lut #(
  parameter int unsigned KI = da_pkg::DEF_LUT_BITS,
  parameter int unsigned C  = da_pkg::C_BITS,
  localparam int unsigned WW = da_pkg::sum_width(C, KI)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [KI-1:0][C-1:0]  coef_i,
  input  logic                  fill_i,
  output logic                  busy_o,
  input  logic [KI-1:0]         addr_i,
  output logic [WW-1:0]         data_o
);
  localparam int unsigned WORDS = 1 << KI;

  logic [WW-1:0] mem [WORDS];
  logic [KI:0]   cnt;              // next word to write, 1 .. WORDS-1
  logic          busy;

  // lowest set bit of the word being filled, and that word without it
  logic [KI-1:0] low_idx;
  logic [KI-1:0] base_addr;
  logic [WW-1:0] new_word;

  always_comb begin
    low_idx = '0;
    for (int b = KI - 1; b >= 0; b--) begin
      if (cnt[b]) low_idx = KI'(b);
    end
    base_addr = cnt[KI-1:0] & (cnt[KI-1:0] - KI'(1));
    new_word  = mem[base_addr] + WW'($signed(coef_i[low_idx]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      for (int a = 0; a < WORDS; a++) mem[a] <= '0;
    end else if (busy) begin
      mem[cnt[KI-1:0]] <= new_word;
      if (cnt == (KI+1)'(WORDS - 1)) busy <= 1'b0;
      cnt <= cnt + 1'b1;
    end else if (fill_i) begin
      busy <= 1'b1;
      cnt  <= (KI+1)'(1);
    end
  end

  assign busy_o = busy;

  // k_i to 2^k_i decoder and AND-OR read of the selected word
  logic [WORDS-1:0] word_sel;
  always_comb begin
    word_sel = '0;
    word_sel[addr_i] = 1'b1;
    data_o = '0;
    for (int a = 0; a < WORDS; a++) begin
      data_o |= mem[a] & {WW{word_sel[a]}};
    end
  end
endmodule
