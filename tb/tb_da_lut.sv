// tb_da_lut: self-checking test of one basic LUT (decoder + memory + fill).
// Loads random signed coefficients, pulses fill, checks that busy lasts
// exactly 2^KI - 1 cycles, and then reads every address and compares it with
// the sum of the selected coefficients worked out in the testbench. Repeats
// with new coefficients, so a refill is also tested.
module tb_da_lut;
  localparam int unsigned KI = 4;
  localparam int unsigned C  = 16;
  localparam int unsigned WW = C + $clog2(KI);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [KI-1:0][C-1:0] coef;
  logic fill, busy;
  logic [KI-1:0] addr;
  logic [WW-1:0] data;
  int checks = 0, failures = 0;

  da_lut #(.KI(KI), .C(C)) dut (.clk(clk), .rst_n(rst_n), .coef_i(coef), .fill_i(fill),
    .busy_o(busy), .addr_i(addr), .data_o(data));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy_cycles;
    fill = 1'b0; addr = '0; coef = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      for (int i = 0; i < KI; i++) coef[i] = C'($urandom);
      if (round == 0) for (int i = 0; i < KI; i++) coef[i] = 16'h8000;  // most negative
      if (round == 1) for (int i = 0; i < KI; i++) coef[i] = 16'h7fff;  // most positive
      fill = 1'b1;
      @(negedge clk);
      fill = 1'b0;
      busy_cycles = 0;
      while (busy) begin
        busy_cycles++;
        @(negedge clk);
      end
      checks++;
      if (busy_cycles != (1 << KI) - 1) begin
        failures++;
        $display("FAIL fill took %0d cycles, expected %0d", busy_cycles, (1 << KI) - 1);
      end
      for (int a = 0; a < (1 << KI); a++) begin
        logic signed [WW-1:0] expect_word;
        expect_word = '0;
        for (int b = 0; b < KI; b++) if (a[b]) expect_word += WW'($signed(coef[b]));
        addr = KI'(a);
        #1;
        checks++;
        if (data !== expect_word) begin
          failures++;
          $display("FAIL round %0d addr %0d: got %h expected %h", round, a, data, expect_word);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
