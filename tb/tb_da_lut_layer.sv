// tb_da_lut_layer: self-checking test of the LUT layer (M basic LUTs).
// The LUTs have unequal address widths (2, 3 and 5 bits). The test fills all
// LUTs from random coefficients, checks that the fill lasts 2^5 - 1 cycles
// (set by the widest LUT), then drives random K-bit addresses. Every LUT's
// output must be the sign-extended sum of the coefficients of its own taps
// whose address bit is set.
module tb_da_lut_layer;
  localparam int unsigned M  = 3;
  localparam da_pkg::lut_bits_t KI = '{0: 2, 1: 3, 2: 5, default: 0};
  localparam int unsigned OFF [M+1] = '{0, 2, 5, 10};
  localparam int unsigned KMAX = 5;
  localparam int unsigned C  = 16;
  localparam int unsigned K  = 10;
  localparam int unsigned OW = 22;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [K-1:0][C-1:0] coef;
  logic fill, busy;
  logic [K-1:0] addr;
  logic [M-1:0][OW-1:0] data;
  int checks = 0, failures = 0;

  da_lut_layer #(.M(M), .KI(KI), .C(C), .OW(OW)) dut (.clk(clk), .rst_n(rst_n),
    .coef_i(coef), .fill_i(fill), .busy_o(busy), .addr_i(addr), .data_o(data));

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
    for (int round = 0; round < 5; round++) begin
      @(negedge clk);
      for (int i = 0; i < K; i++) coef[i] = C'($urandom);
      fill = 1'b1;
      @(negedge clk);
      fill = 1'b0;
      busy_cycles = 0;
      while (busy) begin busy_cycles++; @(negedge clk); end
      checks++;
      if (busy_cycles != (1 << KMAX) - 1) begin
        failures++;
        $display("FAIL fill took %0d cycles", busy_cycles);
      end
      for (int t = 0; t < 200; t++) begin
        addr = K'($urandom);
        #1;
        for (int j = 0; j < M; j++) begin
          logic signed [OW-1:0] expect_word;
          expect_word = '0;
          for (int b = int'(OFF[j]); b < int'(OFF[j+1]); b++)
            if (addr[b]) expect_word += OW'($signed(coef[b]));
          checks++;
          if (data[j] !== expect_word) begin
            failures++;
            $display("FAIL lut %0d addr %b: got %h expected %h", j, addr, data[j], expect_word);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
