// tb_da_mux_layer: self-checking test of the 2-1 multiplexer layer.
// For random selects and signed coefficients, each output must be the
// sign-extended coefficient when its select is 1 and zero otherwise.
module tb_da_mux_layer;
  localparam int unsigned NM = 20;
  localparam int unsigned C  = 16;
  localparam int unsigned OW = 24;
  logic clk = 1'b0;
  logic [NM-1:0] sel;
  logic [NM-1:0][C-1:0] coef;
  logic [NM-1:0][OW-1:0] data;
  int checks = 0, failures = 0;

  da_mux_layer #(.NM(NM), .C(C), .OW(OW)) dut (.sel_i(sel), .coef_i(coef), .data_o(data));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      sel = NM'($urandom);
      for (int i = 0; i < NM; i++) coef[i] = C'($urandom);
      if (t == 0) sel = '1;
      if (t == 1) sel = '0;
      @(posedge clk);
      for (int i = 0; i < NM; i++) begin
        logic signed [OW-1:0] expect_word;
        expect_word = sel[i] ? OW'($signed(coef[i])) : '0;
        checks++;
        if (data[i] !== expect_word) begin
          failures++;
          $display("FAIL i=%0d sel=%b coef=%h data=%h", i, sel[i], coef[i], data[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
