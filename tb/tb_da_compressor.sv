// tb_da_compressor: self-checking test of the h:2 compressor tree.
// Instantiates trees of several sizes (1, 2, 3, 4, 5, 7 and 95 operands) and
// checks sum + carry == sum of all operands (mod 2^W) for random signed
// operands and for all-ones operands.
module tb_da_compressor;
  localparam int unsigned W = 24;
  localparam int unsigned NSZ = 7;
  localparam int unsigned SIZES [NSZ] = '{1, 2, 3, 4, 5, 7, 95};
  localparam int unsigned HMAX = 95;

  logic clk = 1'b0;
  logic [HMAX-1:0][W-1:0] ops;
  logic [W-1:0] s [NSZ];
  logic [W-1:0] cy [NSZ];
  int checks = 0, failures = 0;

  for (genvar z = 0; z < NSZ; z++) begin : g_dut
    da_compressor #(.H(SIZES[z]), .W(W)) dut (
      .ops_i(ops[SIZES[z]-1:0]), .sum_o(s[z]), .carry_o(cy[z]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    logic [W-1:0] ref_sum;
    @(posedge clk);
    for (int z = 0; z < NSZ; z++) begin
      ref_sum = '0;
      for (int i = 0; i < int'(SIZES[z]); i++) ref_sum += ops[i];
      checks++;
      if (W'(s[z] + cy[z]) !== ref_sum) begin
        failures++;
        $display("FAIL H=%0d sum+carry=%h expected=%h", SIZES[z], W'(s[z] + cy[z]), ref_sum);
      end
    end
  endtask

  initial begin
    ops = '0;
    check_all();
    for (int i = 0; i < HMAX; i++) ops[i] = '1;
    check_all();
    for (int t = 0; t < 500; t++) begin
      // 16-bit signed coefficients sign-extended to W, as the DA unit feeds
      for (int i = 0; i < HMAX; i++) ops[i] = W'($signed(16'($urandom)));
      check_all();
    end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < HMAX; i++) ops[i] = W'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
