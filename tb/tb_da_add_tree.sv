// tb_da_add_tree: self-checking test of the CLA adder tree used by the
// compressor-free form of the DA unit.
// Trees of 1, 2, 3, 5, 8 and 16 operands get random signed and all-ones
// operands. Each result must equal the sum of its operands (mod 2^W).
module tb_da_add_tree;
  localparam int unsigned W = 24;
  localparam int unsigned NSZ = 6;
  localparam int unsigned SIZES [NSZ] = '{1, 2, 3, 5, 8, 16};
  localparam int unsigned HMAX = 16;

  logic clk = 1'b0;
  logic [HMAX-1:0][W-1:0] ops;
  logic [W-1:0] s [NSZ];
  int checks = 0, failures = 0;

  for (genvar z = 0; z < NSZ; z++) begin : g_dut
    da_add_tree #(.H(SIZES[z]), .W(W)) dut (.ops_i(ops[SIZES[z]-1:0]), .sum_o(s[z]));
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
      if (s[z] !== ref_sum) begin
        failures++;
        $display("FAIL H=%0d sum=%h expected=%h", SIZES[z], s[z], ref_sum);
      end
    end
  endtask

  initial begin
    ops = '0;
    check_all();
    for (int i = 0; i < HMAX; i++) ops[i] = '1;
    check_all();
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < HMAX; i++) ops[i] = W'($signed(18'($urandom)));
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
