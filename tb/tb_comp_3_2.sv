// tb_comp_3_2: self-checking test of the word-wide 3:2 compressor.
// Drives random and corner-case operands and checks that
// sum + carry == a + b + c (mod 2^W), and that the carry word's bit 0 is zero.
module tb_comp_3_2;
  localparam int unsigned W = 24;
  logic clk = 1'b0;
  logic [W-1:0] a, b, c, s, cy;
  int checks = 0, failures = 0;

  comp_3_2 #(.W(W)) dut (.a_i(a), .b_i(b), .c_i(c), .sum_o(s), .carry_o(cy));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [W-1:0] x, y, z);
    logic [W-1:0] expect_sum;
    a = x; b = y; c = z;
    @(posedge clk);
    expect_sum = x + y + z;
    checks++;
    if (W'(s + cy) !== expect_sum || cy[0] !== 1'b0) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h sum=%h carry=%h", x, y, z, s, cy);
    end
  endtask

  initial begin
    check_one('0, '0, '0);
    check_one('1, '1, '1);
    check_one({W{1'b1}}, 1, 0);
    for (int i = 0; i < 2000; i++) check_one(W'($urandom), W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
